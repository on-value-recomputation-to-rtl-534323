// slice_alu -- arithmetic/logic unit for slice instructions.
//
// Slices hold only arithmetic and logic instructions (no loads, stores or
// branches). In the source design they run on the core's own functional
// units, one slice instruction at a time; this block stands for the share of
// those units a slice uses. The operation set (add, sub, multiply, and, or,
// xor, shifts, move) is this design's choice, covering the operations in the
// slice examples. Combinational, one result per cycle.
module slice_alu
  import iser_pkg::*;
(
  input  op_e               op,
  input  logic [DATA_W-1:0] a,
  input  logic [DATA_W-1:0] b,
  output logic [DATA_W-1:0] y
);
  logic [5:0] sh;
  assign sh = b[5:0];

  always_comb begin
    unique case (op)
      OP_MOV:  y = b;   // the engine routes the MOV source to b
      OP_ADD:  y = a + b;
      OP_SUB:  y = a - b;
      OP_MUL:  y = a * b;
      OP_AND:  y = a & b;
      OP_OR:   y = a | b;
      OP_XOR:  y = a ^ b;
      OP_SHL:  y = a << sh;
      OP_SHR:  y = a >> sh;
      OP_SAR:  y = DATA_W'($signed(a) >>> sh);
      default: y = a;   // NOP, RTN: pass the first operand
    endcase
  end
endmodule
