// tb_slice_alu -- self-checking test of the slice ALU.
// Drives every opcode with random and corner operands and compares the result
// with an expression computed here from the opcode's definition.
//
// The operations are those a slice may contain (arithmetic and logic only,
// as in the source design); the opcode list is this design's own.
// Combinational; random operands per opcode.
module tb_slice_alu;
  import iser_pkg::*;
  op_e               op;
  logic [DATA_W-1:0] a, b, y, exp;
  int checks = 0, failures = 0;

  slice_alu dut (.op, .a, .b, .y);

  function automatic logic [DATA_W-1:0] model(op_e o, logic [63:0] x, logic [63:0] z);
    longint sx;
    sx = x;
    case (o)
      OP_MOV: return z;
      OP_ADD: return x + z;
      OP_SUB: return x - z;
      OP_MUL: return x * z;
      OP_AND: return x & z;
      OP_OR:  return x | z;
      OP_XOR: return x ^ z;
      OP_SHL: return x << z[5:0];
      OP_SHR: return x >> z[5:0];
      OP_SAR: return 64'(sx >>> z[5:0]);
      default: return x;
    endcase
  endfunction

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    op_e ops[12] = '{OP_NOP, OP_MOV, OP_ADD, OP_SUB, OP_MUL, OP_AND, OP_OR,
                     OP_XOR, OP_SHL, OP_SHR, OP_SAR, OP_RTN};
    // A few fixed values worked out by hand.
    op = OP_ADD; a = 64'd5; b = 64'd7; #1;
    checks++; if (y !== 64'd12) begin failures++; $display("ADD 5+7 = %0d", y); end
    op = OP_MUL; a = 64'd3; b = 64'd9; #1;
    checks++; if (y !== 64'd27) begin failures++; $display("MUL 3*9 = %0d", y); end
    op = OP_SAR; a = 64'hF000_0000_0000_0000; b = 64'd4; #1;
    checks++; if (y !== 64'hFF00_0000_0000_0000) begin failures++; $display("SAR = %h", y); end
    op = OP_SHR; a = 64'hF000_0000_0000_0000; b = 64'd68; #1;  // amount taken mod 64
    checks++; if (y !== 64'h0F00_0000_0000_0000) begin failures++; $display("SHR = %h", y); end
    op = OP_SUB; a = 64'd0; b = 64'd1; #1;
    checks++; if (y !== '1) begin failures++; $display("SUB = %h", y); end
    for (int n = 0; n < 2000; n++) begin
      op = ops[$urandom_range(0, 11)];
      a  = {$urandom, $urandom};
      b  = {$urandom, $urandom};
      #1;
      exp = model(op, a, b);
      checks++;
      if (y !== exp) begin
        failures++;
        if (failures < 10) $display("op=%s a=%h b=%h y=%h exp=%h", op.name(), a, b, y, exp);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
