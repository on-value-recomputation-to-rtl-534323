// recompute_engine -- runs one recomputation slice and returns its value.
//
// Started for a shadowed RCMP that missed in the L1, the engine jumps to the
// slice's entry address and walks the slice one instruction per cycle:
//   1. fetch the instruction at pc from the IBuff, or from the staging buffer
//      that holds what this slice fetched while still speculative; on a miss
//      in both, request it from the fetch logic (fill_req) and wait;
//   2. read each source from one of three places: the History table, under
//      the instruction's own address, for a checkpointed input; the SFile if
//      a slice instruction already wrote that register (via the slice rename
//      table); otherwise the core's register file (a live value);
//   3. execute it on the ALU, give the destination a fresh SFile entry and
//      write the result there; then pc = pc + 1.
// RTN ends the slice: its first source is the recomputed value, handed to
// the core as the RCMP's result (done_*), which writes it to the RCMP's
// physical register and wakes up the consumers. Nothing a slice does reaches
// the memory hierarchy or the core's architectural state.
// The walk follows the source design (IBuff -> rename -> SFile/Hist/live
// registers -> ALU -> SFile, one instruction at a time, RTN copies the value
// out). An exception raised by a slice instruction (here: an opcode outside
// the defined set) aborts the recomputation and the core falls back to delay
// on miss, as the source design prescribes. Own choices: a missing Hist input,
// a slice longer than MAX_LEN instructions or a squash of the RCMP abort the
// same way (abort_*).
//
// Timing: start in cycle 0, the first slice instruction is handled in cycle
// 1, each further instruction (RTN included) takes one cycle when it hits in
// the IBuff, so a slice of N instructions delivers done_valid in cycle N
// (plus one cycle per IBuff fill awaited). done_cycles reports that count.
// Hist writes (REC) and IBuff fills pass through this block's ports. Fills go
// to the staging buffer (ibuff_stage) and reach the IBuff only after the
// recomputed load has been released by the release queue (start_owner names
// its entry); a squash of that load drops them. While the stage copies into
// the IBuff, stage_draining is high and no new slice may start.
module recompute_engine
  import iser_pkg::*;
#(
  parameter int unsigned IB_ENTRIES   = IBUFF_ENTRIES,
  parameter int unsigned HIST_N       = HIST_ENTRIES,
  parameter int unsigned SF_ENTRIES   = SFILE_ENTRIES,
  parameter int unsigned MAX_LEN      = MAX_SLICE_LEN
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // start / cancel
  input  logic                 start_valid,
  input  logic [ADDR_W-1:0]    start_slice_addr,
  input  logic [LOAD_ID_W-1:0] start_load_id,
  input  logic [SEQ_W-1:0]     start_owner,
  input  logic                 flush,
  output logic                 busy,
  output logic [LOAD_ID_W-1:0] active_load_id,
  // IBuff fill from the fetch logic
  output logic                 fill_req,
  output logic [ADDR_W-1:0]    fill_req_addr,
  input  logic                 fill_valid,
  input  logic [ADDR_W-1:0]    fill_addr,
  input  slice_instr_t         fill_instr,
  // release-queue events: when the fetched slice may enter the IBuff
  input  logic                 release_valid,
  input  logic [SEQ_W-1:0]     release_seq,
  input  logic                 squash_valid,
  input  logic [SEQ_W-1:0]     squash_seq,
  output logic                 stage_draining,
  // REC checkpoints (committed)
  input  logic                 rec_valid,
  input  logic [ADDR_W-1:0]    rec_leaf_addr,
  input  logic [$clog2(HIST_INPUTS)-1:0] rec_slot,
  input  logic [DATA_W-1:0]    rec_data,
  // live operands from the core's register file
  output logic [AREG_W-1:0]    live_areg [2],
  input  logic [DATA_W-1:0]    live_data [2],
  // result
  output logic                 done_valid,
  output logic [LOAD_ID_W-1:0] done_load_id,
  output logic [DATA_W-1:0]    done_data,
  output logic [15:0]          done_cycles,
  output logic                 abort_valid,
  output logic [LOAD_ID_W-1:0] abort_load_id,
  output abort_e               abort_cause
);
  localparam int unsigned SW = $clog2(SF_ENTRIES);

  typedef enum logic {S_IDLE, S_RUN} state_e;
  state_e                 state_q;
  logic [ADDR_W-1:0]      pc_q;
  logic [LOAD_ID_W-1:0]   id_q;
  logic [$clog2(MAX_LEN+1)-1:0] count_q;
  logic [15:0]            cyc_q;

  // ---- IBuff and its staging buffer ---------------------------------------
  logic         ib_hit, ibuf_hit, st_hit;
  slice_instr_t ins, ibuf_ins, st_ins;
  logic         ib_wr;
  logic [ADDR_W-1:0] ib_wr_addr;
  slice_instr_t ib_wr_instr;
  ibuff_stage #(.LEN(MAX_LEN), .AW(ADDR_W), .SEQ_BITS(SEQ_W)) u_stage (
    .clk, .rst_n,
    .start_valid(start_valid && state_q == S_IDLE), .start_addr(start_slice_addr),
    .start_owner,
    .fill_valid, .fill_addr, .fill_instr,
    .rd_addr(pc_q), .rd_hit(st_hit), .rd_instr(st_ins),
    .release_valid, .release_seq, .squash_valid, .squash_seq,
    .engine_idle(state_q == S_IDLE),
    .wr_valid(ib_wr), .wr_addr(ib_wr_addr), .wr_instr(ib_wr_instr),
    .draining(stage_draining)
  );
  ibuff #(.ENTRIES(IB_ENTRIES), .AW(ADDR_W)) u_ibuff (
    .clk, .rst_n,
    .fill_valid(ib_wr), .fill_addr(ib_wr_addr), .fill_instr(ib_wr_instr),
    .rd_addr(pc_q), .rd_hit(ibuf_hit), .rd_instr(ibuf_ins)
  );
  assign ib_hit = ibuf_hit || st_hit;
  assign ins    = ibuf_hit ? ibuf_ins : st_ins;

  // ---- Hist ---------------------------------------------------------------
  logic [HIST_INPUTS-1:0] h_valid;
  logic [DATA_W-1:0]      h_data [HIST_INPUTS];
  hist_table #(.ENTRIES(HIST_N), .INPUTS(HIST_INPUTS), .AW(ADDR_W), .DW(DATA_W)) u_hist (
    .clk, .rst_n,
    .rec_valid, .rec_leaf_addr, .rec_slot, .rec_data,
    .rd_addr(pc_q), .rd_hit(), .rd_valid(h_valid), .rd_data(h_data)
  );

  // ---- rename + SFile -----------------------------------------------------
  logic              clear;
  logic [AREG_W-1:0] lk_areg [2];
  logic [1:0]        lk_mapped;
  logic [SW-1:0]     lk_sidx [2];
  logic              alloc_valid, alloc_ok;
  logic [SW-1:0]     alloc_sidx;
  slice_rename #(.NAREGS(NUM_AREGS), .ENTRIES(SF_ENTRIES)) u_rename (
    .clk, .rst_n, .clear,
    .lk_areg, .lk_mapped, .lk_sidx,
    .alloc_valid, .alloc_areg(ins.dst), .alloc_ok, .alloc_sidx
  );

  logic [DATA_W-1:0] sf_data [2];
  logic [1:0]        sf_written;
  logic [DATA_W-1:0] alu_y;
  sfile #(.ENTRIES(SF_ENTRIES), .DW(DATA_W)) u_sfile (
    .clk, .rst_n, .clear,
    .wr_en(alloc_valid && alloc_ok), .wr_idx(alloc_sidx), .wr_data(alu_y),
    .rd_idx(lk_sidx), .rd_data(sf_data), .rd_written(sf_written)
  );

  // ---- operand selection --------------------------------------------------
  logic              is_binop, is_legal, uses_a, uses_b_reg, running, exec;
  logic [1:0]        src_hist;
  logic [DATA_W-1:0] opnd [2];
  logic              hist_missing;
  logic [DATA_W-1:0] alu_a, alu_b;

  assign running    = (state_q == S_RUN) && !flush;
  assign is_binop   = ins.op inside {OP_ADD, OP_SUB, OP_MUL, OP_AND, OP_OR,
                                     OP_XOR, OP_SHL, OP_SHR, OP_SAR};
  // Opcodes outside the defined set raise an exception.
  assign is_legal   = is_binop || ins.op inside {OP_NOP, OP_MOV, OP_RTN};
  assign uses_a     = is_binop || ins.op == OP_RTN || (ins.op == OP_MOV && !ins.use_imm);
  assign uses_b_reg = is_binop && !ins.use_imm;
  assign src_hist   = {ins.src2_hist, ins.src1_hist};
  assign lk_areg    = '{ins.src1, ins.src2};
  assign live_areg  = '{ins.src1, ins.src2};

  always_comb begin
    for (int p = 0; p < 2; p++) begin
      if (src_hist[p])      opnd[p] = h_data[p];
      else if (lk_mapped[p]) opnd[p] = sf_data[p];
      else                  opnd[p] = live_data[p];
    end
  end

  assign hist_missing = (uses_a && src_hist[0] && !h_valid[0]) ||
                        (uses_b_reg && src_hist[1] && !h_valid[1]);

  assign alu_a = opnd[0];
  always_comb begin
    if (ins.op == OP_MOV) alu_b = ins.use_imm ? sext_imm(ins.imm) : opnd[0];
    else                  alu_b = ins.use_imm ? sext_imm(ins.imm) : opnd[1];
  end

  slice_alu u_alu (.op(ins.op), .a(alu_a), .b(alu_b), .y(alu_y));

  // ---- control ------------------------------------------------------------
  logic is_rtn, too_long;
  assign exec        = running && ib_hit && !hist_missing && is_legal;
  assign is_rtn      = ins.op == OP_RTN;
  assign too_long    = 32'(count_q) >= MAX_LEN;
  assign alloc_valid = exec && !is_rtn && !too_long && ins.op != OP_NOP;
  assign clear       = start_valid && (state_q == S_IDLE);

  assign busy           = (state_q == S_RUN);
  assign active_load_id = id_q;
  assign fill_req       = running && !ib_hit && !too_long;
  assign fill_req_addr  = pc_q;

  assign done_valid   = exec && is_rtn && !too_long;
  assign done_load_id = id_q;
  assign done_data    = opnd[0];
  assign done_cycles  = cyc_q;

  always_comb begin
    abort_cause = AB_NONE;
    if (state_q == S_RUN) begin
      if (flush)                               abort_cause = AB_SQUASH;
      else if (too_long)                       abort_cause = AB_TOO_LONG;
      else if (ib_hit && !is_legal)            abort_cause = AB_EXCEPTION;
      else if (ib_hit && hist_missing)         abort_cause = AB_HIST_MISS;
    end
  end
  assign abort_valid   = (abort_cause != AB_NONE);
  assign abort_load_id = id_q;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state_q <= S_IDLE;
      pc_q    <= '0;
      id_q    <= '0;
      count_q <= '0;
      cyc_q   <= '0;
    end else begin
      unique case (state_q)
        S_IDLE: if (start_valid) begin
          state_q <= S_RUN;
          pc_q    <= start_slice_addr;
          id_q    <= start_load_id;
          count_q <= '0;
          cyc_q   <= 16'd1;
        end
        S_RUN: begin
          cyc_q <= cyc_q + 1'b1;
          if (done_valid || abort_valid) begin
            state_q <= S_IDLE;
          end else if (exec) begin
            pc_q    <= pc_q + 1'b1;
            count_q <= count_q + 1'b1;
          end
        end
        default: state_q <= S_IDLE;
      endcase
    end
  end

  a_no_start_when_busy: assert property (@(posedge clk) disable iff (!rst_n)
    start_valid |-> state_q == S_IDLE);
  // A register a slice instruction renamed must hold a value of this slice.
  a_sfile_written: assert property (@(posedge clk) disable iff (!rst_n)
    (exec && uses_a && !src_hist[0] && lk_mapped[0]) |-> sf_written[0]);
  a_sfile_written_b: assert property (@(posedge clk) disable iff (!rst_n)
    (exec && uses_b_reg && !src_hist[1] && lk_mapped[1]) |-> sf_written[1]);
  a_done_abort_exclusive: assert property (@(posedge clk) disable iff (!rst_n)
    !(done_valid && abort_valid));
endmodule
