// tb_recompute_engine -- test of slice execution.
//
// A small program memory in this testbench plays the fetch logic: it answers
// IBuff fill requests after FILL_LAT cycles. Cases:
//   1. the slice of the paper's running example (sumArr): inputs i and j are
//      checkpointed by REC for the leaves at S+1 and S+2; the slice has 11
//      instructions and must return sumArr[2] = 2 + 2*j in 11 cycles;
//   2. a slice with a live register input and immediates;
//   3. a leaf whose checkpoint is missing: abort with AB_HIST_MISS;
//   4. a slice not yet in the IBuff: stalls on fills, then completes;
//   5. a slice with no RTN within MAX_SLICE_LEN: abort with AB_TOO_LONG;
//   6. a squash during recomputation: abort with AB_SQUASH;
//   6b. an undefined opcode raises an exception: abort with AB_EXCEPTION
//      when that instruction is reached, no value is returned;
//   7. slice instructions fetched for a speculative load are staged: a
//      rerun finds them, a squash of the load drops them (the next run
//      fetches again), and only a release copies them into the IBuff.
// Warming the IBuff therefore means running a slice once and releasing the
// load that ran it.
// Expected values are computed here from the slice's meaning.
//
// The slice semantics follow the source design; instruction encoding, abort
// causes, staging and the fetch latency (FILL_LAT = 3) are this design's own.
// Default sizes; clock period 10 time units; watchdog 20k cycles.
module tb_recompute_engine;
  import iser_pkg::*;
  localparam int FILL_LAT = 3;
  localparam logic [ADDR_W-1:0] S1 = 48'h1000, S2 = 48'h2000, S3 = 48'h3000,
                                S4 = 48'h4000, S5 = 48'h5000, S6 = 48'h6000;
  logic clk = 0, rst_n = 0;
  logic start_valid = 0, flush = 0, busy;
  logic [ADDR_W-1:0] start_slice_addr;
  logic [LOAD_ID_W-1:0] start_load_id, active_load_id;
  logic [SEQ_W-1:0] start_owner = '0, release_seq = '0, squash_seq = '0;
  logic release_valid = 0, squash_valid = 0, stage_draining;
  logic fill_req, fill_valid = 0;
  logic [ADDR_W-1:0] fill_req_addr, fill_addr;
  slice_instr_t fill_instr;
  logic rec_valid = 0;
  logic [ADDR_W-1:0] rec_leaf_addr;
  logic [0:0] rec_slot;
  logic [DATA_W-1:0] rec_data;
  logic [AREG_W-1:0] live_areg [2];
  logic [DATA_W-1:0] live_data [2];
  logic done_valid, abort_valid;
  logic [LOAD_ID_W-1:0] done_load_id, abort_load_id;
  logic [DATA_W-1:0] done_data;
  logic [15:0] done_cycles;
  abort_e abort_cause;
  logic [DATA_W-1:0] regs [NUM_AREGS];
  int checks = 0, failures = 0, fills = 0;

  recompute_engine dut (.*);
  always #5 clk = ~clk;

  // core register file (live values)
  always_comb for (int p = 0; p < 2; p++) live_data[p] = regs[live_areg[p]];

  function automatic slice_instr_t mk(op_e op, int d, int a, int b, bit ha, bit hb,
                                      bit ui, int imm);
    slice_instr_t x;
    x.op = op; x.dst = 4'(d); x.src1 = 4'(a); x.src2 = 4'(b);
    x.src1_hist = ha; x.src2_hist = hb; x.use_imm = ui; x.imm = 32'(imm);
    return x;
  endfunction

  // program memory holding the slices
  function automatic slice_instr_t prog(logic [ADDR_W-1:0] a);
    if (a >= S1 && a <= S1 + 10) begin
      case (int'(a - S1))
        0:  return mk(OP_NOP, 0, 0, 0, 0, 0, 0, 0);   // int recArr[3]
        1:  return mk(OP_MOV, 1, 0, 0, 1, 0, 0, 0);   // read (i)
        2:  return mk(OP_MOV, 2, 0, 0, 1, 0, 0, 0);   // read (j)
        3:  return mk(OP_ADD, 3, 1, 2, 0, 0, 0, 0);   // recArr[0] = i + j
        4:  return mk(OP_ADD, 1, 1, 0, 0, 0, 1, 1);   // incr i
        5:  return mk(OP_MUL, 2, 1, 2, 0, 0, 0, 0);   // j = i * j
        6:  return mk(OP_ADD, 4, 1, 2, 0, 0, 0, 0);   // recArr[1] = i + j
        7:  return mk(OP_ADD, 1, 1, 0, 0, 0, 1, 1);   // incr i
        8:  return mk(OP_MUL, 2, 1, 2, 0, 0, 0, 0);   // j = i * j
        9:  return mk(OP_ADD, 5, 1, 2, 0, 0, 0, 0);   // recArr[2] = i + j
        default: return mk(OP_RTN, 0, 5, 0, 0, 0, 0, 0); // RTN (recArr[2])
      endcase
    end
    if (a == S2)     return mk(OP_ADD, 3, 1, 0, 0, 0, 1, 5);   // r3 = r1(live) + 5
    if (a == S2 + 1) return mk(OP_SHL, 3, 3, 0, 0, 0, 1, 2);   // r3 <<= 2
    if (a == S2 + 2) return mk(OP_SUB, 3, 3, 6, 0, 0, 0, 0);   // r3 -= r6(live)
    if (a == S2 + 3) return mk(OP_RTN, 0, 3, 0, 0, 0, 0, 0);
    if (a == S3)     return mk(OP_MOV, 1, 0, 0, 1, 0, 0, 0);   // no checkpoint exists
    if (a == S3 + 1) return mk(OP_RTN, 0, 1, 0, 0, 0, 0, 0);
    if (a == S4)     return mk(OP_MOV, 7, 0, 0, 0, 0, 1, -3);  // r7 = -3
    if (a == S4 + 1) return mk(OP_XOR, 7, 7, 2, 0, 0, 0, 0);   // r7 ^= r2(live)
    if (a == S4 + 2) return mk(OP_RTN, 0, 7, 0, 0, 0, 0, 0);
    if (a == S6)     return mk(OP_MOV, 1, 0, 0, 0, 0, 1, 9);   // r1 = 9
    if (a == S6 + 1) return mk(op_e'(4'd12), 1, 1, 1, 0, 0, 0, 0); // undefined opcode
    if (a == S6 + 2) return mk(OP_RTN, 0, 1, 0, 0, 0, 0, 0);
    return mk(OP_NOP, 0, 0, 0, 0, 0, 0, 0);                   // S5: NOPs, no RTN
  endfunction

  // fetch logic model: answer a fill request after FILL_LAT cycles
  initial begin
    fill_addr = '0; fill_instr = '0;
    forever begin
      @(posedge clk);
      if (fill_req && !fill_valid) begin
        logic [ADDR_W-1:0] a;
        a = fill_req_addr;
        repeat (FILL_LAT - 1) @(posedge clk);
        @(negedge clk);
        fill_valid = 1; fill_addr = a; fill_instr = prog(a);
        @(negedge clk);
        fill_valid = 0;
        fills++;
      end
    end
  end

  task automatic chk(string what, logic ok);
    checks++;
    if (!ok) begin failures++; $display("%t FAIL %s", $time, what); end
  endtask

  task automatic rec(logic [ADDR_W-1:0] a, logic [DATA_W-1:0] d);
    @(negedge clk);
    rec_valid = 1; rec_leaf_addr = a; rec_slot = 0; rec_data = d;
    @(negedge clk);
    rec_valid = 0;
  endtask

  // start a slice, wait for done or abort; returns cycles counted here
  task automatic run(logic [ADDR_W-1:0] s, logic [7:0] id, int flush_at,
                     output int cyc, output bit done, output bit ab,
                     output logic [DATA_W-1:0] val, output abort_e cause);
    @(negedge clk);
    start_owner = start_owner + 1'b1;
    start_valid = 1; start_slice_addr = s; start_load_id = id;
    @(negedge clk);
    start_valid = 0;
    cyc = 1; done = 0; ab = 0;
    while (!done && !ab && cyc < 1000) begin
      flush = (cyc == flush_at);
      #1;
      if (done_valid) begin
        done = 1; val = done_data;
        chk("done id", done_load_id == id);
        chk($sformatf("done_cycles %0d vs %0d", done_cycles, cyc), int'(done_cycles) == cyc);
      end
      if (abort_valid) begin
        ab = 1; cause = abort_cause;
        chk("abort id", abort_load_id == id);
      end
      @(negedge clk);
      flush = 0;
      if (!done && !ab) cyc++;
    end
  endtask

  // Warm the IBuff with a slice: run it once (its fetches are staged), then
  // release the load that ran it so the stage copies them into the IBuff.
  task automatic warm(logic [ADDR_W-1:0] base);
    int cyc; bit done, ab; logic [DATA_W-1:0] val; abort_e cause;
    run(base, 8'hEE, -1, cyc, done, ab, val, cause);
    release_owner(start_owner);
  endtask

  task automatic release_owner(logic [SEQ_W-1:0] o);
    int t = 0;
    @(negedge clk);
    release_valid = 1; release_seq = o;
    @(negedge clk);
    release_valid = 0;
    while (stage_draining && t < 500) begin @(negedge clk); t++; end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int cyc, f0; bit done, ab; logic [DATA_W-1:0] val; abort_e cause;
    logic [DATA_W-1:0] j;
    for (int r = 0; r < NUM_AREGS; r++) regs[r] = 64'(r * 1000);
    start_slice_addr = '0; start_load_id = '0; rec_leaf_addr = '0; rec_slot = 0; rec_data = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    chk("idle after reset", !busy);

    // 1. running example
    j = 64'd7;
    rec(S1 + 1, 64'd0);   // REC (i, S+1)
    rec(S1 + 2, j);       // REC (j, S+2)
    warm(S1);
    f0 = fills;
    run(S1, 8'd5, -1, cyc, done, ab, val, cause);
    chk("example: done", done && !ab);
    chk($sformatf("example: value %0d exp %0d", val, 2 + 2 * j), val == 2 + 2 * j);
    chk($sformatf("example: %0d cycles for 11 instructions", cyc), cyc == 11);
    chk("example: no fill needed once warm", fills == f0);
    chk("architectural registers untouched", regs[1] == 1000 && regs[5] == 5000);
    // same slice with other inputs: values come from Hist, not stale SFile
    rec(S1 + 2, 64'd100);
    run(S1, 8'd6, -1, cyc, done, ab, val, cause);
    chk($sformatf("example again: value %0d", val), done && val == 64'd202);

    // 2. live inputs
    regs[1] = 64'd100; regs[6] = 64'd20;
    warm(S2);
    run(S2, 8'd7, -1, cyc, done, ab, val, cause);
    chk($sformatf("live: value %0d exp %0d", val, ((100 + 5) << 2) - 20), done && val == ((100 + 5) << 2) - 20);
    chk($sformatf("live: cycles %0d", cyc), cyc == 4);

    // 3. missing checkpoint
    warm(S3);
    run(S3, 8'd8, -1, cyc, done, ab, val, cause);
    chk("hist miss: aborted", ab && !done && cause == AB_HIST_MISS && cyc == 1);
    @(negedge clk);
    chk("idle after abort", !busy);

    // 4. IBuff misses: each of 3 instructions waits for a fill
    regs[2] = 64'h00FF;
    f0 = fills;
    run(S4, 8'd9, -1, cyc, done, ab, val, cause);
    chk($sformatf("fill: value %h", val), done && val == (64'hFFFF_FFFF_FFFF_FFFD ^ 64'h00FF));
    chk($sformatf("fill: %0d fills", fills - f0), fills - f0 == 3);
    chk($sformatf("fill: stalled, %0d cycles", cyc), cyc > 3 + 3 * FILL_LAT - 1);

    // 5. too long
    warm(S5);
    run(S5, 8'd10, -1, cyc, done, ab, val, cause);
    chk($sformatf("too long: abort cause %s after %0d cycles", cause.name(), cyc),
        ab && cause == AB_TOO_LONG && cyc == MAX_SLICE_LEN + 1);

    // 6. squash in the third cycle of the example slice
    run(S1, 8'd11, 3, cyc, done, ab, val, cause);
    chk("squash: aborted", ab && !done && cause == AB_SQUASH && cyc == 3);
    @(negedge clk);
    chk("idle after squash", !busy);
    // and the engine works again afterwards
    run(S1, 8'd12, -1, cyc, done, ab, val, cause);
    chk("after squash: value", done && val == 64'd202);

    // 6b. exception in the second instruction
    warm(S6);
    run(S6, 8'd20, -1, cyc, done, ab, val, cause);
    chk($sformatf("exception: abort cause %s after %0d cycles", cause.name(), cyc),
        ab && !done && cause == AB_EXCEPTION && cyc == 2);
    @(negedge clk);
    chk("idle after exception", !busy);

    // 7. speculative fetches stay out of the IBuff until the load is released
    f0 = fills;
    run(S4, 8'd13, -1, cyc, done, ab, val, cause);
    chk($sformatf("stage: cold run fetched %0d", fills - f0), done && fills - f0 == 3);
    f0 = fills;
    run(S4, 8'd14, -1, cyc, done, ab, val, cause);
    chk($sformatf("stage: rerun before release hits the stage (%0d fills, %0d cycles)", fills - f0, cyc),
        done && fills == f0 && cyc == 3);
    @(negedge clk);
    squash_valid = 1; squash_seq = start_owner;
    @(negedge clk);
    squash_valid = 0;
    f0 = fills;
    run(S4, 8'd15, -1, cyc, done, ab, val, cause);
    chk($sformatf("stage: squashed load left no trace (%0d fills)", fills - f0),
        done && fills - f0 == 3 && cyc > 3);
    release_owner(start_owner);
    f0 = fills;
    run(S4, 8'd16, -1, cyc, done, ab, val, cause);
    chk($sformatf("stage: after release the IBuff holds the slice (%0d fills, %0d cycles)", fills - f0, cyc),
        done && fills == f0 && cyc == 3);
    chk("stage: value", val == (64'hFFFF_FFFF_FFFF_FFFD ^ 64'h00FF));

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
