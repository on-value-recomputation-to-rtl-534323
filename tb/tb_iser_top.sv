// tb_iser_top -- end-to-end test of ISER at its default sizes.
//
// The testbench plays the out-of-order core: it dispatches instructions,
// resolves shadows, executes RCMPs with chosen L1/MSHR outcomes, commits REC
// checkpoints, answers IBuff fill requests (fetch model) and serves live
// register reads. Part 1 walks every path of the RCMP flowchart and the
// recomputation engine once or more:
//   unshadowed load, shadowed L1 hit, shadowed MSHR hit, recompute (the
//   paper's sumArr example, 11 slice instructions), delay with no slice,
//   delay because the engine is busy, recomputation abandoned for a missing
//   History entry (falls back to delay), recomputation cancelled by a
//   squash, recomputation abandoned for an exception in the slice, IBuff
//   fill stalls, release of delayed loads when shadows lift,
//   slice instructions fetched for a squashed load never reaching the IBuff
//   while those of a released load do, and dispatch stalled by a full
//   shadow buffer.
// Each mechanism is counted; one that never happens counts as a failure.
// Part 2 is a random stream of shadow casters and loads with out-of-order
// shadow resolution; every release is checked against a reference: loads
// leave in order, and only once every older shadow is resolved.
//
// The mechanisms checked are those of the source design (shadows, release,
// the RCMP flowchart, recomputation from IBuff/Hist/SFile/live registers,
// delay on miss, updates only when non-speculative); the port protocol, the
// fallback causes and the fetch latency (FILL_LAT = 2) are this design's own.
// Default sizes throughout; clock period 10 time units; watchdog 200k cycles.
module tb_iser_top;
  import iser_pkg::*;
  localparam int FILL_LAT = 2;
  localparam logic [ADDR_W-1:0] S1 = 48'h1000, S3 = 48'h3000, S4 = 48'h4000;

  logic clk = 0, rst_n = 0;
  logic disp_valid = 0, disp_casts_shadow = 0, disp_is_load = 0, disp_ready, disp_load_shadowed;
  logic [LOAD_ID_W-1:0] disp_load_id;
  logic [SEQ_W-1:0] disp_sb_seq, disp_rq_seq;
  logic resolve_valid = 0, squash_valid = 0;
  logic [SEQ_W-1:0] resolve_sb_seq, squash_sb_seq, squash_rq_seq;
  logic release_valid;
  logic [LOAD_ID_W-1:0] release_load_id;
  logic rcmp_valid = 0, rcmp_in_rq, rcmp_slice_valid, l1_hit, mshr_hit;
  logic [LOAD_ID_W-1:0] rcmp_load_id;
  logic [SEQ_W-1:0] rcmp_rq_seq;
  logic [ADDR_W-1:0] rcmp_slice_addr;
  rcmp_dec_e rcmp_decision;
  logic rec_valid = 0;
  logic [ADDR_W-1:0] rec_leaf_addr;
  logic [0:0] rec_slot;
  logic [DATA_W-1:0] rec_data;
  logic fill_req, fill_valid = 0;
  logic [ADDR_W-1:0] fill_req_addr, fill_addr;
  slice_instr_t fill_instr;
  logic [AREG_W-1:0] live_areg [2];
  logic [DATA_W-1:0] live_data [2];
  logic rc_done_valid, rc_abort_valid, rc_busy;
  logic [LOAD_ID_W-1:0] rc_done_load_id, rc_abort_load_id;
  logic [DATA_W-1:0] rc_done_data;
  logic [15:0] rc_done_cycles;
  abort_e rc_abort_cause;

  logic [DATA_W-1:0] regs [NUM_AREGS];
  int checks = 0, failures = 0;
  // mechanism counters
  int n_unshadowed = 0, n_l1hit = 0, n_mshr = 0, n_recompute = 0, n_done = 0;
  int n_delay_noslice = 0, n_delay_busy = 0, n_histmiss = 0, n_squash = 0, n_exception = 0;
  int n_fill = 0, n_release = 0, n_sb_full = 0, n_ib_commit = 0, n_stage_drop = 0;
  // observed events
  logic [LOAD_ID_W-1:0] rel_q [$];
  logic [LOAD_ID_W-1:0] done_id; logic [DATA_W-1:0] done_val; int done_cyc; bit got_done;
  logic [LOAD_ID_W-1:0] ab_id; abort_e ab_cause; bit got_abort;

  iser_top dut (.*);
  always #5 clk = ~clk;
  always_comb for (int p = 0; p < 2; p++) live_data[p] = regs[live_areg[p]];

  // probes on the staging of speculatively fetched slice instructions
  always @(posedge clk) if (rst_n) begin
    if (dut.u_engine.ib_wr) n_ib_commit++;
    if (dut.u_engine.u_stage.owner_squashed) n_stage_drop++;
  end

  always @(posedge clk) begin
    if (rst_n && release_valid) begin rel_q.push_back(release_load_id); n_release++; end
    if (rst_n && rc_done_valid) begin
      got_done = 1; done_id = rc_done_load_id; done_val = rc_done_data; done_cyc = int'(rc_done_cycles);
      n_done++;
    end
    if (rst_n && rc_abort_valid) begin
      got_abort = 1; ab_id = rc_abort_load_id; ab_cause = rc_abort_cause;
      if (rc_abort_cause == AB_HIST_MISS) n_histmiss++;
      if (rc_abort_cause == AB_SQUASH) n_squash++;
      if (rc_abort_cause == AB_EXCEPTION) n_exception++;
    end
  end

  function automatic slice_instr_t mk(op_e op, int d, int a, int b, bit ha, bit ui, int imm);
    slice_instr_t x;
    x.op = op; x.dst = 4'(d); x.src1 = 4'(a); x.src2 = 4'(b);
    x.src1_hist = ha; x.src2_hist = 1'b0; x.use_imm = ui; x.imm = 32'(imm);
    return x;
  endfunction

  // program memory: the running example at S1, a slice with a missing input
  // at S3, a slice whose second instruction raises an exception at S4
  function automatic slice_instr_t prog(logic [ADDR_W-1:0] a);
    case (a)
      S1 + 0:  return mk(OP_NOP, 0, 0, 0, 0, 0, 0);
      S1 + 1:  return mk(OP_MOV, 1, 0, 0, 1, 0, 0);
      S1 + 2:  return mk(OP_MOV, 2, 0, 0, 1, 0, 0);
      S1 + 3:  return mk(OP_ADD, 3, 1, 2, 0, 0, 0);
      S1 + 4:  return mk(OP_ADD, 1, 1, 0, 0, 1, 1);
      S1 + 5:  return mk(OP_MUL, 2, 1, 2, 0, 0, 0);
      S1 + 6:  return mk(OP_ADD, 4, 1, 2, 0, 0, 0);
      S1 + 7:  return mk(OP_ADD, 1, 1, 0, 0, 1, 1);
      S1 + 8:  return mk(OP_MUL, 2, 1, 2, 0, 0, 0);
      S1 + 9:  return mk(OP_ADD, 5, 1, 2, 0, 0, 0);
      S1 + 10: return mk(OP_RTN, 0, 5, 0, 0, 0, 0);
      S3 + 0:  return mk(OP_MOV, 1, 0, 0, 1, 0, 0);
      S4 + 0:  return mk(OP_MOV, 1, 0, 0, 0, 1, 3);
      S4 + 1:  return mk(op_e'(4'd13), 1, 1, 1, 0, 0, 0);  // undefined opcode
      default: return mk(OP_RTN, 0, 1, 0, 0, 0, 0);
    endcase
  endfunction

  // fetch model
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
        n_fill++;
      end
    end
  end

  task automatic chk(string what, logic ok);
    checks++;
    if (!ok) begin failures++; if (failures < 30) $display("%t FAIL %s", $time, what); end
  endtask

  task automatic dispatch(bit casts, bit ld, logic [7:0] id,
                          output logic [SEQ_W-1:0] sbs, output logic [SEQ_W-1:0] rqs,
                          output bit shadowed);
    @(negedge clk);
    disp_valid = 1; disp_casts_shadow = casts; disp_is_load = ld; disp_load_id = id;
    #1;
    while (!disp_ready) begin @(negedge clk); #1; end
    sbs = disp_sb_seq; rqs = disp_rq_seq; shadowed = disp_load_shadowed;
    @(negedge clk);
    disp_valid = 0; disp_casts_shadow = 0; disp_is_load = 0;
  endtask

  task automatic rcmp(logic [7:0] id, bit in_rq, logic [SEQ_W-1:0] rqs, bit sv,
                      logic [ADDR_W-1:0] sa, bit l1, bit mh, output rcmp_dec_e dec);
    @(negedge clk);
    rcmp_valid = 1; rcmp_load_id = id; rcmp_in_rq = in_rq; rcmp_rq_seq = rqs;
    rcmp_slice_valid = sv; rcmp_slice_addr = sa; l1_hit = l1; mshr_hit = mh;
    #1;
    dec = rcmp_decision;
    @(negedge clk);
    rcmp_valid = 0;
  endtask

  task automatic resolve(logic [SEQ_W-1:0] s);
    @(negedge clk);
    resolve_valid = 1; resolve_sb_seq = s;
    @(negedge clk);
    resolve_valid = 0;
  endtask

  task automatic rec(logic [ADDR_W-1:0] a, logic [DATA_W-1:0] d);
    @(negedge clk);
    rec_valid = 1; rec_leaf_addr = a; rec_slot = 0; rec_data = d;
    @(negedge clk);
    rec_valid = 0;
  endtask

  task automatic wait_engine();
    int t = 0;
    while ((rc_busy) && t < 500) begin @(negedge clk); t++; end
    @(negedge clk);
  endtask

  // ---- random part reference ----
  int    m_tail = 0;
  int    unres [$];
  typedef struct { logic [7:0] id; int assoc; } ld_t;
  ld_t   exp_q [$];

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [SEQ_W-1:0] sb_br, sbs, rq3, rq4, rq5, rq6, rq7, rqx, rqn;
    logic [SEQ_W-1:0] sb_many [64];
    bit sh;
    rcmp_dec_e dec;
    logic [DATA_W-1:0] j;
    for (int r = 0; r < NUM_AREGS; r++) regs[r] = 64'(r);
    disp_load_id = 0; resolve_sb_seq = 0; squash_sb_seq = 0; squash_rq_seq = 0;
    rcmp_load_id = 0; rcmp_in_rq = 0; rcmp_rq_seq = 0; rcmp_slice_valid = 0;
    rcmp_slice_addr = 0; l1_hit = 0; mshr_hit = 0;
    rec_leaf_addr = 0; rec_slot = 0; rec_data = 0;
    got_done = 0; got_abort = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;

    // ================= part 1: directed =================
    // load 1: no shadow at all -> plain load even on an L1 miss
    dispatch(0, 1, 8'd1, sbs, rqx, sh);
    chk("load 1 not shadowed", !sh);
    rcmp(8'd1, sh, rqx, 1, S1, 0, 0, dec);
    chk("unshadowed RCMP performs the load", dec == DEC_LOAD);
    if (dec == DEC_LOAD) n_unshadowed++;

    // a branch casts a shadow over everything after it
    dispatch(1, 0, 8'd0, sb_br, rqx, sh);
    // REC checkpoints of the example's inputs (committed before the shadow)
    j = 64'd9;
    rec(S1 + 1, 64'd0);
    rec(S1 + 2, j);
    // loads 2..7 enter under the branch's shadow
    dispatch(0, 1, 8'd2, sbs, rqx, sh);
    chk("load 2 shadowed", sh);
    rcmp(8'd2, sh, rqx, 1, S1, 1, 0, dec);
    chk("shadowed L1 hit performs the load", dec == DEC_LOAD);
    if (dec == DEC_LOAD) n_l1hit++;
    dispatch(0, 1, 8'd3, sbs, rq3, sh);
    rcmp(8'd3, sh, rq3, 1, S1, 0, 1, dec);
    chk("shadowed MSHR hit performs the load", dec == DEC_LOAD);
    if (dec == DEC_LOAD) n_mshr++;
    dispatch(0, 1, 8'd4, sbs, rq4, sh);
    dispatch(0, 1, 8'd5, sbs, rq5, sh);
    dispatch(0, 1, 8'd6, sbs, rq6, sh);
    dispatch(0, 1, 8'd7, sbs, rq7, sh);
    // load 4: shadowed miss with a slice -> recompute
    got_done = 0;
    rcmp(8'd4, 1, rq4, 1, S1, 0, 0, dec);
    chk("shadowed miss with slice recomputes", dec == DEC_RECOMPUTE);
    if (dec == DEC_RECOMPUTE) n_recompute++;
    // load 5: engine busy -> delay
    rcmp(8'd5, 1, rq5, 1, S1, 0, 0, dec);
    chk("engine busy: delay", dec == DEC_DELAY);
    if (dec == DEC_DELAY) n_delay_busy++;
    wait_engine();
    chk("recomputed value for load 4", got_done && done_id == 8'd4 && done_val == 2 + 2 * j);
    chk($sformatf("first run waits for IBuff fills (%0d cycles)", done_cyc), done_cyc > 11);
    chk("loads still held by the shadow", rel_q.size() == 0);
    // load 6: no slice -> delay
    rcmp(8'd6, 1, rq6, 0, S1, 0, 0, dec);
    chk("no slice: delay", dec == DEC_DELAY);
    if (dec == DEC_DELAY) n_delay_noslice++;
    // load 7: recomputation of the now-cached example takes 11 cycles
    got_done = 0;
    rcmp(8'd7, 1, rq7, 1, S1, 0, 0, dec);
    chk("second recompute", dec == DEC_RECOMPUTE);
    if (dec == DEC_RECOMPUTE) n_recompute++;
    wait_engine();
    chk($sformatf("IBuff hit: 11 slice instructions in %0d cycles", done_cyc),
        got_done && done_id == 8'd7 && done_cyc == 11 && done_val == 2 + 2 * j);
    // load 8: slice with an input never checkpointed -> recomputation abandoned
    dispatch(0, 1, 8'd8, sbs, rqn, sh);
    got_abort = 0;
    rcmp(8'd8, 1, rqn, 1, S3, 0, 0, dec);
    chk("load 8 recompute started", dec == DEC_RECOMPUTE);
    wait_engine();
    chk("load 8 falls back to delay on miss", got_abort && ab_id == 8'd8 && ab_cause == AB_HIST_MISS);
    // load 9: recomputation cancelled by a squash from load 9 onwards
    dispatch(0, 1, 8'd9, sbs, rqx, sh);
    got_abort = 0;
    rcmp(8'd9, 1, rqx, 1, S1, 0, 0, dec);
    @(negedge clk);
    squash_valid = 1; squash_sb_seq = sb_br + 1; squash_rq_seq = rqx;
    @(negedge clk);
    squash_valid = 0;
    wait_engine();
    chk("squash cancels the recomputation", got_abort && ab_id == 8'd9 && ab_cause == AB_SQUASH);
    // shadow lifts: the shadowed loads 2..8 leave in order
    resolve(sb_br);
    repeat (12) @(negedge clk);
    chk($sformatf("released %0d loads after the shadow lifted", rel_q.size()), rel_q.size() == 7);
    for (int k = 0; k < 7 && rel_q.size() > 0; k++) begin
      logic [7:0] r;
      r = rel_q.pop_front();
      chk($sformatf("release order: %0d exp %0d", r, k + 2), r == 8'(k + 2));
    end
    // the squash above dropped the slice instructions fetched for load 9, so
    // the IBuff holds nothing of the example: load 10 must fetch it again
    wait_engine();
    chk("squashed recomputation dropped its fetches", n_stage_drop > 0 && n_ib_commit == 0);
    dispatch(1, 0, 8'd0, sb_br, rqx, sh);
    dispatch(0, 1, 8'd10, sbs, rqx, sh);
    got_done = 0;
    rcmp(8'd10, sh, rqx, 1, S1, 0, 0, dec);
    wait_engine();
    chk($sformatf("no IBuff trace of squashed load: %0d cycles", done_cyc),
        dec == DEC_RECOMPUTE && got_done && done_cyc > 11);
    chk("fetches held back while load 10 is shadowed", n_ib_commit == 0);
    resolve(sb_br);
    repeat (4) @(negedge clk);
    wait_engine();
    chk($sformatf("release of load 10 copies %0d instructions into the IBuff", n_ib_commit),
        n_ib_commit == 11);
    dispatch(1, 0, 8'd0, sb_br, rqx, sh);
    dispatch(0, 1, 8'd11, sbs, rqx, sh);
    got_done = 0;
    rcmp(8'd11, sh, rqx, 1, S1, 0, 0, dec);
    wait_engine();
    chk($sformatf("load 11 runs from the IBuff: %0d cycles", done_cyc), got_done && done_cyc == 11);
    resolve(sb_br);
    repeat (4) @(negedge clk);
    // load 12: its slice raises an exception, so it falls back to delay on miss
    wait_engine();
    dispatch(1, 0, 8'd0, sb_br, rqx, sh);
    dispatch(0, 1, 8'd12, sbs, rqx, sh);
    got_abort = 0; got_done = 0;
    rcmp(8'd12, sh, rqx, 1, S4, 0, 0, dec);
    wait_engine();
    chk("load 12: exception in the slice falls back to delay on miss",
        dec == DEC_RECOMPUTE && got_abort && !got_done && ab_id == 8'd12 && ab_cause == AB_EXCEPTION);
    rel_q.delete();
    resolve(sb_br);
    repeat (4) @(negedge clk);
    chk("load 12 released once its shadow lifts", rel_q.size() == 1 && rel_q[0] == 8'd12);
    rel_q.delete();

    // fill the shadow buffer: the 65th shadow caster must wait
    for (int k = 0; k < 64; k++) dispatch(1, 0, 8'd0, sb_many[k], rqx, sh);
    @(negedge clk);
    disp_valid = 1; disp_casts_shadow = 1;
    #1;
    chk("full shadow buffer stalls dispatch", !disp_ready);
    if (!disp_ready) n_sb_full++;
    disp_valid = 0; disp_casts_shadow = 0;
    for (int k = 0; k < 64; k++) resolve(sb_many[k]);
    repeat (70) @(negedge clk);
    m_tail = int'(sb_many[63]) + 1;

    // ================= part 2: random =================
    rel_q.delete();
    for (int n = 0; n < 4000; n++) begin
      bit c, l;
      @(negedge clk);
      c = ($urandom_range(0, 9) < 3);
      l = ($urandom_range(0, 9) < 4);
      disp_valid = c || l; disp_casts_shadow = c; disp_is_load = l;
      disp_load_id = 8'($urandom);
      resolve_valid = 0;
      if (unres.size() > 0 && $urandom_range(0, 9) < 4) begin
        int k;
        k = $urandom_range(0, unres.size() - 1);
        resolve_valid = 1; resolve_sb_seq = SEQ_W'(unres[k]);
        unres.delete(k);
      end
      #1;
      if (disp_valid && disp_ready) begin
        if (l && disp_load_shadowed) exp_q.push_back('{id: disp_load_id, assoc: m_tail});
        if (c) begin unres.push_back(m_tail); m_tail++; end
      end
      // check releases seen so far
      while (rel_q.size() > 0) begin
        logic [7:0] r;
        int lowest;
        r = rel_q.pop_front();
        lowest = m_tail;
        foreach (unres[k]) if (unres[k] < lowest) lowest = unres[k];
        chk("random: release with nothing expected", exp_q.size() > 0);
        if (exp_q.size() > 0) begin
          chk($sformatf("random: release id %0d exp %0d", r, exp_q[0].id), r == exp_q[0].id);
          chk("random: released while an older shadow is unresolved", exp_q[0].assoc <= lowest);
          void'(exp_q.pop_front());
        end
      end
    end
    @(negedge clk);
    disp_valid = 0; resolve_valid = 0;
    while (unres.size() > 0) begin resolve(SEQ_W'(unres[0])); unres.delete(0); end
    repeat (200) @(negedge clk);
    while (rel_q.size() > 0) begin
      logic [7:0] r;
      r = rel_q.pop_front();
      if (exp_q.size() > 0) begin
        chk("random: final release order", r == exp_q[0].id);
        void'(exp_q.pop_front());
      end
    end
    chk($sformatf("random: %0d loads never released", exp_q.size()), exp_q.size() == 0);

    // ================= mechanism coverage =================
    $display("mechanisms: unshadowed=%0d l1hit=%0d mshr=%0d recompute=%0d done=%0d delay_noslice=%0d delay_busy=%0d histmiss=%0d squash=%0d fills=%0d releases=%0d sb_full=%0d ibuff_commit=%0d stage_drop=%0d exception=%0d",
             n_unshadowed, n_l1hit, n_mshr, n_recompute, n_done, n_delay_noslice, n_delay_busy,
             n_histmiss, n_squash, n_fill, n_release, n_sb_full, n_ib_commit, n_stage_drop, n_exception);
    chk("mechanism: unshadowed load", n_unshadowed > 0);
    chk("mechanism: shadowed L1 hit", n_l1hit > 0);
    chk("mechanism: MSHR hit", n_mshr > 0);
    chk("mechanism: recompute", n_recompute > 0 && n_done >= 2);
    chk("mechanism: delay, no slice", n_delay_noslice > 0);
    chk("mechanism: delay, engine busy", n_delay_busy > 0);
    chk("mechanism: Hist miss fallback", n_histmiss > 0);
    chk("mechanism: squash of recomputation", n_squash > 0);
    chk("mechanism: exception fallback", n_exception > 0);
    chk("mechanism: IBuff fill", n_fill > 0);
    chk("mechanism: release", n_release > 0);
    chk("mechanism: shadow buffer full", n_sb_full > 0);
    chk("mechanism: IBuff written only after release", n_ib_commit > 0);
    chk("mechanism: squashed fetches dropped", n_stage_drop > 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
