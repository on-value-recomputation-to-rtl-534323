// tb_iser_workloads -- the slice shapes and table loads ISER is sized for,
// run on two copies of the top.
//
// u_vrc is the top at its default sizes (slices of up to 100 instructions,
// 1024-entry History table). u_vrc2 is the same top with MAX_LEN = 2: the
// "two-cycle" variant, in which only slices that finish within two cycles
// are recomputed and everything longer falls back to delay-on-miss. Both get
// identical stimulus; each has its own fetch model answering IBuff fills.
//
// Workloads, each run with the slice's IBuff lines cold and then warm:
//   fig3   the sumArr example (11 instructions, two checkpointed inputs);
//   mean7  a 7-instruction chain, the average slice cost seen on SPEC2006;
//   max100 a 100-instruction chain, the longest slice that is ever built;
//   over   a 101-instruction chain, which must be abandoned;
//   short2 a 2-instruction slice, the only kind the two-cycle variant keeps;
//   hist   1024 slices whose inputs are all checkpointed first and then all
//          recomputed, i.e. a full History table of live slices, each entry
//          holding both inputs of its slice.
// For every recomputation the value and the cycle count are checked; a
// recomputation that is abandoned must report why. Each workload counts its
// completions, and a workload that never completes counts as a failure.
//
// Slice lengths (100-instruction limit, 7-cycle average), the 22 KiB History
// table and the two-cycle variant come from the source design's evaluation;
// the slices themselves are synthetic chains written for this test.
// clock period 10 time units; watchdog 2M cycles.
module tb_iser_workloads;
  import iser_pkg::*;
  localparam int FILL_LAT = 2;
  localparam logic [ADDR_W-1:0] S_FIG3 = 48'h1000;
  localparam logic [ADDR_W-1:0] S_M7   = 48'h30000;
  localparam logic [ADDR_W-1:0] S_M100 = 48'h10000;
  localparam logic [ADDR_W-1:0] S_OVER = 48'h20000;
  localparam logic [ADDR_W-1:0] S_SH2  = 48'h40000;
  localparam logic [ADDR_W-1:0] S_HIST = 48'h1000000;  // slice k at S_HIST + k*2049
  localparam int HIST_SLICES = HIST_ENTRIES;

  logic clk = 0, rst_n = 0;
  // shared stimulus
  logic disp_valid = 0, disp_casts_shadow = 0, disp_is_load = 0;
  logic [LOAD_ID_W-1:0] disp_load_id;
  logic resolve_valid = 0, squash_valid = 0;
  logic [SEQ_W-1:0] resolve_sb_seq, squash_sb_seq, squash_rq_seq;
  logic rcmp_valid = 0, rcmp_in_rq, rcmp_slice_valid, l1_hit, mshr_hit;
  logic [LOAD_ID_W-1:0] rcmp_load_id;
  logic [SEQ_W-1:0] rcmp_rq_seq;
  logic [ADDR_W-1:0] rcmp_slice_addr;
  logic rec_valid = 0;
  logic [ADDR_W-1:0] rec_leaf_addr;
  logic [0:0] rec_slot;
  logic [DATA_W-1:0] rec_data;
  logic [DATA_W-1:0] regs [NUM_AREGS];

  // per-instance outputs and fetch ports, index 0 = u_vrc, 1 = u_vrc2
  logic                 disp_ready [2], disp_load_shadowed [2];
  logic [SEQ_W-1:0]     disp_sb_seq [2], disp_rq_seq [2];
  logic                 release_valid [2];
  logic [LOAD_ID_W-1:0] release_load_id [2];
  rcmp_dec_e            rcmp_decision [2];
  logic                 fill_req [2], fill_valid [2];
  logic [ADDR_W-1:0]    fill_req_addr [2], fill_addr [2];
  slice_instr_t         fill_instr [2];
  logic [AREG_W-1:0]    live_areg0 [2], live_areg1 [2];
  logic [DATA_W-1:0]    live_data0 [2], live_data1 [2];
  logic                 rc_done_valid [2], rc_abort_valid [2], rc_busy [2];
  logic [LOAD_ID_W-1:0] rc_done_load_id [2], rc_abort_load_id [2];
  logic [DATA_W-1:0]    rc_done_data [2];
  logic [15:0]          rc_done_cycles [2];
  abort_e               rc_abort_cause [2];

  iser_top u_vrc (
    .clk, .rst_n,
    .disp_valid, .disp_casts_shadow, .disp_is_load, .disp_load_id,
    .disp_ready(disp_ready[0]), .disp_sb_seq(disp_sb_seq[0]), .disp_rq_seq(disp_rq_seq[0]),
    .disp_load_shadowed(disp_load_shadowed[0]),
    .resolve_valid, .resolve_sb_seq, .squash_valid, .squash_sb_seq, .squash_rq_seq,
    .release_valid(release_valid[0]), .release_load_id(release_load_id[0]),
    .rcmp_valid, .rcmp_load_id, .rcmp_in_rq, .rcmp_rq_seq, .rcmp_slice_valid,
    .rcmp_slice_addr, .l1_hit, .mshr_hit, .rcmp_decision(rcmp_decision[0]),
    .rec_valid, .rec_leaf_addr, .rec_slot, .rec_data,
    .fill_req(fill_req[0]), .fill_req_addr(fill_req_addr[0]), .fill_valid(fill_valid[0]),
    .fill_addr(fill_addr[0]), .fill_instr(fill_instr[0]),
    .live_areg('{live_areg0[0], live_areg1[0]}), .live_data('{live_data0[0], live_data1[0]}),
    .rc_done_valid(rc_done_valid[0]), .rc_done_load_id(rc_done_load_id[0]),
    .rc_done_data(rc_done_data[0]), .rc_done_cycles(rc_done_cycles[0]),
    .rc_abort_valid(rc_abort_valid[0]), .rc_abort_load_id(rc_abort_load_id[0]),
    .rc_abort_cause(rc_abort_cause[0]), .rc_busy(rc_busy[0])
  );

  iser_top #(.MAX_LEN(2)) u_vrc2 (
    .clk, .rst_n,
    .disp_valid, .disp_casts_shadow, .disp_is_load, .disp_load_id,
    .disp_ready(disp_ready[1]), .disp_sb_seq(disp_sb_seq[1]), .disp_rq_seq(disp_rq_seq[1]),
    .disp_load_shadowed(disp_load_shadowed[1]),
    .resolve_valid, .resolve_sb_seq, .squash_valid, .squash_sb_seq, .squash_rq_seq,
    .release_valid(release_valid[1]), .release_load_id(release_load_id[1]),
    .rcmp_valid, .rcmp_load_id, .rcmp_in_rq, .rcmp_rq_seq, .rcmp_slice_valid,
    .rcmp_slice_addr, .l1_hit, .mshr_hit, .rcmp_decision(rcmp_decision[1]),
    .rec_valid, .rec_leaf_addr, .rec_slot, .rec_data,
    .fill_req(fill_req[1]), .fill_req_addr(fill_req_addr[1]), .fill_valid(fill_valid[1]),
    .fill_addr(fill_addr[1]), .fill_instr(fill_instr[1]),
    .live_areg('{live_areg0[1], live_areg1[1]}), .live_data('{live_data0[1], live_data1[1]}),
    .rc_done_valid(rc_done_valid[1]), .rc_done_load_id(rc_done_load_id[1]),
    .rc_done_data(rc_done_data[1]), .rc_done_cycles(rc_done_cycles[1]),
    .rc_abort_valid(rc_abort_valid[1]), .rc_abort_load_id(rc_abort_load_id[1]),
    .rc_abort_cause(rc_abort_cause[1]), .rc_busy(rc_busy[1])
  );

  always #5 clk = ~clk;
  always_comb for (int u = 0; u < 2; u++) begin
    live_data0[u] = regs[live_areg0[u]];
    live_data1[u] = regs[live_areg1[u]];
  end

  int checks = 0, failures = 0;
  // outcome of the latest recomputation, per instance
  bit got_done [2], got_abort [2];
  logic [DATA_W-1:0] done_val [2];
  int done_cyc [2];
  abort_e ab_cause [2];
  int n_release [2];
  int n_fill [2];

  always @(posedge clk) if (rst_n) for (int u = 0; u < 2; u++) begin
    if (release_valid[u]) n_release[u]++;
    if (rc_done_valid[u]) begin
      got_done[u] = 1; done_val[u] = rc_done_data[u]; done_cyc[u] = int'(rc_done_cycles[u]);
    end
    if (rc_abort_valid[u]) begin got_abort[u] = 1; ab_cause[u] = rc_abort_cause[u]; end
  end

  function automatic slice_instr_t mk(op_e op, int d, int a, int b, bit ha, bit hb, bit ui, int imm);
    slice_instr_t x;
    x.op = op; x.dst = 4'(d); x.src1 = 4'(a); x.src2 = 4'(b);
    x.src1_hist = ha; x.src2_hist = hb; x.use_imm = ui; x.imm = 32'(imm);
    return x;
  endfunction

  // A chain of length len at base: r1 = Hist input; r1 += 1 (len-2 times); RTN r1.
  function automatic slice_instr_t chain(logic [ADDR_W-1:0] off, int len);
    if (off == 0)                 return mk(OP_MOV, 1, 0, 0, 1, 0, 0, 0);
    if (int'(off) < len - 1)      return mk(OP_ADD, 1, 1, 0, 0, 0, 1, 1);
    return mk(OP_RTN, 0, 1, 0, 0, 0, 0, 0);
  endfunction

  // program memory as seen by the fetch logic
  function automatic slice_instr_t prog(logic [ADDR_W-1:0] a);
    if (a >= S_HIST) begin
      // slice k: ADD r1 = in0 + in1 (both from Hist); RTN r1
      logic [ADDR_W-1:0] k, o;
      k = (a - S_HIST) / 2049;
      o = (a - S_HIST) - k * 2049;
      return (o == 0) ? mk(OP_ADD, 1, 0, 0, 1, 1, 0, 0) : mk(OP_RTN, 0, 1, 0, 0, 0, 0, 0);
    end
    if (a >= S_SH2)  return chain(a - S_SH2, 2);
    if (a >= S_M7)   return chain(a - S_M7, 7);
    if (a >= S_OVER) return chain(a - S_OVER, 101);
    if (a >= S_M100) return chain(a - S_M100, 100);
    case (a - S_FIG3)  // the sumArr example
      0:  return mk(OP_NOP, 0, 0, 0, 0, 0, 0, 0);
      1:  return mk(OP_MOV, 1, 0, 0, 1, 0, 0, 0);
      2:  return mk(OP_MOV, 2, 0, 0, 1, 0, 0, 0);
      3:  return mk(OP_ADD, 3, 1, 2, 0, 0, 0, 0);
      4:  return mk(OP_ADD, 1, 1, 0, 0, 0, 1, 1);
      5:  return mk(OP_MUL, 2, 1, 2, 0, 0, 0, 0);
      6:  return mk(OP_ADD, 4, 1, 2, 0, 0, 0, 0);
      7:  return mk(OP_ADD, 1, 1, 0, 0, 0, 1, 1);
      8:  return mk(OP_MUL, 2, 1, 2, 0, 0, 0, 0);
      9:  return mk(OP_ADD, 5, 1, 2, 0, 0, 0, 0);
      default: return mk(OP_RTN, 0, 5, 0, 0, 0, 0, 0);
    endcase
  endfunction

  // one fetch model per instance
  for (genvar u = 0; u < 2; u++) begin : g_fetch
    initial begin
      fill_valid[u] = 0; fill_addr[u] = '0; fill_instr[u] = '0;
      forever begin
        @(posedge clk);
        if (fill_req[u] && !fill_valid[u]) begin
          logic [ADDR_W-1:0] a;
          a = fill_req_addr[u];
          repeat (FILL_LAT - 1) @(posedge clk);
          @(negedge clk);
          fill_valid[u] = 1; fill_addr[u] = a; fill_instr[u] = prog(a);
          @(negedge clk);
          fill_valid[u] = 0;
          n_fill[u]++;
        end
      end
    end
  end

  task automatic chk(string what, logic ok);
    checks++;
    if (!ok) begin failures++; if (failures < 30) $display("%t FAIL %s", $time, what); end
  endtask

  task automatic dispatch(bit casts, bit ld, logic [7:0] id,
                          output logic [SEQ_W-1:0] sbs, output logic [SEQ_W-1:0] rqs);
    @(negedge clk);
    disp_valid = 1; disp_casts_shadow = casts; disp_is_load = ld; disp_load_id = id;
    #1;
    while (!(disp_ready[0] && disp_ready[1])) begin @(negedge clk); #1; end
    chk("both copies track shadows alike", disp_sb_seq[0] == disp_sb_seq[1] &&
        disp_rq_seq[0] == disp_rq_seq[1] && disp_load_shadowed[0] == disp_load_shadowed[1]);
    chk("load is shadowed", !ld || disp_load_shadowed[0]);
    sbs = disp_sb_seq[0]; rqs = disp_rq_seq[0];
    @(negedge clk);
    disp_valid = 0; disp_casts_shadow = 0; disp_is_load = 0;
  endtask

  task automatic rec(logic [ADDR_W-1:0] a, bit slot, logic [DATA_W-1:0] d);
    @(negedge clk);
    rec_valid = 1; rec_leaf_addr = a; rec_slot = slot; rec_data = d;
    @(negedge clk);
    rec_valid = 0;
  endtask

  // One shadowed load whose RCMP misses in the L1 and names the slice at sa:
  // a branch casts the shadow, the load and its RCMP run under it, the engines
  // finish, then the branch resolves and the load must be released.
  task automatic run_slice(logic [ADDR_W-1:0] sa, logic [7:0] id, output rcmp_dec_e dec);
    logic [SEQ_W-1:0] sb_br, sbs, rqs;
    int t, r0;
    // released slice instructions may still be on their way into the IBuff
    t = 0;
    while ((rc_busy[0] || rc_busy[1]) && t < 2000) begin @(negedge clk); t++; end
    dispatch(1, 0, 8'd0, sb_br, rqs);
    dispatch(0, 1, id, sbs, rqs);
    got_done = '{0, 0}; got_abort = '{0, 0};
    @(negedge clk);
    rcmp_valid = 1; rcmp_load_id = id; rcmp_in_rq = 1; rcmp_rq_seq = rqs;
    rcmp_slice_valid = 1; rcmp_slice_addr = sa; l1_hit = 0; mshr_hit = 0;
    #1;
    dec = rcmp_decision[0];
    chk("both copies decide to recompute",
        rcmp_decision[0] == DEC_RECOMPUTE && rcmp_decision[1] == DEC_RECOMPUTE);
    @(negedge clk);
    rcmp_valid = 0;
    t = 0;
    while ((rc_busy[0] || rc_busy[1]) && t < 2000) begin @(negedge clk); t++; end
    chk("recomputation ends", t < 2000);
    if (!((got_done[0] ^ got_abort[0]) && (got_done[1] ^ got_abort[1]))) $display("dbg sa=%h done=%p abort=%p cause=%p val=%0d cyc=%p", sa, got_done, got_abort, ab_cause, done_val[0], done_cyc);
    chk("each copy either finishes or abandons",
        (got_done[0] ^ got_abort[0]) && (got_done[1] ^ got_abort[1]));
    r0 = n_release[0];
    @(negedge clk);
    resolve_valid = 1; resolve_sb_seq = sb_br;
    @(negedge clk);
    resolve_valid = 0;
    repeat (4) @(negedge clk);
    chk("shadowed load released once the branch resolved", n_release[0] == r0 + 1);
  endtask

  // per-workload completion counters
  int n_fig3 = 0, n_m7 = 0, n_m100 = 0, n_over = 0, n_sh2 = 0, n_hist = 0, n_vrc2_fallback = 0;

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rcmp_dec_e dec;
    logic [DATA_W-1:0] j, h;
    for (int r = 0; r < NUM_AREGS; r++) regs[r] = 64'(r * 3);
    disp_load_id = 0; resolve_sb_seq = 0; squash_sb_seq = 0; squash_rq_seq = 0;
    rcmp_load_id = 0; rcmp_in_rq = 0; rcmp_rq_seq = 0; rcmp_slice_valid = 0;
    rcmp_slice_addr = 0; l1_hit = 0; mshr_hit = 0;
    rec_leaf_addr = 0; rec_slot = 0; rec_data = 0;
    n_release = '{0, 0}; n_fill = '{0, 0};
    repeat (3) @(posedge clk);
    rst_n = 1;

    // ---- fig3: sumArr, i = 0 and j checkpointed by two RECs ----
    j = 64'd41;
    rec(S_FIG3 + 1, 0, 64'd0);
    rec(S_FIG3 + 2, 0, j);
    for (int pass = 0; pass < 2; pass++) begin
      run_slice(S_FIG3, 8'd10 + 8'(pass), dec);
      chk("fig3 value", got_done[0] && done_val[0] == 2 + 2 * j);
      chk($sformatf("fig3 cycles %0d (pass %0d)", done_cyc[0], pass),
          pass == 0 ? done_cyc[0] > 11 : done_cyc[0] == 11);
      chk("fig3 too long for the two-cycle variant", got_abort[1] && ab_cause[1] == AB_TOO_LONG);
      if (got_done[0]) n_fig3++;
      if (got_abort[1]) n_vrc2_fallback++;
    end

    // ---- mean7 ----
    h = 64'd1000;
    rec(S_M7, 0, h);
    for (int pass = 0; pass < 2; pass++) begin
      run_slice(S_M7, 8'd20 + 8'(pass), dec);
      chk("mean7 value", got_done[0] && done_val[0] == h + 5);
      chk($sformatf("mean7 cycles %0d", done_cyc[0]), pass == 0 || done_cyc[0] == 7);
      chk("mean7 falls back in the two-cycle variant", got_abort[1] && ab_cause[1] == AB_TOO_LONG);
      if (got_done[0]) n_m7++;
    end

    // ---- max100 ----
    h = 64'd5000;
    rec(S_M100, 0, h);
    for (int pass = 0; pass < 2; pass++) begin
      run_slice(S_M100, 8'd30 + 8'(pass), dec);
      chk("max100 value", got_done[0] && done_val[0] == h + 98);
      chk($sformatf("max100 cycles %0d", done_cyc[0]),
          pass == 0 ? done_cyc[0] > 100 : done_cyc[0] == 100);
      if (got_done[0]) n_m100++;
    end

    // ---- over: 101 instructions ----
    rec(S_OVER, 0, 64'd7);
    for (int pass = 0; pass < 2; pass++) begin
      run_slice(S_OVER, 8'd40 + 8'(pass), dec);
      chk("over is abandoned as too long", got_abort[0] && ab_cause[0] == AB_TOO_LONG);
      if (got_abort[0] && ab_cause[0] == AB_TOO_LONG) n_over++;
    end

    // ---- short2: kept by both copies ----
    h = 64'hDEAD_BEEF;
    rec(S_SH2, 0, h);
    for (int pass = 0; pass < 2; pass++) begin
      run_slice(S_SH2, 8'd50 + 8'(pass), dec);
      for (int u = 0; u < 2; u++)
        chk($sformatf("short2 copy %0d value/cycles %0d", u, done_cyc[u]),
            got_done[u] && done_val[u] == h && (pass == 0 || done_cyc[u] == 2));
      if (got_done[0] && got_done[1]) n_sh2++;
    end

    // ---- hist: 1024 live slices, all inputs checkpointed before any runs ----
    for (int k = 0; k < HIST_SLICES; k++) begin
      rec(S_HIST + ADDR_W'(k) * 2049, 0, 64'(k) * 64'h1_0001);
      rec(S_HIST + ADDR_W'(k) * 2049, 1, 64'(k) ^ 64'h5555);
    end
    for (int k = 0; k < HIST_SLICES; k++) begin
      logic [DATA_W-1:0] e;
      e = 64'(k) * 64'h1_0001 + (64'(k) ^ 64'h5555);
      run_slice(S_HIST + ADDR_W'(k) * 2049, 8'(k), dec);
      chk($sformatf("hist slice %0d value", k), got_done[0] && done_val[0] == e);
      chk($sformatf("hist slice %0d two-cycle copy", k), got_done[1] && done_val[1] == e);
      if (got_done[0] && done_val[0] == e) n_hist++;
    end

    $display("workloads: fig3=%0d mean7=%0d max100=%0d over=%0d short2=%0d hist=%0d/%0d vrc2_fallback=%0d fills=%0d/%0d",
             n_fig3, n_m7, n_m100, n_over, n_sh2, n_hist, HIST_SLICES, n_vrc2_fallback,
             n_fill[0], n_fill[1]);
    chk("workload fig3 ran", n_fig3 == 2);
    chk("workload mean7 ran", n_m7 == 2);
    chk("workload max100 ran", n_m100 == 2);
    chk("workload over abandoned", n_over == 2);
    chk("workload short2 ran", n_sh2 == 2);
    chk("workload hist: every live slice recomputed", n_hist == HIST_SLICES);
    chk("two-cycle variant fell back for long slices", n_vrc2_fallback > 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
