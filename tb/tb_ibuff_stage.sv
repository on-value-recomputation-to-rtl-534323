// tb_ibuff_stage -- random test of the slice-instruction staging buffer
// against a reference model.
//
// A small stage (LEN = 8) sees random starts (same or other slice), fills
// inside and outside its range, releases of its owner and of other loads,
// squashes before and after its owner, and an engine that is idle or busy
// at random. Every cycle the lookup result, the IBuff write and draining
// are compared with the model, which follows the rules: fills are kept per
// offset; a start for another slice drops them; a squash at or before the
// owner drops them unless it was already released; after the release they
// are written out lowest offset first, one per cycle, while the engine is
// idle. A start is never issued while draining (the core's RCMP logic holds
// it back), matching the block's contract.
//
// The rule under test (IBuff updates wait until the load is no longer
// speculative) follows the source design; the staging policies modelled here
// are this design's own. LEN = 8, 20000 random cycles, clock period 10 time units, watchdog.
module tb_ibuff_stage;
  import iser_pkg::*;
  localparam int LEN = 8;
  localparam int AW = 16, SB = 8;

  logic clk = 0, rst_n = 0;
  logic start_valid = 0, fill_valid = 0, release_valid = 0, squash_valid = 0, engine_idle = 1;
  logic [AW-1:0] start_addr = 0, fill_addr = 0, rd_addr = 0, wr_addr;
  logic [SB-1:0] start_owner = 0, release_seq = 0, squash_seq = 0;
  slice_instr_t fill_instr = '0, rd_instr, wr_instr;
  logic rd_hit, wr_valid, draining;

  ibuff_stage #(.LEN(LEN), .AW(AW), .SEQ_BITS(SB)) dut (.*);
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic chk(string what, logic ok);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("%t FAIL %s", $time, what); end
  endtask

  // model
  bit m_held, m_ok;
  logic [AW-1:0] m_base;
  logic [SB-1:0] m_owner;
  bit m_valid [LEN];
  slice_instr_t m_mem [LEN];

  function automatic int m_first();
    for (int i = 0; i < LEN; i++) if (m_valid[i]) return i;
    return -1;
  endfunction

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int n_drop_slice = 0, n_drop_squash = 0, n_drain = 0, n_keep = 0, n_hit = 0;

  initial begin
    m_held = 0; m_ok = 0; m_base = 0; m_owner = 0;
    foreach (m_valid[i]) m_valid[i] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 20000; n++) begin
      int f; bit m_drn, exp_hit;
      logic [AW-1:0] off;
      @(negedge clk);
      m_drn = m_held && m_ok && (m_first() >= 0);
      // stimulus
      start_valid   = !draining && ($urandom_range(0, 19) == 0);
      start_addr    = ($urandom_range(0, 1) == 0) ? m_base : AW'($urandom_range(0, 3) * 16);
      start_owner   = SB'($urandom);
      fill_valid    = $urandom_range(0, 2) == 0;
      fill_addr     = m_base + AW'($urandom_range(0, LEN + 2)) - AW'($urandom_range(0, 1));
      fill_instr    = slice_instr_t'($urandom);
      release_valid = $urandom_range(0, 9) == 0;
      release_seq   = ($urandom_range(0, 1) == 0) ? m_owner : SB'($urandom);
      squash_valid  = $urandom_range(0, 29) == 0;
      squash_seq    = m_owner + SB'($urandom_range(0, 4)) - SB'(2);
      engine_idle   = $urandom_range(0, 2) != 0;
      rd_addr       = m_base + AW'($urandom_range(0, LEN + 1));
      #1;
      // lookup
      off = rd_addr - m_base;
      exp_hit = m_held && off < LEN && m_valid[off];
      chk("rd_hit", rd_hit == exp_hit);
      if (exp_hit) begin chk("rd_instr", rd_instr == m_mem[off]); n_hit++; end
      // drain
      chk("draining", draining == m_drn);
      f = m_first();
      chk("wr_valid", wr_valid == (m_drn && engine_idle));
      if (m_drn && engine_idle) begin
        chk("wr_addr", wr_addr == m_base + AW'(f));
        chk("wr_instr", wr_instr == m_mem[f]);
        n_drain++;
      end
      // model update (mirrors the clock edge)
      if (start_valid) begin
        if (!(m_held && m_base == start_addr)) begin
          foreach (m_valid[i]) m_valid[i] = 0;
          if (m_held) n_drop_slice++;
        end else n_keep++;
        m_base = start_addr; m_owner = start_owner; m_held = 1;
        m_ok = release_valid && release_seq == start_owner;
      end else if (squash_valid && m_held && !m_ok && $signed(SB'(m_owner - squash_seq)) >= 0) begin
        m_held = 0;
        foreach (m_valid[i]) m_valid[i] = 0;
        n_drop_squash++;
      end else begin
        logic [AW-1:0] fo;
        bit fin, any, ok0;
        fo = fill_addr - m_base;
        ok0 = m_ok;
        fin = fill_valid && m_held && fo < LEN;
        if (release_valid && m_held && release_seq == m_owner) m_ok = 1;
        if (m_drn && engine_idle) m_valid[f] = 0;
        if (fin) begin m_valid[fo] = 1; m_mem[fo] = fill_instr; end
        any = 0;
        foreach (m_valid[i]) any |= m_valid[i];
        // fully drained after the release: the stage is free again
        if (ok0 && engine_idle && !fin && !any) m_held = 0;
      end
    end
    $display("events: keep=%0d drop_slice=%0d drop_squash=%0d drains=%0d hits=%0d",
             n_keep, n_drop_slice, n_drop_squash, n_drain, n_hit);
    chk("coverage", n_keep > 0 && n_drop_slice > 0 && n_drop_squash > 0 && n_drain > 0 && n_hit > 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
