// slice_rename -- rename table from architectural registers to SFile entries.
//
// A small dedicated rename table, separate from the core's: a slice
// instruction that writes architectural register r gets a free SFile entry,
// and later slice instructions that read r are pointed at it. A register no
// slice instruction has written yet is unmapped, and its reader takes the
// live value from the core's register file through the core's own rename
// tables. Because slice instructions run one at a time in order, the entry
// that held the previous value of r is dead once r is renamed again and is
// freed at once (own choice; the source design only says renaming works as
// in a conventional core). The lowest free entry is allocated.
//
// Interface:
//   clear                      start of a slice: unmap all, free all.
//   lk_areg[2] -> lk_mapped, lk_sidx   combinational lookups.
//   alloc_valid, alloc_areg -> alloc_ok, alloc_sidx  map a destination;
//                              alloc_sidx is valid in the same cycle.
module slice_rename
  import iser_pkg::*;
#(
  parameter int unsigned NAREGS  = NUM_AREGS,
  parameter int unsigned ENTRIES = SFILE_ENTRIES
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       clear,
  input  logic [$clog2(NAREGS)-1:0]  lk_areg [2],
  output logic [1:0]                 lk_mapped,
  output logic [$clog2(ENTRIES)-1:0] lk_sidx [2],
  input  logic                       alloc_valid,
  input  logic [$clog2(NAREGS)-1:0]  alloc_areg,
  output logic                       alloc_ok,
  output logic [$clog2(ENTRIES)-1:0] alloc_sidx
);
  localparam int unsigned SW = $clog2(ENTRIES);

  logic [SW-1:0]      map_q [NAREGS];
  logic [NAREGS-1:0]  mapped_q;
  logic [ENTRIES-1:0] free_q;

  always_comb begin
    for (int p = 0; p < 2; p++) begin
      lk_mapped[p] = mapped_q[lk_areg[p]];
      lk_sidx[p]   = map_q[lk_areg[p]];
    end
  end

  // Lowest free entry.
  always_comb begin
    alloc_ok   = 1'b0;
    alloc_sidx = '0;
    for (int e = ENTRIES - 1; e >= 0; e--) begin
      if (free_q[e]) begin
        alloc_ok   = 1'b1;
        alloc_sidx = SW'(e);
      end
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      mapped_q <= '0;
      free_q   <= '1;
      for (int r = 0; r < NAREGS; r++) map_q[r] <= '0;
    end else if (clear) begin
      mapped_q <= '0;
      free_q   <= '1;
    end else if (alloc_valid && alloc_ok) begin
      free_q[alloc_sidx]   <= 1'b0;
      if (mapped_q[alloc_areg]) free_q[map_q[alloc_areg]] <= 1'b1;
      map_q[alloc_areg]    <= alloc_sidx;
      mapped_q[alloc_areg] <= 1'b1;
    end
  end

  a_alloc_ok: assert property (@(posedge clk) disable iff (!rst_n)
    (alloc_valid && !clear) |-> alloc_ok);
endmodule
