// victim_select: the DCO replacement policy for one set.
//
// Chooses the way to evict, combinationally, in this order:
//   1. an invalid way, if any (lowest index);
//   2. dead block prediction: among ways whose tile is in the TMU's dead
//      tile FIFO, the least recently used;
//   3. anti-thrashing: among the ways in the lowest priority tier present
//      in the set, the least recently used. The priority of a line is
//      tag[B_BITS-1:0], the lowest bits of its tag, so lines with a
//      smaller value are sacrificed first;
//   4. with anti-thrashing off, plain LRU.
// Steps 2-4 are the paper's order (dead block, then anti-thrashing, then
// LRU as tie-break). Ages come from a true-LRU stack: 0 is the most
// recent, WAYS-1 the least recent. reason tells which step chose.
module victim_select
  import dco_pkg::*;
#(
  parameter int WAYS = 8
) (
  input  logic [WAYS-1:0]       valid,
  input  logic [WAYS-1:0]       dead,
  input  logic [BB_MAX-1:0]     tag_lo [WAYS],  // tag[BB_MAX-1:0] per way
  input  logic [$clog2(WAYS)-1:0] age  [WAYS],
  input  logic [2:0]            b_bits,
  input  logic                  en_dbp,
  input  logic                  en_at,
  output logic [$clog2(WAYS)-1:0] victim,
  output logic [1:0]            reason        // 0 invalid, 1 dead, 2 at, 3 lru
);
  localparam int WW = $clog2(WAYS);

  logic [BB_MAX-1:0] pmask;
  assign pmask = BB_MAX'((5'd1 << b_bits) - 5'd1);

  always_comb begin
    logic [BB_MAX-1:0] minp;
    logic [WAYS-1:0]   cand;
    logic              found;
    logic [WW-1:0]     oldest;

    // priority tier of each way and the lowest tier present
    minp = '1;
    for (int w = 0; w < WAYS; w++)
      if ((tag_lo[w] & pmask) < minp) minp = tag_lo[w] & pmask;

    if (!(&valid)) begin
      cand   = ~valid;
      reason = 2'd0;
    end else if (en_dbp && |dead) begin
      cand   = dead;
      reason = 2'd1;
    end else if (en_at) begin
      for (int w = 0; w < WAYS; w++) cand[w] = ((tag_lo[w] & pmask) == minp);
      reason = 2'd2;
    end else begin
      cand   = '1;
      reason = 2'd3;
    end

    // least recently used among the candidates (lowest index for invalid)
    found  = 1'b0;
    oldest = '0;
    victim = '0;
    for (int w = 0; w < WAYS; w++) begin
      if (cand[w] && (!found || (reason != 2'd0 && age[w] > oldest))) begin
        found  = 1'b1;
        oldest = age[w];
        victim = WW'(w);
      end
    end
  end
endmodule
