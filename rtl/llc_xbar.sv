// llc_xbar: interconnect between the accelerator cores and the LLC slices.
//
// Requests: a core's request goes to the slice named by the lowest
// $clog2(NS) bits of its line address (lines are interleaved over the
// slices). Each slice has a round-robin arbiter over the cores that
// address it; a core's ready is high in the cycle its request is granted
// and the slice accepts it. Responses: each core has a round-robin
// arbiter over the slices whose response-queue head carries that core's
// id. Both directions are combinational (no added latency), and every
// core may have requests in several slices at once, so responses from
// different slices can return out of order. The paper draws a shared bus;
// the crossbar and its arbitration are this design's choice.
module llc_xbar
  import dco_pkg::*;
#(
  parameter int NC = NCORE,
  parameter int NS = NSLICE
) (
  input  logic      clk,
  input  logic      rst_n,
  // core side
  input  logic [NC-1:0] c_req_valid,
  output logic [NC-1:0] c_req_ready,
  input  core_req_t     c_req [NC],
  output logic [NC-1:0] c_rsp_valid,
  input  logic [NC-1:0] c_rsp_ready,
  output core_rsp_t     c_rsp [NC],
  // slice side
  output logic [NS-1:0] s_req_valid,
  input  logic [NS-1:0] s_req_ready,
  output core_req_t     s_req [NS],
  input  logic [NS-1:0] s_rsp_valid,
  output logic [NS-1:0] s_rsp_ready,
  input  core_rsp_t     s_rsp [NS]
);
  localparam int SW = $clog2(NS);
  localparam int CW = $clog2(NC);

  // ---------------- requests ----------------
  logic [NC-1:0] rq   [NS];
  logic [NC-1:0] rgnt [NS];
  logic [CW-1:0] ridx [NS];

  for (genvar s = 0; s < NS; s++) begin : g_slice
    for (genvar c = 0; c < NC; c++) begin : g_core
      assign rq[s][c] = c_req_valid[c] && (c_req[c].laddr[SW-1:0] == SW'(s));
    end
    rr_arbiter #(.N(NC)) u_arb (
      .clk, .rst_n, .req(rq[s]), .advance(s_req_ready[s]),
      .grant(rgnt[s]), .grant_idx(ridx[s]));
    assign s_req_valid[s] = |rq[s];
    assign s_req[s]       = c_req[ridx[s]];
  end

  always_comb begin
    c_req_ready = '0;
    for (int c = 0; c < NC; c++)
      for (int s = 0; s < NS; s++)
        if (rgnt[s][c] && s_req_ready[s]) c_req_ready[c] = 1'b1;
  end

  // ---------------- responses ----------------
  logic [NS-1:0] pq   [NC];
  logic [NS-1:0] pgnt [NC];
  logic [SW-1:0] pidx [NC];

  for (genvar c = 0; c < NC; c++) begin : g_rcore
    for (genvar s = 0; s < NS; s++) begin : g_rslice
      assign pq[c][s] = s_rsp_valid[s] && (s_rsp[s].core == core_id_t'(c));
    end
    rr_arbiter #(.N(NS)) u_arb (
      .clk, .rst_n, .req(pq[c]), .advance(c_rsp_ready[c]),
      .grant(pgnt[c]), .grant_idx(pidx[c]));
    assign c_rsp_valid[c] = |pq[c];
    assign c_rsp[c]       = s_rsp[pidx[c]];
  end

  always_comb begin
    s_rsp_ready = '0;
    for (int s = 0; s < NS; s++)
      for (int c = 0; c < NC; c++)
        if (pgnt[c][s] && c_rsp_ready[c]) s_rsp_ready[s] = 1'b1;
  end
endmodule
