// rr_arbiter: round-robin arbiter over N requesters.
//
// grant is one-hot (or zero when nothing requests) and combinational in
// req. When advance is high and a grant is given, the priority pointer
// moves to the requester after the granted one, so every requester is
// served within N grants. Reset gives requester 0 the highest priority.
//
// Ports: req (one bit per requester), advance (the granted requester is
// being served this cycle), grant / grant_idx (one-hot and index).
// The paper does not describe its arbitration; round robin is this
// design's choice for the interconnect and the TMU notification port.
module rr_arbiter #(
  parameter int N = 4
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic [N-1:0] req,
  input  logic         advance,
  output logic [N-1:0] grant,
  output logic [$clog2(N > 1 ? N : 2)-1:0] grant_idx
);
  localparam int IW = $clog2(N > 1 ? N : 2);
  logic [IW-1:0] ptr;

  always_comb begin
    grant     = '0;
    grant_idx = '0;
    // search from ptr upwards, wrapping; the last assignment wins
    for (int k = N - 1; k >= 0; k--)
      if (req[(int'(ptr) + k) % N]) begin
        grant     = '0;
        grant[(int'(ptr) + k) % N] = 1'b1;
        grant_idx = IW'((int'(ptr) + k) % N);
      end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) ptr <= '0;
    else if (advance && |req)
      ptr <= (grant_idx == IW'(N - 1)) ? '0 : grant_idx + IW'(1);
  end
endmodule
