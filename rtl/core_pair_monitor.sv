// core_pair_monitor: finds the slower core of each core pair for the
// gqa_bypass variant of dynamic bypassing.
//
// Cores 2k and 2k+1 form a pair. Each core pulses commit for every
// instruction it commits; the monitor keeps a committed-instruction
// counter per core, cleared by clear (a new operator). slow[c] is high
// when core c has committed fewer instructions than its partner; with
// equal counts neither core is slow. Registered: slow follows the counts
// one cycle later. Pairing cores and comparing committed instructions
// follow the paper; which cores pair up and the counter width are this
// design's choices.
module core_pair_monitor #(
  parameter int NC    = 16,
  parameter int CNT_W = 32
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          clear,
  input  logic [NC-1:0] commit,
  output logic [NC-1:0] slow
);
  logic [CNT_W-1:0] cnt [NC];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int c = 0; c < NC; c++) cnt[c] <= '0;
      slow <= '0;
    end else begin
      for (int c = 0; c < NC; c++)
        if (clear) cnt[c] <= '0;
        else if (commit[c] && cnt[c] != '1) cnt[c] <= cnt[c] + CNT_W'(1);
      for (int k = 0; k < NC / 2; k++) begin
        slow[2*k]   <= cnt[2*k]   < cnt[2*k+1];
        slow[2*k+1] <= cnt[2*k+1] < cnt[2*k];
      end
      if (NC % 2 == 1) slow[NC-1] <= 1'b0;  // an unpaired core is never slow
    end
  end
endmodule
