// gear_ctrl: adaptive bypass gear B_GEAR of one LLC slice.
//
// Cache contention is measured as the number of evictions the slice made
// in the last WINDOW cycles: a WINDOW-bit shift register remembers which
// cycles evicted, and a counter adds the entering bit and subtracts the
// leaving one. At the end of every WINDOW-cycle period the gear is
// adjusted once:
//   count > bypass_ub  -> gear + 1 (bypass one more low-priority tier),
//   count < bypass_lb  -> gear - 1 (cache one more tier),
// saturating at 0 and at 2**B_BITS (every tier bypassed). Gear 0 bypasses
// nothing. The two thresholds and the direction of the steps are the
// paper's; the window length, the once-per-window update and the reset
// gear 0 are this design's choices.
module gear_ctrl
  import dco_pkg::*;
#(
  parameter int WINDOW = 256
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              evict,
  input  logic [EVC_W-1:0]  bypass_ub,
  input  logic [EVC_W-1:0]  bypass_lb,
  input  logic [2:0]        b_bits,
  output logic [GEAR_W-1:0] gear,
  output logic [EVC_W-1:0]  evict_count,
  output logic              gear_up,    // pulses when the gear rises
  output logic              gear_down   // pulses when the gear falls
);
  localparam int PW = $clog2(WINDOW);

  logic [WINDOW-1:0] hist;
  logic [PW-1:0]     phase;

  wire [GEAR_W-1:0] gmax = GEAR_W'(1) << b_bits;
  wire              tick = (phase == PW'(WINDOW - 1));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      hist        <= '0;
      evict_count <= '0;
      phase       <= '0;
      gear        <= '0;
      gear_up     <= 1'b0;
      gear_down   <= 1'b0;
    end else begin
      hist        <= {hist[WINDOW-2:0], evict};
      evict_count <= evict_count + EVC_W'(evict) - EVC_W'(hist[WINDOW-1]);
      phase       <= tick ? '0 : phase + PW'(1);
      gear_up     <= 1'b0;
      gear_down   <= 1'b0;
      if (gear > gmax) gear <= gmax;
      else if (tick) begin
        if (evict_count > bypass_ub && gear < gmax) begin
          gear    <= gear + GEAR_W'(1);
          gear_up <= 1'b1;
        end else if (evict_count < bypass_lb && gear != '0) begin
          gear      <= gear - GEAR_W'(1);
          gear_down <= 1'b1;
        end
      end
    end
  end
endmodule
