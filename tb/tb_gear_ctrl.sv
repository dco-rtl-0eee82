// tb_gear_ctrl: drives eviction patterns of known density and checks the
// sliding-window count against a model, that the gear rises once per
// window while the count exceeds bypass_ub (saturating at 2**B_BITS), and
// falls once per window while the count is below bypass_lb.
module tb_gear_ctrl;
  import dco_pkg::*;
  localparam int WINDOW = 32;
  logic clk = 0, rst_n = 0;
  logic evict, gear_up, gear_down;
  logic [EVC_W-1:0] bypass_ub, bypass_lb, evict_count;
  logic [2:0] b_bits;
  logic [GEAR_W-1:0] gear;
  int checks = 0, failures = 0;
  bit hist[$];
  int cyc = 1, exp_gear = 0, mcount = 0;

  always #5 clk = ~clk;
  gear_ctrl #(.WINDOW(WINDOW)) dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s (cycle %0d)", what, cyc); end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // drive evict with a given density for a number of windows, modelling
  // the counter and the gear; the gear is updated on the last cycle of
  // every window using the count held in that cycle
  task automatic run(input int pct, input int windows);
    int gmax;
    for (int n = 0; n < windows * WINDOW; n++) begin
      @(negedge clk);
      evict = ($urandom % 100) < pct;
      check(int'(evict_count) == mcount, "window count");
      gmax = 1 << b_bits;
      if (cyc % WINDOW == WINDOW - 1) begin
        if (mcount > bypass_ub && exp_gear < gmax) exp_gear++;
        else if (mcount < bypass_lb && exp_gear > 0) exp_gear--;
      end
      hist.push_back(evict);
      mcount += evict;
      if (hist.size() > WINDOW) mcount -= hist.pop_front();
      @(posedge clk); cyc++;
      #1 check(int'(gear) == exp_gear, $sformatf("gear %0d exp %0d cnt %0d", gear, exp_gear, mcount));
    end
  endtask

  initial begin
    evict = 0; bypass_ub = 20; bypass_lb = 6; b_bits = 3;
    repeat (2) @(posedge clk); @(negedge clk) rst_n = 1;
    for (int i = 0; i < WINDOW; i++) hist.push_back(0);
    run(90, 12);   // heavy eviction: gear climbs to 8 and stays
    check(gear == 8, "gear saturates at 2**B_BITS");
    run(40, 4);    // between thresholds: gear holds
    run(2, 12);    // light eviction: gear returns to 0
    check(gear == 0, "gear back to 0");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
