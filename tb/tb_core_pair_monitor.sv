// tb_core_pair_monitor: random commit pulses for 8 cores; checks that in
// each pair exactly the core with fewer commits is marked slow (none on a
// tie), and that clear restarts the counts.
module tb_core_pair_monitor;
  localparam int NC = 8;
  logic clk = 0, rst_n = 0, clear;
  logic [NC-1:0] commit, slow;
  int checks = 0, failures = 0;
  int cnt[NC];

  always #5 clk = ~clk;
  core_pair_monitor #(.NC(NC), .CNT_W(16)) dut (.*);

  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // reference counters, and their values one cycle earlier
  int prev[NC];
  always @(posedge clk) if (rst_n)
    for (int c = 0; c < NC; c++) begin
      prev[c] <= cnt[c];
      cnt[c]  <= clear ? 0 : cnt[c] + int'(commit[c]);
    end

  initial begin
    clear = 0; commit = 0;
    for (int c = 0; c < NC; c++) begin cnt[c] = 0; prev[c] = 0; end
    repeat (2) @(posedge clk); @(negedge clk) rst_n = 1;
    for (int n = 0; n < 4000; n++) begin
      @(negedge clk);
      if (n > 2)
        for (int c = 0; c < NC; c++) begin
          checks++;
          if (slow[c] != (prev[c] < prev[c ^ 1])) begin
            failures++; $display("FAIL: slow[%0d] at step %0d", c, n);
          end
        end
      clear = (n == 2000);
      for (int c = 0; c < NC; c++) commit[c] = ($urandom % 100) < 30 + 8 * c;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
