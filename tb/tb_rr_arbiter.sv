// tb_rr_arbiter: random request patterns against a reference model of
// round-robin priority; also checks that a requester held high is served
// within N grants.
module tb_rr_arbiter;
  localparam int N = 5;
  logic clk = 0, rst_n = 0;
  logic [N-1:0] req, grant;
  logic advance;
  logic [2:0] grant_idx;
  int checks = 0, failures = 0;
  int ptr = 0;
  int wait_cnt [N];

  always #5 clk = ~clk;
  rr_arbiter #(.N(N)) dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    req = '0; advance = 0;
    for (int i = 0; i < N; i++) wait_cnt[i] = 0;
    repeat (2) @(posedge clk); @(negedge clk) rst_n = 1;
    for (int t = 0; t < 4000; t++) begin
      automatic int exp_idx = -1;
      req = (t < 2000) ? N'($urandom) : N'($urandom | 1);  // requester 0 held later
      advance = ($urandom % 4) != 0;
      #1;
      for (int k = 0; k < N; k++)
        if (exp_idx < 0 && req[(ptr + k) % N]) exp_idx = (ptr + k) % N;
      if (exp_idx < 0) check(grant == '0, "no grant without a request");
      else begin
        check(grant == N'(1) << exp_idx && int'(grant_idx) == exp_idx,
              $sformatf("grant %b idx %0d, expected %0d", grant, grant_idx, exp_idx));
      end
      @(posedge clk);
      if (advance && exp_idx >= 0) begin
        ptr = (exp_idx + 1) % N;
        for (int i = 0; i < N; i++)
          if (i == exp_idx) wait_cnt[i] = 0;
          else if (req[i]) wait_cnt[i]++;
      end
      for (int i = 0; i < N; i++) check(wait_cnt[i] < N, "a waiting requester is served within N grants");
      for (int i = 0; i < N; i++) if (!req[i]) wait_cnt[i] = 0;
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
