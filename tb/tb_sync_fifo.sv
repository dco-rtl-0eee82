// tb_sync_fifo: random pushes and pops against a queue model. Checks the
// head word, full, empty and count every cycle, and that a word pushed
// into an empty FIFO is visible at the head one cycle later.
module tb_sync_fifo;
  localparam int DEPTH = 12;
  logic clk = 0, rst_n = 0;
  logic push, pop, full, empty;
  logic [15:0] din, dout;
  logic [$clog2(DEPTH+1)-1:0] count;
  int checks = 0, failures = 0;
  logic [15:0] model[$];

  always #5 clk = ~clk;

  sync_fifo #(.T(logic [15:0]), .DEPTH(DEPTH)) dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    push = 0; pop = 0; din = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    check(empty && !full && count == 0, "empty after reset");
    // fill completely, then drain completely
    for (int i = 0; i < DEPTH; i++) begin
      push = 1; din = 16'h100 + 16'(i);
      @(posedge clk); model.push_back(din);
      @(negedge clk);
      check(dout == model[0], "head during fill");
    end
    push = 0;
    check(full && count == DEPTH, "full after DEPTH pushes");
    for (int i = 0; i < DEPTH; i++) begin
      check(dout == model[0], "head during drain");
      pop = 1;
      @(posedge clk); void'(model.pop_front());
      @(negedge clk);
    end
    pop = 0;
    check(empty, "empty after drain");
    // random traffic
    for (int n = 0; n < 5000; n++) begin
      push = ($urandom % 3) != 0 && !full;
      pop  = ($urandom % 2) != 0 && !empty;
      din  = 16'($urandom);
      @(posedge clk);
      if (pop)  void'(model.pop_front());
      if (push) model.push_back(din);
      @(negedge clk);
      check(count == model.size(), "count matches model");
      check(full == (model.size() == DEPTH), "full flag");
      check(empty == (model.size() == 0), "empty flag");
      if (model.size() > 0) check(dout == model[0], "head matches model");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
