// tb_tmu_dead_fifo: pushes identifiers, checks the dead-way vectors of two
// query ports against a FIFO model, including the overwrite of the oldest
// identifier when full and the suppression of duplicates.
module tb_tmu_dead_fifo;
  localparam int DEPTH = 4, ID_W = 10, NQ = 2, WAYS = 4;
  logic clk = 0, rst_n = 0;
  logic push, overwrite;
  logic [ID_W-1:0] push_id;
  logic [ID_W-1:0] q_id [NQ][WAYS];
  logic [WAYS-1:0] q_dead [NQ];
  logic [$clog2(DEPTH+1)-1:0] count;
  int checks = 0, failures = 0;
  int model[$];

  always #5 clk = ~clk;
  tmu_dead_fifo #(.DEPTH(DEPTH), .ID_W(ID_W), .NQ(NQ), .WAYS(WAYS)) dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic bit in_model(int id);
    foreach (model[i]) if (model[i] == id) return 1;
    return 0;
  endfunction

  task automatic query_all();
    for (int q = 0; q < NQ; q++)
      for (int w = 0; w < WAYS; w++) q_id[q][w] = ID_W'($urandom % 24);
    #1;
    for (int q = 0; q < NQ; q++)
      for (int w = 0; w < WAYS; w++)
        check(q_dead[q][w] == in_model(int'(q_id[q][w])), "dead way vector");
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    push = 0; push_id = 0;
    for (int q = 0; q < NQ; q++) for (int w = 0; w < WAYS; w++) q_id[q][w] = '0;
    repeat (2) @(posedge clk); @(negedge clk) rst_n = 1;
    @(negedge clk); query_all();
    for (int n = 0; n < 400; n++) begin
      automatic int id = $urandom % 24;
      bit dup;
      @(negedge clk);
      push = ($urandom % 2) != 0; push_id = ID_W'(id);
      dup = in_model(id);
      #1;
      check(overwrite == (push && !dup && model.size() == DEPTH), "overwrite flag");
      @(posedge clk); #1;
      if (push && !dup) begin
        if (model.size() == DEPTH) void'(model.pop_front());
        model.push_back(id);
      end
      push = 0;
      check(count == model.size(), "count");
      query_all();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
