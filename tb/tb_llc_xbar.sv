// tb_llc_xbar: 4 cores send random line requests to 4 slice models. The
// slice models check that every request reaches the slice its address
// names and echo it back; the cores check that every response returns to
// the core that asked, with the echoed address of one of its outstanding
// requests, and that nothing is lost or duplicated.
module tb_llc_xbar;
  import dco_pkg::*;
  localparam int NC = 4, NS = 4, NREQ = 300;
  logic clk = 0, rst_n = 0;
  logic [NC-1:0] c_req_valid, c_req_ready, c_rsp_valid, c_rsp_ready;
  core_req_t c_req [NC];
  core_rsp_t c_rsp [NC];
  logic [NS-1:0] s_req_valid, s_req_ready, s_rsp_valid, s_rsp_ready;
  core_req_t s_req [NS];
  core_rsp_t s_rsp [NS];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;
  llc_xbar #(.NC(NC), .NS(NS)) dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  core_rsp_t sq [NS][$];
  int        outstanding [NC][$];
  int        sent [NC], recv [NC];

  initial begin
    repeat (50000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // slice models: random ready, echo the address as read data
  for (genvar s = 0; s < NS; s++) begin : g_s
    assign s_rsp_valid[s] = sq[s].size() > 0;
    assign s_rsp[s]       = sq[s].size() > 0 ? sq[s][0] : '0;
  end

  always @(negedge clk) begin
    for (int s = 0; s < NS; s++) s_req_ready[s] <= ($urandom % 4) != 0;
    for (int c = 0; c < NC; c++) c_rsp_ready[c] <= ($urandom % 3) != 0;
  end

  always @(posedge clk) if (rst_n) begin
    for (int s = 0; s < NS; s++) begin
      if (s_rsp_valid[s] && s_rsp_ready[s]) void'(sq[s].pop_front());
      if (s_req_valid[s] && s_req_ready[s]) begin
        core_rsp_t r;
        check(int'(s_req[s].laddr[1:0]) == s, "request routed to its slice");
        r.rdata = line_t'(s_req[s].laddr); r.we = 1'b0; r.core = s_req[s].core;
        sq[s].push_back(r);
      end
    end
    for (int c = 0; c < NC; c++) begin
      if (c_rsp_valid[c] && c_rsp_ready[c]) begin
        int idx[$];
        recv[c]++;
        check(int'(c_rsp[c].core) == c, "response to its core");
        idx = outstanding[c].find_first_index(x) with (x == int'(c_rsp[c].rdata));
        check(idx.size() == 1, "response matches an outstanding request");
        if (idx.size() == 1) outstanding[c].delete(idx[0]);
      end
      if (c_req_valid[c] && c_req_ready[c]) begin
        outstanding[c].push_back(int'(c_req[c].laddr));
        sent[c]++;
      end
    end
  end

  // cores: hold a request until accepted
  always @(negedge clk) if (rst_n)
    for (int c = 0; c < NC; c++)
      if (!c_req_valid[c] || c_req_ready[c]) begin
        if (sent[c] + (c_req_valid[c] && c_req_ready[c] ? 1 : 0) < NREQ && ($urandom % 2)) begin
          c_req_valid[c] <= 1'b1;
          c_req[c] <= '{laddr: laddr_t'($urandom % 4096), we: 1'b0, wdata: '0, core: core_id_t'(c)};
        end else c_req_valid[c] <= 1'b0;
      end

  initial begin
    c_req_valid = '0; c_rsp_ready = '0; s_req_ready = '0;
    for (int c = 0; c < NC; c++) begin c_req[c] = '0; sent[c] = 0; recv[c] = 0; end
    repeat (2) @(posedge clk); @(negedge clk) rst_n = 1;
    wait (sent[0] == NREQ && sent[1] == NREQ && sent[2] == NREQ && sent[3] == NREQ);
    repeat (500) @(posedge clk);
    for (int c = 0; c < NC; c++) begin
      check(recv[c] == NREQ, $sformatf("core %0d got all %0d responses (%0d)", c, NREQ, recv[c]));
      check(outstanding[c].size() == 0, "no outstanding requests left");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
