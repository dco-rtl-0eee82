// tb_tmu_live_tile_table: interleaved TLL accesses to many tiles, each
// with its own nAcc, against a reference counter array. Checks that each
// tile retires exactly on its nAcc-th access, that nAcc = 1 retires at
// once, that a full table drops new tiles, and that clear empties it.
module tb_tmu_live_tile_table;
  import dco_pkg::*;
  localparam int NENT = 8, ID_W = 12;
  logic clk = 0, rst_n = 0;
  logic clear, upd_valid, retire_valid, track_drop;
  logic [ID_W-1:0] upd_id, retire_id;
  logic [NACC_W-1:0] upd_nacc;
  logic [$clog2(NENT+1)-1:0] live_count;
  int checks = 0, failures = 0;
  int cnt [int];

  always #5 clk = ~clk;
  tmu_live_tile_table #(.NENT(NENT), .ID_W(ID_W)) dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic access(input int id, input int nacc);
    @(negedge clk);
    upd_valid = 1; upd_id = ID_W'(id); upd_nacc = NACC_W'(nacc);
    #1;
    begin
      int c = cnt.exists(id) ? cnt[id] + 1 : 1;
      bool_chk: begin
        bit tracked = cnt.exists(id) || cnt.size() < NENT;
        check(retire_valid == (tracked && c >= nacc), $sformatf("retire of tile %0d", id));
        check(track_drop == !tracked, "drop flag");
        if (tracked) begin
          if (c >= nacc) cnt.delete(id); else cnt[id] = c;
        end
      end
    end
    @(posedge clk); #1;
    upd_valid = 0;
    check(live_count == cnt.size(), "live count");
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    clear = 0; upd_valid = 0; upd_id = 0; upd_nacc = 0;
    repeat (2) @(posedge clk); @(negedge clk) rst_n = 1;
    access(5, 1);                        // nAcc 1: retires at once
    check(cnt.size() == 0, "nAcc=1 not kept");
    for (int k = 0; k < 3; k++) access(7, 3);   // retires on 3rd access
    // interleaved tiles, nAcc = 1 + id % 4, at most NENT live
    for (int n = 0; n < 600; n++) begin
      automatic int id = $urandom % 6 + 100;
      access(id, 1 + id % 4);
    end
    // overflow: fill with tiles needing many accesses
    for (int id = 200; id < 200 + NENT + 2; id++) access(id, 50);
    check(cnt.size() == NENT, "table full");
    @(negedge clk); clear = 1; @(negedge clk); clear = 0;
    cnt.delete();
    #1 check(live_count == 0, "clear empties the table");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
