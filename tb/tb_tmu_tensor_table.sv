// tb_tmu_tensor_table: registers tensors, matches addresses to them and
// checks the tile-last-line flag, the bypass flag and nAcc against values
// computed here; also checks CLEAR and the drop of a registration when
// the table is full.
module tb_tmu_tensor_table;
  import dco_pkg::*;
  localparam int NENT = 4;
  logic clk = 0, rst_n = 0;
  tmu_cmd_t cmd;
  logic cmd_valid, reg_drop;
  laddr_t lk_addr [1];
  tensor_match_t lk_match [1];
  logic [NENT-1:0] ent_valid;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;
  tmu_tensor_table #(.NENT(NENT), .NPORT(1)) dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic reg_tensor(input laddr_t base, input int nacc, input int tl, input bit byp);
    @(negedge clk);
    cmd = '0; cmd.op = TMU_REG; cmd.base = base; cmd.nacc = NACC_W'(nacc);
    cmd.tilelen = TLEN_W'(tl); cmd.bypass = byp; cmd_valid = 1;
    @(negedge clk); cmd_valid = 0;
  endtask

  // reference: tensor bases/lengths as registered below
  laddr_t bases[3] = '{laddr_t'(1000), laddr_t'(5000), laddr_t'(9000)};
  int     naccs[3] = '{4, 2, 1};
  int     tls[3]   = '{8, 16, 4};
  bit     byps[3]  = '{0, 0, 1};

  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    cmd = '0; cmd_valid = 0; lk_addr[0] = '0;
    repeat (2) @(posedge clk); @(negedge clk) rst_n = 1;
    for (int i = 0; i < 3; i++) reg_tensor(bases[i], naccs[i], tls[i], byps[i]);
    check(ent_valid == 4'b0111, "three entries valid");
    lk_addr[0] = 10; #1;
    check(!lk_match[0].hit, "address below all bases does not match");
    for (int n = 0; n < 400; n++) begin
      int t; laddr_t a; int off;
      t = $urandom % 3;
      off = $urandom % 4000;
      a = bases[t] + laddr_t'(off);
      lk_addr[0] = a; #1;
      check(lk_match[0].hit, "hit");
      check(lk_match[0].nacc == NACC_W'(naccs[t]), "nacc of owning tensor");
      check(lk_match[0].bypass == byps[t], "bypass of owning tensor");
      check(lk_match[0].tll == ((off % tls[t]) == tls[t] - 1), "tile last line");
    end
    // fill the table, then one more registration is dropped
    reg_tensor(laddr_t'(20000), 3, 2, 0);
    check(ent_valid == 4'b1111, "table full");
    @(negedge clk);
    cmd = '0; cmd.op = TMU_REG; cmd.base = 30000; cmd_valid = 1;
    @(negedge clk); cmd_valid = 0;
    check(reg_drop, "registration dropped when full");
    // clear
    @(negedge clk); cmd = '0; cmd.op = TMU_CLEAR; cmd_valid = 1;
    @(negedge clk); cmd_valid = 0;
    lk_addr[0] = 5003; #1;
    check(ent_valid == 0 && !lk_match[0].hit, "clear invalidates all");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
