// tb_tmu: registers two tensors through the CPU command port, then sends
// access notifications from 4 slices at once. Checks that only
// tile-last-line accesses count, that a tile becomes dead exactly after
// nAcc of them (visible to the dead-way query two cycles after the last
// notification is accepted), that the whole-tensor bypass flag is
// reported, that the configuration commands take effect (B_BITS clamped
// to its maximum), and that CLEAR forgets live tiles.
module tb_tmu;
  import dco_pkg::*;
  localparam int NSL = 4, WAYS = 4, TAG_W = 24;
  logic clk = 0, rst_n = 0;
  tmu_cmd_t cmd;
  logic cmd_valid;
  tmu_cfg_t cfg;
  logic [NSL-1:0] ntf_valid, ntf_ready, lk_bypass;
  laddr_t ntf_laddr [NSL];
  logic [TAG_W-1:0] ntf_tag [NSL];
  laddr_t lk_laddr [NSL];
  logic [TAG_W-1:0] q_tag [NSL][WAYS];
  logic [WAYS-1:0] q_dead [NSL];
  logic ev_tll, ev_retire, ev_drop, ev_overwrite, ev_reg_drop;
  logic [$clog2(17)-1:0] live_count;
  logic [$clog2(17)-1:0] dead_count;
  logic [3:0] tensor_valid;
  int checks = 0, failures = 0, retires = 0, tlls = 0;

  always #5 clk = ~clk;
  tmu #(.NSL(NSL), .NTENSOR(4), .NTILE(16), .DEAD_DEPTH(16), .WAYS(WAYS), .TAG_W(TAG_W)) dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  always @(posedge clk) if (rst_n) begin
    retires += ev_retire;
    tlls    += ev_tll;
  end

  task automatic send(input tmu_cmd_t c);
    @(negedge clk); cmd = c; cmd_valid = 1;
    @(negedge clk); cmd_valid = 0;
  endtask

  // In this test the tag of a line is its line address / 4 (the TMU does
  // not care how tags are formed); tiles are 4 lines, so the tile
  // identifier tag[TAG_W-1:0] is one per tile.
  function automatic logic [TAG_W-1:0] tag_of(laddr_t a);
    return TAG_W'(a >> 2);
  endfunction

  // notify from slice s, wait for acceptance; returns the acceptance cycle
  task automatic notify(input int s, input laddr_t a);
    @(negedge clk);
    ntf_valid[s] = 1; ntf_laddr[s] = a; ntf_tag[s] = tag_of(a);
    do @(posedge clk); while (!ntf_ready[s]);
    @(negedge clk) ntf_valid[s] = 0;
  endtask

  task automatic dead_chk(input laddr_t a, input bit exp, input string what);
    q_tag[0][0] = tag_of(a);
    #1;
    check(q_dead[0][0] == exp, what);
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    tmu_cmd_t c;
    cmd = '0; cmd_valid = 0; ntf_valid = '0;
    for (int s = 0; s < NSL; s++) begin
      ntf_laddr[s] = '0; ntf_tag[s] = '0; lk_laddr[s] = '0;
      for (int w = 0; w < WAYS; w++) q_tag[s][w] = '1;
    end
    repeat (2) @(posedge clk); @(negedge clk) rst_n = 1;
    check(cfg.b_bits == 3 && cfg.en_dbp && cfg.en_at && cfg.en_bypass, "reset configuration");
    // set(D_LSB=0, D_MSB=TAG_W-1, B_BITS=7 -> clamped to 4)
    c = '0; c.op = TMU_SET; c.cfg.d_lsb = 0; c.cfg.d_msb = TAG_W - 1; c.cfg.b_bits = 7;
    send(c);
    check(cfg.b_bits == BB_MAX && cfg.d_msb == TAG_W - 1, "SET applied, B_BITS clamped");
    // tensor A: base 0x100, tiles of 4 lines, nAcc 3; tensor B: base 0x800, bypassed
    c = '0; c.op = TMU_REG; c.base = 'h100; c.tilelen = 4; c.nacc = 3; c.opid = 0;
    send(c);
    c = '0; c.op = TMU_REG; c.base = 'h800; c.tilelen = 4; c.nacc = 1; c.bypass = 1; c.opid = 1;
    send(c);
    check(tensor_valid == 4'b0011, "two tensors registered");
    lk_laddr[1] = 'h805; lk_laddr[2] = 'h105; #1;
    check(lk_bypass[1] && !lk_bypass[2], "whole-tensor bypass flag");

    // non-last lines of tile 0x100..0x103 do not count
    for (int k = 0; k < 3; k++) notify(k, laddr_t'('h100 + k));
    repeat (3) @(posedge clk);
    check(tlls == 0, "non-last lines are not counted");
    // two TLL accesses from different slices at once
    @(negedge clk);
    ntf_valid = 4'b0110; ntf_laddr[1] = 'h103; ntf_tag[1] = tag_of('h103);
    ntf_laddr[2] = 'h103; ntf_tag[2] = tag_of('h103);
    @(posedge clk); #1 check($countones(ntf_ready) == 1, "one notification accepted per cycle");
    @(posedge clk); @(negedge clk) ntf_valid = '0;
    repeat (2) @(posedge clk);
    check(tlls == 2 && live_count == 1, "two TLL accesses counted, tile live");
    @(negedge clk);
    dead_chk('h101, 0, "tile not dead before nAcc accesses");
    // third access: dead two cycles after acceptance
    @(negedge clk);
    ntf_valid[3] = 1; ntf_laddr[3] = 'h103; ntf_tag[3] = tag_of('h103);
    @(posedge clk); @(negedge clk) ntf_valid[3] = 0;
    dead_chk('h102, 0, "not yet dead one cycle after acceptance");
    @(negedge clk);
    dead_chk('h102, 1, "dead two cycles after acceptance");
    check(retires == 1 && live_count == 0 && dead_count == 1, "tile retired to dead FIFO");
    // other tiles unaffected; nAcc=1 tensor retires on first TLL
    dead_chk('h107, 0, "neighbour tile not dead");
    notify(0, 'h807);
    repeat (2) @(posedge clk); @(negedge clk);
    dead_chk('h804, 1, "nAcc=1 tile dead after one access");
    // CLEAR forgets live tiles and tensors
    notify(1, 'h10b);
    repeat (2) @(posedge clk);
    check(live_count == 1, "tile 0x108 live");
    c = '0; c.op = TMU_CLEAR; send(c);
    check(live_count == 0 && tensor_valid == 0, "CLEAR empties live tiles and tensors");
    notify(1, 'h10b);
    repeat (2) @(posedge clk);
    check(live_count == 0, "no tensor, no tracking after CLEAR");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
