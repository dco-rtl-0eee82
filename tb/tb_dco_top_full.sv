// tb_dco_top_full: the shared LLC at its full size (default parameters:
// 32 slices of 128 sets x 8 ways, 16 cores, 8 tensor entries, 256 live
// tiles, 16-deep dead FIFO).
//
// A tile is one tag value, i.e. 32 slices x 128 sets = 4096 lines
// (512 KB). The CPU registers a K tensor of two tiles (nAcc 1) and an O
// tensor with the whole-tensor bypass flag. The 16 cores read K tile 0
// (misses, every line fills), read it again (hits: 4096 lines fit in the
// 4 MB cache), read K tile 1, then write one O tile (bypassed) and read
// part of it back from memory. Checked: every read returns the memory
// image, every request is answered, the tiles retire after their
// tile-last-line accesses, O is never allocated, and hits, misses and
// bypasses all occur.
module tb_dco_top_full;
  import dco_pkg::*;
  localparam int NSL = NSLICE, NC = NCORE;
  localparam int GRAN = NSLICE * 128;       // lines per tag value = per tile
  localparam int TAG_W = LADDR_W - $clog2(NSLICE) - 7;
  localparam int TIMEOUT = 200000;
  localparam int MAXOUT = 16;

  logic clk = 0, rst_n = 0;
  tmu_cmd_t cmd; logic cmd_valid; tmu_cfg_t cfg;
  logic [NC-1:0] core_req_valid, core_req_ready, core_rsp_valid, core_rsp_ready, core_commit;
  core_req_t core_req [NC];
  core_rsp_t core_rsp [NC];
  logic [NSL-1:0] mem_req_valid, mem_req_ready, mem_rsp_valid;
  mem_req_t mem_req [NSL];
  line_t mem_rsp_data [NSL];
  slice_ev_t slice_ev [NSL];
  logic [GEAR_W-1:0] slice_gear [NSL];
  logic tmu_ev_tll, tmu_ev_retire, tmu_ev_drop, tmu_ev_overwrite, tmu_ev_reg_drop;
  logic [7:0] tmu_tensor_valid;
  logic [$clog2(257)-1:0] tmu_live_count;
  logic [$clog2(17)-1:0] tmu_dead_count;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  dco_top dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  localparam int T_K = 'h21, T_O = 'h40;
  function automatic laddr_t la(int tile, int line);
    return laddr_t'(longint'(tile) * GRAN + line);
  endfunction
  function automatic line_t init_data(laddr_t a);
    return {(LINE_W/32){32'(a) ^ 32'h5a00_0000}};
  endfunction

  // ---------------- memory model ----------------
  line_t mem [laddr_t];
  typedef struct { laddr_t a; longint due; } pend_t;
  pend_t mq [NSL][$];
  longint cyc = 0;
  always @(posedge clk) cyc++;
  always @(negedge clk) for (int s = 0; s < NSL; s++) mem_req_ready[s] <= ($urandom % 4) != 0;
  always @(posedge clk) begin
    for (int s = 0; s < NSL; s++) begin
      mem_rsp_valid[s] <= 1'b0;
      if (rst_n) begin
        if (mq[s].size() > 0 && mq[s][0].due <= cyc) begin
          automatic laddr_t a = mq[s][0].a;
          mem_rsp_valid[s] <= 1'b1;
          mem_rsp_data[s]  <= mem.exists(a) ? mem[a] : init_data(a);
          void'(mq[s].pop_front());
        end
        if (mem_req_valid[s] && mem_req_ready[s]) begin
          check(int'(mem_req[s].laddr % NSL) == s, "memory request leaves the slice owning it");
          if (mem_req[s].we) mem[mem_req[s].laddr] = mem_req[s].wdata;
          else mq[s].push_back('{a: mem_req[s].laddr, due: cyc + 10 + $urandom % 10});
        end
      end
    end
  end

  // ---------------- cores ----------------
  typedef struct packed { laddr_t a; logic we; } op_t;
  op_t    prog [NC][$];
  laddr_t outst [NC][$];
  int     n_out [NC];
  int     issued = 0, answered = 0;

  always @(negedge clk) for (int c = 0; c < NC; c++) core_rsp_ready[c] <= ($urandom % 4) != 0;

  always @(posedge clk) if (rst_n) begin
    core_commit <= '0;
    for (int c = 0; c < NC; c++) begin
      if (core_req_valid[c] && core_req_ready[c]) begin
        issued++;
        core_commit[c] <= 1'b1;
        if (!core_req[c].we) outst[c].push_back(core_req[c].laddr);
        else n_out[c]--;
        n_out[c]++;
      end
      if (core_rsp_valid[c] && core_rsp_ready[c]) begin
        answered++;
        check(int'(core_rsp[c].core) == c, "response reaches its core");
        if (!core_rsp[c].we) begin
          int idx[$];
          idx = outst[c].find_first_index(x) with (core_rsp[c].rdata == mem_image(x));
          check(idx.size() > 0, $sformatf("core %0d read data matches an outstanding read", c));
          if (idx.size() > 0) outst[c].delete(idx[0]);
          n_out[c]--;
        end
      end
    end
  end

  function automatic line_t mem_image(laddr_t a);
    return mem.exists(a) ? mem[a] : init_data(a);
  endfunction

  always @(negedge clk) if (rst_n)
    for (int c = 0; c < NC; c++)
      if (!core_req_valid[c] || core_req_ready[c]) begin
        if (core_req_valid[c] && core_req_ready[c] && prog[c].size() > 0) void'(prog[c].pop_front());
        if (prog[c].size() > 0 && n_out[c] < MAXOUT) begin
          core_req_valid[c] <= 1'b1;
          core_req[c] <= '{laddr: prog[c][0].a, we: prog[c][0].we,
                           wdata: {(LINE_W/32){32'hb0b0_0000 | 32'(prog[c][0].a)}},
                           core: core_id_t'(c)};
        end else core_req_valid[c] <= 1'b0;
      end

  // ---------------- mechanism counters ----------------
  int n_hit, n_miss, n_byp, n_retire, n_tll;
  always @(posedge clk) if (rst_n) begin
    for (int s = 0; s < NSL; s++) begin
      n_hit  += slice_ev[s].hit;
      n_miss += slice_ev[s].miss;
      n_byp  += slice_ev[s].bypass;
    end
    n_retire += tmu_ev_retire;
    n_tll    += tmu_ev_tll;
  end

  // ---------------- CPU ----------------
  task automatic send(input tmu_cmd_t c);
    @(negedge clk); cmd = c; cmd_valid = 1;
    @(negedge clk); cmd_valid = 0;
  endtask
  task automatic add_tile(input int tile, input int n, input bit we);
    for (int c = 0; c < NC; c++)
      for (int i = c; i < n; i += NC) prog[c].push_back('{a: la(tile, i), we: we});
  endtask
  task automatic run_all();
    for (int c = 0; c < NC; c++) wait (prog[c].size() == 0 && n_out[c] == 0);
    repeat (20) @(posedge clk);
  endtask

  initial begin
    repeat (TIMEOUT) @(posedge clk);
    failures++; $display("FAIL: watchdog (issued %0d answered %0d)", issued, answered);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    tmu_cmd_t c;
    int h0, m0, b0;
    cmd = '0; cmd_valid = 0; core_req_valid = '0; core_rsp_ready = '0; core_commit = '0;
    for (int i = 0; i < NC; i++) begin core_req[i] = '0; n_out[i] = 0; end
    for (int s = 0; s < NSL; s++) mem_rsp_data[s] = '0;
    {n_hit, n_miss, n_byp, n_retire, n_tll} = '0;
    repeat (3) @(posedge clk); @(negedge clk) rst_n = 1;
    check(cfg.b_bits == 3 && cfg.d_msb == BPOS_W'(TAG_W - 1), "reset configuration");

    c = '0; c.op = TMU_REG; c.base = la(T_K, 0); c.tilelen = TLEN_W'(GRAN); c.nacc = 1; c.opid = 1;
    send(c);
    c = '0; c.op = TMU_REG; c.base = la(T_O, 0); c.tilelen = TLEN_W'(GRAN); c.nacc = 1; c.opid = 3;
    c.bypass = 1;
    send(c);
    check(tmu_tensor_valid == 8'b11, "two tensors registered");

    add_tile(T_K, GRAN, 0);
    run_all();
    check(n_miss == GRAN && n_hit == 0, $sformatf("K tile 0: every line misses (%0d)", n_miss));
    check(n_retire == 1, "K tile 0 retires after its tile-last-line access");

    h0 = n_hit;
    add_tile(T_K, GRAN, 0);
    run_all();
    check(n_hit - h0 == GRAN, $sformatf("K tile 0 again: every line hits (%0d)", n_hit - h0));

    m0 = n_miss;
    add_tile(T_K + 1, GRAN, 0);
    run_all();
    check(n_miss - m0 == GRAN, "K tile 1 misses");
    check(n_byp == 0, "K is never bypassed");

    b0 = n_byp;
    add_tile(T_O, GRAN / 4, 1);
    run_all();
    add_tile(T_O, GRAN / 8, 0);
    run_all();
    check(n_byp - b0 == GRAN / 4 + GRAN / 8, $sformatf("O is bypassed (%0d)", n_byp - b0));

    check(issued == answered, $sformatf("every request answered (%0d/%0d)", answered, issued));
    check(n_tll >= 2, "tile-last-line accesses counted");
    $display("hits %0d misses %0d bypasses %0d tll %0d retire %0d cycles %0d",
             n_hit, n_miss, n_byp, n_tll, n_retire, cyc);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
