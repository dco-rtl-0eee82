// tb_dco_top: end-to-end test of the shared LLC with its TMU, driven the
// way software would drive it: the CPU registers tensors and parameters,
// then the cores stream tiles through the cache.
//
// Layout: a tile is one tag value's worth of lines (NSL*NSETS lines), so
// its identifier tag[D_MSB:D_LSB] and its priority tag[2:0] are the
// tile number. K and V each have NT = WAYS tiles, twice what the LLC
// holds, so plain LRU would thrash. Q and O are registered with the
// whole-tensor bypass flag, as the cores keep them in their scratchpads.
//   Phase A: Q, K0, V0, O registered (K/V nAcc = P). Every core reads its
//            share of Q, then P passes over K0 and V0 (core c reads the
//            lines with index % NC == c), then writes its share of O.
//            At the end every K0/V0 tile has had P tile-last-line
//            accesses and is dead.
//   Phase B: CLEAR, then K1, V1 and an output C (cached, nAcc 1) are
//            registered; the same passes run; C is written. Dead K0/V0
//            lines are now evicted first.
//   Phase C: CLEAR, gqa_bypass mode on; K2/V2 streamed while the odd
//            cores run at a quarter of the rate, so they are mostly the
//            slower core of their pair. A miss may be bypassed only for
//            a core that is, at that moment, the slower of its pair.
//   Idle:    no traffic, so the gears fall back.
// Every read response is checked against the memory image, every
// request must be answered, and each mechanism (hit, miss, whole-tensor
// bypass, dynamic bypass, gqa restriction, anti-thrashing eviction, dead
// block eviction, write-back, gear up/down, tile retirement, dead FIFO
// overwrite, request-queue back-pressure) must occur at least once.
module tb_dco_top;
  import dco_pkg::*;
  localparam int NSL = 4, NC = 4, NSETS = 8, WAYS = 4, WINDOW = 32;
  localparam int P = 2;                 // passes over K/V per phase
  localparam int GRAN = NSL * NSETS;    // lines per tag value = per tile
  localparam int NT = WAYS;             // tiles per K or V tensor
  localparam int TAG_W = LADDR_W - $clog2(NSL) - $clog2(NSETS);
  localparam int TIMEOUT = 400000;
  localparam int MAXOUT = 32;          // outstanding requests per core

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

  dco_top #(.NSL(NSL), .NC(NC), .NSETS(NSETS), .WAYS(WAYS), .WINDOW(WINDOW)) dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // ---------------- address map of the workload ----------------
  // tensor bases, as tile (tag) numbers
  localparam int T_Q = 'h80, T_O = 'h88, T_C = 'h90;
  function automatic int t_k(int ph); return 'h10 + 'h20 * ph; endfunction
  function automatic int t_v(int ph); return 'h18 + 'h20 * ph; endfunction
  function automatic laddr_t la(int tile, int line);
    return laddr_t'(longint'(tile) * GRAN + line);
  endfunction
  function automatic line_t init_data(laddr_t a);
    return {(LINE_W/32){32'(a) ^ 32'h0dc0_0000}};
  endfunction

  // ---------------- memory model: one in-order port per slice ----------------
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
          if (mem_req[s].we) mem[mem_req[s].laddr] = mem_req[s].wdata;
          else mq[s].push_back('{a: mem_req[s].laddr, due: cyc + 8 + $urandom % 8});
        end
      end
    end
  end

  // ---------------- cores: request lists, up to MAXOUT outstanding ----------------
  typedef struct packed { laddr_t a; logic we; } op_t;
  op_t    prog [NC][$];
  laddr_t outst [NC][$];
  int     n_out [NC];
  int     rate_div [NC];
  int     issued = 0, answered = 0, stalls = 0;

  always @(negedge clk) for (int c = 0; c < NC; c++) core_rsp_ready[c] <= ($urandom % 4) != 0;

  always @(posedge clk) if (rst_n) begin
    core_commit <= '0;
    for (int c = 0; c < NC; c++) begin
      if (core_req_valid[c] && !core_req_ready[c]) stalls++;
      if (core_req_valid[c] && core_req_ready[c]) begin
        issued++;
        core_commit[c] <= 1'b1;
        if (!core_req[c].we) outst[c].push_back(core_req[c].laddr);
        else n_out[c]--;   // write acks are only counted
        n_out[c]++;
      end
      if (core_rsp_valid[c] && core_rsp_ready[c]) begin
        answered++;
        check(int'(core_rsp[c].core) == c, "response reaches its core");
        if (!core_rsp[c].we) begin
          int idx[$];
          idx = outst[c].find_first_index(x) with (core_rsp[c].rdata == init_data(x));
          check(idx.size() > 0, $sformatf("core %0d read data matches an outstanding read (%h, cyc %0d)", c, core_rsp[c].rdata[31:0] ^ 32'h0dc0_0000, cyc));
          if (idx.size() > 0) outst[c].delete(idx[0]);
          n_out[c]--;
        end
      end
    end
  end

  always @(negedge clk) if (rst_n)
    for (int c = 0; c < NC; c++)
      if (!core_req_valid[c] || core_req_ready[c]) begin
        if (core_req_valid[c] && core_req_ready[c] && prog[c].size() > 0) void'(prog[c].pop_front());
        if (prog[c].size() > 0 && n_out[c] < MAXOUT && (cyc % rate_div[c]) == 0) begin
          core_req_valid[c] <= 1'b1;
          core_req[c] <= '{laddr: prog[c][0].a, we: prog[c][0].we,
                           wdata: {(LINE_W/32){32'hd0d0_0000 | 32'(prog[c][0].a)}},
                           core: core_id_t'(c)};
        end else core_req_valid[c] <= 1'b0;
      end

  // ---------------- mechanism counters ----------------
  int n_hit, n_miss, n_tbyp, n_dbyp, n_gqa_slow, n_gqa_fast, n_gqa_even, n_at, n_dead, n_wb,
      n_up, n_down, n_tll, n_retire, n_ovw;
  bit phase_c = 0;
  for (genvar s = 0; s < NSL; s++) begin : g_mon
    always @(posedge clk) if (rst_n) begin
      automatic laddr_t a = dut.g_slice[s].u_slice.r.laddr;
      automatic int tile = int'(a / GRAN);
      automatic int core = int'(dut.g_slice[s].u_slice.r.core);
      n_hit  += slice_ev[s].hit;
      n_miss += slice_ev[s].miss;
      if (slice_ev[s].bypass) begin
        if (tile == T_Q || tile == T_O) n_tbyp++;
        else begin
          n_dbyp++;
          if (phase_c) begin
            // only a core that is currently the slower of its pair
            if (!dut.core_slow[core]) n_gqa_fast++;
            else if (core % 2 == 1) n_gqa_slow++;
            else n_gqa_even++;
          end
        end
      end
      n_at   += slice_ev[s].evict_at;
      n_dead += slice_ev[s].evict_dead;
      n_wb   += slice_ev[s].writeback;
      n_up   += slice_ev[s].gear_up;
      n_down += slice_ev[s].gear_down;
    end
  end
  always @(posedge clk) if (rst_n) begin
    n_tll += tmu_ev_tll; n_retire += tmu_ev_retire; n_ovw += tmu_ev_overwrite;
  end

  // ---------------- CPU ----------------
  task automatic send(input tmu_cmd_t c);
    @(negedge clk); cmd = c; cmd_valid = 1;
    @(negedge clk); cmd_valid = 0;
  endtask
  task automatic reg_tensor(input int tile, input int nacc, input bit byp, input int opid);
    tmu_cmd_t c;
    c = '0; c.op = TMU_REG; c.base = la(tile, 0); c.tilelen = TLEN_W'(GRAN);
    c.nacc = NACC_W'(nacc); c.bypass = byp; c.opid = OPID_W'(opid);
    send(c);
  endtask
  task automatic set_byp(input bit gqa);
    tmu_cmd_t c;
    c = '0; c.op = TMU_SET_BYP;
    c.cfg.bypass_ub = EVC_W'(0); c.cfg.bypass_lb = EVC_W'(1);
    c.cfg.en_dbp = 1; c.cfg.en_at = 1; c.cfg.en_bypass = 1; c.cfg.gqa_mode = gqa;
    send(c);
  endtask

  // every core's share of a tile: lines with index % NC == c
  task automatic add_tile(input int c, input int tile, input bit we);
    for (int i = c; i < GRAN; i += NC) prog[c].push_back('{a: la(tile, i), we: we});
  endtask
  task automatic add_kv(input int ph);
    for (int c = 0; c < NC; c++)
      for (int p = 0; p < P; p++) begin
        for (int t = 0; t < NT; t++) add_tile(c, t_k(ph) + t, 0);
        for (int t = 0; t < NT; t++) add_tile(c, t_v(ph) + t, 0);
      end
  endtask
  task automatic run_all();
    int total = 0;
    for (int c = 0; c < NC; c++) total += prog[c].size();
    wait (prog[0].size() == 0 && prog[1].size() == 0 &&
          prog[NC-2].size() == 0 && prog[NC-1].size() == 0);
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
    cmd = '0; cmd_valid = 0; core_req_valid = '0; core_rsp_ready = '0; core_commit = '0;
    for (int i = 0; i < NC; i++) begin core_req[i] = '0; n_out[i] = 0; rate_div[i] = 1; end
    for (int s = 0; s < NSL; s++) mem_rsp_data[s] = '0;
    {n_hit, n_miss, n_tbyp, n_dbyp, n_gqa_slow, n_gqa_fast, n_gqa_even, n_at, n_dead, n_wb} = '0;
    {n_up, n_down, n_tll, n_retire, n_ovw} = '0;
    repeat (3) @(posedge clk); @(negedge clk) rst_n = 1;

    // parameters: tile id = whole tag, 3 priority bits
    c = '0; c.op = TMU_SET; c.cfg.d_lsb = 0; c.cfg.d_msb = BPOS_W'(TAG_W - 1); c.cfg.b_bits = 3;
    send(c);
    set_byp(0);
    check(cfg.b_bits == 3 && cfg.en_dbp && !cfg.gqa_mode, "configuration registered");

    // ---- phase A ----
    reg_tensor(T_Q, 1, 1, 0);
    reg_tensor(t_k(0), P, 0, 1);
    reg_tensor(t_v(0), P, 0, 2);
    reg_tensor(T_O, 1, 1, 3);
    for (int i = 0; i < NC; i++) add_tile(i, T_Q, 0);
    add_kv(0);
    for (int i = 0; i < NC; i++) add_tile(i, T_O, 1);
    run_all();
    check(n_retire >= 2 * NT, $sformatf("phase A: all K0/V0 tiles retired (%0d)", n_retire));
    check(tmu_live_count == 0, "phase A: no live tiles left");
    $display("phase A done at cycle %0d: hits %0d misses %0d", cyc, n_hit, n_miss);

    // ---- phase B ----
    c = '0; c.op = TMU_CLEAR; send(c);
    reg_tensor(t_k(1), P, 0, 1);
    reg_tensor(t_v(1), P, 0, 2);
    reg_tensor(T_C, 1, 0, 3);
    add_kv(1);
    for (int i = 0; i < NC; i++) add_tile(i, T_C, 1);
    run_all();
    check(n_dead > 0, "phase B: dead K0/V0 lines evicted first");
    $display("phase B done at cycle %0d", cyc);

    // ---- phase C: gqa_bypass, odd cores slow ----
    c = '0; c.op = TMU_CLEAR; send(c);
    set_byp(1);
    reg_tensor(t_k(2), P, 0, 1);
    reg_tensor(t_v(2), P, 0, 2);
    for (int i = 1; i < NC; i += 2) rate_div[i] = 4;
    phase_c = 1;
    add_kv(2);
    run_all();
    phase_c = 0;
    for (int i = 0; i < NC; i++) rate_div[i] = 1;
    check(n_gqa_fast == 0, "gqa: a core that is not the slower of its pair is never bypassed");
    check(n_gqa_slow > n_gqa_even, "gqa: the quarter-rate cores take most of the bypasses");
    $display("phase C done at cycle %0d", cyc);

    // ---- idle: gears fall ----
    repeat (WINDOW * 12) @(posedge clk);
    for (int s = 0; s < NSL; s++) check(slice_gear[s] == 0, "gear back to 0 when idle");

    check(issued == answered, $sformatf("every request answered (%0d/%0d)", answered, issued));
    check(n_hit > 0,      "mechanism: cache hit");
    check(n_miss > 0,     "mechanism: cache miss");
    check(n_tbyp > 0,     "mechanism: whole-tensor bypass");
    check(n_dbyp > 0,     "mechanism: dynamic bypass");
    check(n_gqa_slow > 0, "mechanism: gqa bypass of the slower core");
    check(n_at > 0,       "mechanism: anti-thrashing eviction");
    check(n_dead > 0,     "mechanism: dead block eviction");
    check(n_wb > 0,       "mechanism: write-back");
    check(n_up > 0,       "mechanism: gear up");
    check(n_down > 0,     "mechanism: gear down");
    check(n_tll > 0,      "mechanism: tile-last-line counting");
    check(n_retire > 0,   "mechanism: tile retirement");
    check(n_ovw > 0,      "mechanism: dead FIFO overwrite");
    check(stalls > 0,     "mechanism: request back-pressure");
    $display("hits %0d misses %0d tensor-bypass %0d dyn-bypass %0d (gqa odd %0d even %0d not-slow %0d)",
             n_hit, n_miss, n_tbyp, n_dbyp, n_gqa_slow, n_gqa_even, n_gqa_fast);
    $display("evict: at %0d dead %0d; writebacks %0d; gear up %0d down %0d",
             n_at, n_dead, n_wb, n_up, n_down);
    $display("tll %0d retire %0d overwrite %0d stalls %0d cycles %0d",
             n_tll, n_retire, n_ovw, stalls, cyc);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
