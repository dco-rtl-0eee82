// tb_llc_slice: one LLC slice (4 sets x 4 ways) with a main-memory model
// and a TMU model (dead tags and bypass-tensor addresses set by the
// test). Directed checks: miss then hit and the hit latency; that
// anti-thrashing evicts the lowest tag[B_BITS-1:0] tier even when it was
// used most recently; that a dead block is evicted before it; that a
// dirty victim is written back and read back correctly; whole-tensor
// bypass (no allocation); the gear rising under eviction pressure and the
// resulting dynamic bypass; gqa mode sparing the faster core; and every
// access reported to the TMU. Then random reads and writes are checked
// against a flat memory model.
module tb_llc_slice;
  import dco_pkg::*;
  localparam int NSETS = 4, WAYS = 4, WINDOW = 16, NSL = 32;
  localparam int SL_W = 5, SET_W = 2, TAG_W = LADDR_W - SL_W - SET_W;
  logic clk = 0, rst_n = 0;
  logic req_valid, req_ready, rsp_valid, rsp_ready;
  core_req_t req; core_rsp_t rsp;
  logic mem_req_valid, mem_req_ready, mem_rsp_valid;
  mem_req_t mem_req; line_t mem_rsp_data;
  tmu_cfg_t cfg;
  logic [NCORE-1:0] core_slow;
  logic ntf_valid, ntf_ready, lk_bypass;
  laddr_t ntf_laddr, lk_laddr;
  logic [TAG_W-1:0] ntf_tag;
  logic [TAG_W-1:0] q_tag [WAYS];
  logic [WAYS-1:0] q_dead;
  slice_ev_t ev;
  logic [GEAR_W-1:0] gear;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;
  llc_slice #(.NSETS(NSETS), .WAYS(WAYS), .REQ_Q(4), .RESP_Q(4), .WINDOW(WINDOW),
              .NSL(NSL)) dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // ---------------- memory model ----------------
  line_t mem [laddr_t];
  function automatic line_t mem_rd(laddr_t a);
    return mem.exists(a) ? mem[a] : {(LINE_W/32){32'(a) ^ 32'h5a5a0000}};
  endfunction
  int mem_wait; bit mem_busy; laddr_t mem_a;
  int n_mem_wr = 0, n_mem_rd = 0;
  always @(negedge clk) mem_req_ready <= ($urandom % 3) != 0;
  always @(posedge clk) begin
    mem_rsp_valid <= 1'b0;
    if (rst_n) begin
      if (mem_busy) begin
        if (mem_wait == 0) begin
          mem_rsp_valid <= 1'b1; mem_rsp_data <= mem_rd(mem_a); mem_busy <= 0;
        end else mem_wait <= mem_wait - 1;
      end
      if (mem_req_valid && mem_req_ready) begin
        if (mem_req.we) begin mem[mem_req.laddr] = mem_req.wdata; n_mem_wr++; end
        else begin mem_busy <= 1; mem_a <= mem_req.laddr; mem_wait <= $urandom % 6; n_mem_rd++; end
      end
    end
  end

  // ---------------- TMU model ----------------
  logic [TAG_W-1:0] dead_tags[$];
  laddr_t bypass_lo = '1, bypass_hi = '0;   // whole-tensor bypass range
  always_comb
    for (int w = 0; w < WAYS; w++) begin
      q_dead[w] = 1'b0;
      foreach (dead_tags[i]) if (dead_tags[i] == q_tag[w]) q_dead[w] = 1'b1;
    end
  assign lk_bypass = (lk_laddr >= bypass_lo) && (lk_laddr <= bypass_hi);
  int n_ntf = 0;
  always @(negedge clk) ntf_ready <= ($urandom % 2) != 0;
  always @(posedge clk) if (ntf_valid && ntf_ready) n_ntf++;

  // ---------------- event counters ----------------
  int n_hit, n_miss, n_byp, n_evict, n_dead, n_at, n_wb, n_up;
  always @(posedge clk) if (rst_n) begin
    n_hit += ev.hit; n_miss += ev.miss; n_byp += ev.bypass; n_evict += ev.evict;
    n_dead += ev.evict_dead; n_at += ev.evict_at; n_wb += ev.writeback; n_up += ev.gear_up;
  end

  function automatic laddr_t la(int tag, int set);
    return laddr_t'((longint'(tag) << (SL_W + SET_W)) | (set << SL_W) | 3);
  endfunction

  // one access; returns the response data, its latency and whether it hit
  line_t rdata; int lat; bit was_hit;
  task automatic access(input laddr_t a, input bit we, input line_t wd, input int core = 0);
    int h0, t0;
    @(negedge clk);
    req_valid = 1; req = '{laddr: a, we: we, wdata: wd, core: core_id_t'(core)};
    h0 = n_hit;
    do @(posedge clk); while (!req_ready);
    t0 = 0;
    @(negedge clk) req_valid = 0;
    while (!rsp_valid) begin @(negedge clk); t0++; end
    rdata = rsp.rdata; lat = t0;
    check(rsp.we == we && rsp.core == core_id_t'(core), "response fields");
    rsp_ready = 1; @(negedge clk); rsp_ready = 0;
    repeat (3) @(posedge clk);   // let the TMU notification finish
    was_hit = n_hit > h0;
  endtask

  initial begin
    repeat (60000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int ntf0;
    req_valid = 0; req = '0; rsp_ready = 0; core_slow = '0;
    mem_busy = 0; mem_rsp_valid = 0; mem_rsp_data = '0;
    n_hit = 0; n_miss = 0; n_byp = 0; n_evict = 0; n_dead = 0; n_at = 0; n_wb = 0; n_up = 0;
    cfg = '{d_lsb: 0, d_msb: BPOS_W'(TAG_W - 1), b_bits: 3, bypass_ub: 1000, bypass_lb: 0,
            en_dbp: 1, en_at: 1, en_bypass: 1, gqa_mode: 0};
    repeat (2) @(posedge clk); @(negedge clk) rst_n = 1;

    // 1. miss, then hit with fixed latency; data from memory
    access(la('h15, 1), 0, '0);
    check(!was_hit && rdata == mem_rd(la('h15, 1)), "first read misses, memory data");
    access(la('h15, 1), 0, '0);
    check(was_hit && rdata == mem_rd(la('h15, 1)), "second read hits");
    check(lat == 3, $sformatf("hit answered 3 cycles after acceptance (%0d)", lat));

    // 2. anti-thrashing: set 2 gets tags with tier (tag[2:0]) 5,6,7,3;
    //    touch tier 3 last (MRU), then a new line evicts tier 3 anyway
    access(la('h25, 2), 0, '0); access(la('h26, 2), 0, '0);
    access(la('h27, 2), 0, '0); access(la('h23, 2), 0, '0);
    access(la('h25, 2), 0, '0); access(la('h23, 2), 0, '0);
    access(la('h34, 2), 0, '0);
    check(n_at == 1 && n_evict == 1, "one anti-thrashing eviction");
    access(la('h23, 2), 0, '0);
    check(!was_hit, "lowest tier evicted although most recently used");
    access(la('h27, 2), 0, '0);
    check(was_hit, "higher tier kept");

    // 3. dead block prediction overrides the tier order
    dead_tags.push_back(TAG_W'('h27));
    access(la('h41, 2), 0, '0);
    check(n_dead == 1, "dead block evicted");
    dead_tags.delete();
    access(la('h27, 2), 0, '0);
    check(!was_hit, "the dead line is gone");

    // 4. write-back: dirty line in set 3, evicted, read back from memory
    access(la('h50, 3), 1, {(LINE_W/32){32'hcafe0001}});
    for (int t = 1; t <= WAYS; t++) access(la('h50 + 8 * t, 3), 0, '0);
    check(n_wb >= 1, "dirty victim written back");
    access(la('h50, 3), 0, '0);
    check(rdata == {(LINE_W/32){32'hcafe0001}}, "written data survives eviction");

    // 5. whole-tensor bypass: no allocation
    bypass_lo = la('h90, 0); bypass_hi = la('h9f, 0);
    ntf0 = n_byp;
    access(la('h91, 0), 0, '0);
    access(la('h91, 0), 0, '0);
    check(!was_hit && n_byp == ntf0 + 2, "bypassed line not allocated");
    access(la('h92, 0), 1, {(LINE_W/32){32'h00b0b0b0}});
    check(mem_rd(la('h92, 0)) == {(LINE_W/32){32'h00b0b0b0}}, "bypassed write reaches memory");
    bypass_lo = '1; bypass_hi = '0;

    // 6. dynamic bypass: under eviction pressure the gear rises and the
    //    lowest tiers are bypassed
    cfg.bypass_ub = 0;
    for (int t = 0; t < 40; t++) access(la('h100 + t * 9, t % NSETS), 0, '0);
    check(n_up > 0 && gear > 0, "gear rose under eviction pressure");
    begin
      int b0;
      b0 = n_byp;
      access(la('h200, 1), 0, '0);     // tier 0 < gear
      check(n_byp == b0 + 1, $sformatf("tier below the gear bypassed (gear %0d hit %0d)", gear, was_hit));
      // gqa mode: the faster core's data is cached, the slower core's bypassed
      cfg.gqa_mode = 1; core_slow = 16'b10;
      b0 = n_byp;
      access(la('h208, 1), 0, '0, 0);
      check(n_byp == b0, "gqa: faster core not bypassed");
      access(la('h210, 1), 0, '0, 1);
      check(n_byp == b0 + 1, "gqa: slower core bypassed");
      cfg.gqa_mode = 0;
    end
    cfg.bypass_ub = 1000; cfg.bypass_lb = 1000;   // let the gear fall
    repeat (WINDOW * 10) @(posedge clk);
    check(gear == 0, "gear fell back to 0");

    // 7. random traffic against the flat memory model
    ntf0 = n_ntf;
    for (int n = 0; n < 400; n++) begin
      automatic laddr_t a = la($urandom % 12, $urandom % NSETS);
      automatic bit we = ($urandom % 3) == 0;
      automatic line_t wd = {(LINE_W/32){$urandom}};
      if (n % 50 == 0) cfg.en_at = !cfg.en_at;
      access(a, we, wd);
      if (!we) check(rdata == shadow_rd(a), "random read data");
      else shadow[a] = wd;
    end
    check(n_ntf == ntf0 + 400, "every access reported to the TMU");
    $display("hits=%0d misses=%0d bypass=%0d evict=%0d dead=%0d at=%0d wb=%0d",
             n_hit, n_miss, n_byp, n_evict, n_dead, n_at, n_wb);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // architectural memory image: what a read must return
  line_t shadow [laddr_t];
  function automatic line_t shadow_rd(laddr_t a);
    return shadow.exists(a) ? shadow[a] : mem_rd_init(a);
  endfunction
  function automatic line_t mem_rd_init(laddr_t a);
    return {(LINE_W/32){32'(a) ^ 32'h5a5a0000}};
  endfunction
endmodule
