// llc_slice: one slice of the accelerators' shared last-level cache.
//
// A WAYS-way set-associative, write-back, write-allocate cache of whole
// lines with a request queue (REQ_Q entries) and a response queue (RESP_Q
// entries) in front. Each line has a tag and the bits valid, dirty and an
// LRU age. Its replacement and bypass logic consult the TMU:
//   - every core access is reported to the TMU (line address and tag), so
//     that tile-last-line accesses are counted and finished tiles become
//     dead;
//   - on a miss the line is bypassed (fetched from or written to memory
//     without allocation) when bypass_unit says so: whole-tensor bypass
//     flag from the TMU, or tag[B_BITS-1:0] below this slice's gear;
//   - otherwise a victim is chosen by victim_select from the TMU's
//     dead-way vector of the set, the priority tiers tag[B_BITS-1:0] and
//     the LRU ages; every eviction of a valid line is counted by this
//     slice's gear_ctrl, which adapts B_GEAR.
//
// Timing: after reset the slice spends NSETS cycles initialising the LRU
// ages (requests are queued meanwhile). One request is handled at a time
// (blocking). A request is taken from the request queue in IDLE and
// looked up in LOOK (one cycle). A hit's response enters the response
// queue in RESP, the cycle after LOOK, and is visible on rsp three cycles
// after the request was accepted; NTF then reports the access to the TMU.
// A miss adds the write-back of a dirty victim and the line fill, each a
// memory request; memory answers reads in order on mem_rsp. Writes carry
// a whole line, so a write miss allocates without fetching. The data
// array is read synchronously (one read per request).
//
// Left unused on purpose: the gear controller's eviction count and the
// queue occupancy counts (visible for debugging), the dyn_bypass flag of
// bypass_unit, and the cfg fields that only the TMU reads.
//
// Departures from the evaluated system: the paper's slices have a 6-entry
// MSHR that merges misses and keeps serving hits under a miss; this slice
// blocks on a miss instead, and its data latency is that of the array,
// not the 25 cycles used in the evaluation.
module llc_slice
  import dco_pkg::*;
#(
  parameter int NSETS  = 128,
  parameter int WAYS   = 8,
  parameter int REQ_Q  = 12,
  parameter int RESP_Q = 64,
  parameter int WINDOW = 256,   // gear_ctrl window (cycles)
  parameter int NC     = NCORE,
  parameter int NSL    = NSLICE,
  localparam int SL_W  = $clog2(NSL),
  localparam int SET_W = $clog2(NSETS),
  localparam int WW    = $clog2(WAYS),
  localparam int TAG_W = LADDR_W - SL_W - SET_W
) (
  input  logic             clk,
  input  logic             rst_n,
  // cores, through the interconnect
  input  logic             req_valid,
  output logic             req_ready,
  input  core_req_t        req,
  output logic             rsp_valid,
  input  logic             rsp_ready,
  output core_rsp_t        rsp,
  // main memory
  output logic             mem_req_valid,
  input  logic             mem_req_ready,
  output mem_req_t         mem_req,
  input  logic             mem_rsp_valid,
  input  line_t            mem_rsp_data,
  // configuration and core speed (gqa_bypass)
  input  tmu_cfg_t         cfg,
  input  logic [NC-1:0]    core_slow,
  // TMU
  output logic             ntf_valid,
  input  logic             ntf_ready,
  output laddr_t           ntf_laddr,
  output logic [TAG_W-1:0] ntf_tag,
  output laddr_t           lk_laddr,
  input  logic             lk_bypass,
  output logic [TAG_W-1:0] q_tag  [WAYS],
  input  logic [WAYS-1:0]  q_dead,
  // statistics: one-cycle event pulses and the current gear
  output slice_ev_t        ev,
  output logic [GEAR_W-1:0] gear
);
  typedef enum logic [3:0] {
    S_INIT, S_IDLE, S_LOOK, S_WB, S_INSTALL, S_FILL_REQ, S_FILL_WAIT,
    S_BYP_REQ, S_BYP_WAIT, S_RESP, S_NTF
  } state_e;

  // ---------------- queues ----------------
  core_req_t q_head;
  logic      reqq_full, reqq_empty, reqq_pop;
  logic      rspq_full, rspq_empty, rspq_push;
  core_rsp_t rspq_din;
  logic [$clog2(REQ_Q+1)-1:0]  reqq_cnt;
  logic [$clog2(RESP_Q+1)-1:0] rspq_cnt;

  sync_fifo #(.T(core_req_t), .DEPTH(REQ_Q)) u_reqq (
    .clk, .rst_n, .push(req_valid && req_ready), .din(req), .pop(reqq_pop),
    .dout(q_head), .full(reqq_full), .empty(reqq_empty), .count(reqq_cnt));
  assign req_ready = !reqq_full;

  sync_fifo #(.T(core_rsp_t), .DEPTH(RESP_Q)) u_rspq (
    .clk, .rst_n, .push(rspq_push), .din(rspq_din), .pop(rsp_ready),
    .dout(rsp), .full(rspq_full), .empty(rspq_empty), .count(rspq_cnt));
  assign rsp_valid = !rspq_empty;

  // ---------------- arrays ----------------
  // Tags and LRU ages are kept one word per set (all ways side by side),
  // so a set is read in one access and written back as a whole; the data
  // array has one line per (set, way). valid and dirty are flops, as they
  // are reset.
  logic [WAYS*TAG_W-1:0] tag_arr  [NSETS];
  logic [WAYS*WW-1:0]    age_arr  [NSETS];
  logic [WAYS-1:0]       valid_arr[NSETS];
  logic [WAYS-1:0]       dirty_arr[NSETS];
  line_t                 data_arr [NSETS*WAYS];

  // ---------------- current request ----------------
  state_e           state;
  core_req_t        r;
  line_t            rd_data, rsp_line;
  logic [WW-1:0]    vway;     // way being filled
  logic             rsp_from_array;

  wire [SET_W-1:0] set = r.laddr[SL_W +: SET_W];
  wire [TAG_W-1:0] tag = r.laddr[LADDR_W-1 -: TAG_W];

  wire [WAYS*TAG_W-1:0] set_tags = tag_arr[set];
  wire [WAYS*WW-1:0]    set_ages = age_arr[set];
  wire [WAYS-1:0]       set_valid = valid_arr[set];
  wire [WAYS-1:0]       set_dirty = dirty_arr[set];

  logic          hit;
  logic [WW-1:0] hit_way;
  always_comb begin
    hit = 1'b0; hit_way = '0;
    for (int w = 0; w < WAYS; w++)
      if (set_valid[w] && set_tags[w*TAG_W +: TAG_W] == tag) begin
        hit = 1'b1; hit_way = WW'(w);
      end
  end

  // ---------------- policy ----------------
  logic [BB_MAX-1:0] tag_lo [WAYS];
  logic [WW-1:0]     age_set[WAYS];
  for (genvar w = 0; w < WAYS; w++) begin : g_way
    assign q_tag[w]   = set_tags[w*TAG_W +: TAG_W];
    assign tag_lo[w]  = set_tags[w*TAG_W +: BB_MAX];
    assign age_set[w] = set_ages[w*WW +: WW];
  end

  logic [WW-1:0] victim;
  logic [1:0]    vreason;
  victim_select #(.WAYS(WAYS)) u_victim (
    .valid(set_valid), .dead(q_dead), .tag_lo(tag_lo), .age(age_set),
    .b_bits(cfg.b_bits), .en_dbp(cfg.en_dbp), .en_at(cfg.en_at),
    .victim(victim), .reason(vreason));

  logic byp, dyn_byp;
  bypass_unit u_bypass (
    .tensor_bypass(lk_bypass), .tag_lo(tag[BB_MAX-1:0]), .b_bits(cfg.b_bits),
    .gear(gear), .en_bypass(cfg.en_bypass), .gqa_mode(cfg.gqa_mode),
    .core_slow(core_slow[r.core]), .bypass(byp), .dyn_bypass(dyn_byp));

  assign lk_laddr = r.laddr;

  wire look     = (state == S_LOOK);
  wire miss     = look && !hit;
  wire allocate = miss && !byp;
  wire vvalid   = set_valid[victim];
  wire evict    = allocate && vvalid;

  gear_ctrl #(.WINDOW(WINDOW)) u_gear (
    .clk, .rst_n, .evict, .bypass_ub(cfg.bypass_ub), .bypass_lb(cfg.bypass_lb),
    .b_bits(cfg.b_bits), .gear, .evict_count(),
    .gear_up(ev.gear_up), .gear_down(ev.gear_down));

  assign ev.hit        = look && hit;
  assign ev.miss       = miss;
  assign ev.bypass     = miss && byp;
  assign ev.evict      = evict;
  assign ev.evict_dead = evict && vreason == 2'd1;
  assign ev.evict_at   = evict && vreason == 2'd2;
  assign ev.writeback  = (state == S_WB) && mem_req_ready;

  // ---------------- TMU notification ----------------
  assign ntf_valid = (state == S_NTF);
  assign ntf_laddr = r.laddr;
  assign ntf_tag   = tag;

  // ---------------- memory requests ----------------
  // victim's line address: tag, set and this slice's number (from r)
  wire laddr_t wb_laddr = {set_tags[vway*TAG_W +: TAG_W], set, r.laddr[SL_W-1:0]};

  always_comb begin
    mem_req_valid = 1'b0;
    mem_req       = '{laddr: r.laddr, we: 1'b0, wdata: r.wdata};
    unique case (state)
      S_WB:       begin mem_req_valid = 1'b1; mem_req = '{laddr: wb_laddr, we: 1'b1, wdata: rd_data}; end
      S_FILL_REQ: begin mem_req_valid = 1'b1; mem_req.we = 1'b0; end
      S_BYP_REQ:  begin mem_req_valid = 1'b1; mem_req.we = r.we; end
      default: ;
    endcase
  end

  // ---------------- control ----------------
  assign reqq_pop  = (state == S_IDLE) && !reqq_empty && !rspq_full;
  assign rspq_push = (state == S_RESP);
  assign rspq_din  = '{rdata: rsp_from_array ? rd_data : rsp_line, we: r.we, core: r.core};

  // true-LRU: the touched way becomes age 0, younger ways age by one
  function automatic logic [WAYS*WW-1:0] touched(input logic [WAYS*WW-1:0] a,
                                                 input logic [WW-1:0] way);
    logic [WAYS*WW-1:0] n;
    n = a;
    for (int v = 0; v < WAYS; v++)
      if (a[v*WW +: WW] < a[way*WW +: WW]) n[v*WW +: WW] = a[v*WW +: WW] + WW'(1);
    n[way*WW +: WW] = '0;
    return n;
  endfunction

  // set-array writes of this cycle: LRU touch on a hit, install on a fill
  wire           hit_upd  = look && hit;
  wire           inst_upd = (state == S_INSTALL) || (state == S_FILL_WAIT && mem_rsp_valid);
  wire [WW-1:0]  upd_way  = hit_upd ? hit_way : vway;
  logic [WAYS*TAG_W-1:0] new_tags;
  always_comb begin
    new_tags = set_tags;
    new_tags[vway*TAG_W +: TAG_W] = tag;
  end

  // after reset, S_INIT walks the sets once and writes each age word
  // with the order way w = age w (requests wait in the queue meanwhile)
  logic [SET_W-1:0] init_set;
  logic [WAYS*WW-1:0] age_init;
  always_comb for (int w = 0; w < WAYS; w++) age_init[w*WW +: WW] = WW'(w);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= S_INIT;
      init_set <= '0;
      for (int s = 0; s < NSETS; s++) begin
        valid_arr[s] <= '0;
        dirty_arr[s] <= '0;
      end
    end else begin
      unique case (state)
        S_INIT: begin
          init_set <= init_set + SET_W'(1);
          if (init_set == SET_W'(NSETS - 1)) state <= S_IDLE;
        end
        S_IDLE: if (reqq_pop) state <= S_LOOK;
        S_LOOK: begin
          if (hit) begin
            if (r.we) dirty_arr[set][hit_way] <= 1'b1;
            state <= S_RESP;
          end else if (byp) begin
            state <= S_BYP_REQ;
          end else begin
            valid_arr[set][victim] <= 1'b0;
            if (vvalid && set_dirty[victim]) state <= S_WB;
            else state <= r.we ? S_INSTALL : S_FILL_REQ;
          end
        end
        S_WB: if (mem_req_ready) state <= r.we ? S_INSTALL : S_FILL_REQ;
        S_INSTALL: begin
          valid_arr[set][vway] <= 1'b1;
          dirty_arr[set][vway] <= 1'b1;
          state <= S_RESP;
        end
        S_FILL_REQ: if (mem_req_ready) state <= S_FILL_WAIT;
        S_FILL_WAIT: if (mem_rsp_valid) begin
          valid_arr[set][vway] <= 1'b1;
          dirty_arr[set][vway] <= 1'b0;
          state <= S_RESP;
        end
        S_BYP_REQ: if (mem_req_ready) state <= r.we ? S_RESP : S_BYP_WAIT;
        S_BYP_WAIT: if (mem_rsp_valid) state <= S_RESP;
        S_RESP: state <= S_NTF;
        S_NTF: if (ntf_ready) state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end

  // tag and age words (memories, not reset; a tag is only used while its
  // valid bit is set)
  always_ff @(posedge clk) begin
    if (inst_upd) tag_arr[set] <= new_tags;
    if (state == S_INIT) age_arr[init_set] <= age_init;
    else if (hit_upd || inst_upd) age_arr[set] <= touched(set_ages, upd_way);
  end

  // datapath registers
  always_ff @(posedge clk) begin
    if (reqq_pop) r <= q_head;
    if (look) begin
      rd_data        <= data_arr[{set, hit ? hit_way : victim}];
      vway           <= victim;
      rsp_from_array <= hit;
    end
    if ((state == S_FILL_WAIT || state == S_BYP_WAIT) && mem_rsp_valid) rsp_line <= mem_rsp_data;
  end

  // data array: one write port (write hit, write install or fill)
  wire        d_we   = (look && hit && r.we) || (state == S_INSTALL) ||
                       (state == S_FILL_WAIT && mem_rsp_valid);
  wire [WW-1:0] d_way = look ? hit_way : vway;
  wire line_t d_wdata = (state == S_FILL_WAIT) ? mem_rsp_data : r.wdata;
  always_ff @(posedge clk)
    if (d_we) data_arr[{set, d_way}] <= d_wdata;

`ifndef SYNTHESIS
  // memory answers only a read this slice is waiting for
  a_mem_rsp: assert property (@(posedge clk) disable iff (!rst_n)
    mem_rsp_valid |-> (state == S_FILL_WAIT || state == S_BYP_WAIT));
`endif
endmodule
