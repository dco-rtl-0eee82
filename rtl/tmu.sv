// tmu: Tensor Management Unit.
//
// The TMU sits beside the shared LLC and holds what software knows about
// the running operator. The host CPU writes it with three instructions
// (cmd/cmd_valid): register a tensor (nAcc, base, bypass flag, tile
// length, operand id), clear the registration, and set D_LSB, D_MSB and
// B_BITS. A fourth command, this design's own, sets the bypass-gear
// thresholds bypass_ub/bypass_lb and the policy enables. The resulting
// configuration is broadcast on cfg.
//
// Runtime, per LLC slice s:
//   - notify: the slice reports every core access (line address and tag)
//     with a valid/ready handshake. A round-robin arbiter accepts one
//     notification per cycle (ready is the grant). In the next cycle the
//     address is matched to its tensor; if it is the last line of a tile,
//     the tile identifier tag[D_MSB:D_LSB] is counted in the live tile
//     table and, when its count reaches nAcc, moved into the dead FIFO.
//   - lk_addr -> lk_bypass: combinational whole-tensor bypass flag.
//   - q_tag  -> q_dead: combinational; which ways of a set hold a tile
//     whose identifier is in the dead FIFO.
// Table sizes default to the synthesised configuration (8 tensor entries,
// 256 tile entries, 16-deep dead FIFO, 32 slices). Arbitrating the 32
// notification ports onto one table update per cycle is this design's
// choice; the paper does not say how the slices share the TMU.
module tmu
  import dco_pkg::*;
#(
  parameter int NSL        = 32,
  parameter int NTENSOR    = 8,
  parameter int NTILE      = 256,
  parameter int DEAD_DEPTH = 16,
  parameter int WAYS       = 8,
  parameter int TAG_W      = 29
) (
  input  logic             clk,
  input  logic             rst_n,
  // host CPU
  input  tmu_cmd_t         cmd,
  input  logic             cmd_valid,
  output tmu_cfg_t         cfg,
  // access notifications from the slices
  input  logic [NSL-1:0]   ntf_valid,
  output logic [NSL-1:0]   ntf_ready,
  input  laddr_t           ntf_laddr [NSL],
  input  logic [TAG_W-1:0] ntf_tag   [NSL],
  // whole-tensor bypass lookup
  input  laddr_t           lk_laddr  [NSL],
  output logic [NSL-1:0]   lk_bypass,
  // dead block query
  input  logic [TAG_W-1:0] q_tag     [NSL][WAYS],
  output logic [WAYS-1:0]  q_dead    [NSL],
  // events, for statistics
  output logic             ev_tll,      // a tile-last-line access counted
  output logic             ev_retire,   // a tile moved to the dead FIFO
  output logic             ev_drop,     // a tile could not be tracked
  output logic             ev_overwrite,// dead FIFO full, oldest id lost
  output logic             ev_reg_drop, // tensor table full, REG dropped
  output logic [$clog2(NTILE+1)-1:0]      live_count,
  output logic [$clog2(DEAD_DEPTH+1)-1:0] dead_count,
  output logic [NTENSOR-1:0] tensor_valid
);
  localparam int SW = $clog2(NSL > 1 ? NSL : 2);

  // ---------------- configuration registers ----------------
  localparam tmu_cfg_t CFG_RESET = '{
    d_lsb: '0, d_msb: BPOS_W'(TAG_W - 1), b_bits: 3'd3,
    bypass_ub: EVC_W'(64), bypass_lb: EVC_W'(16),
    en_dbp: 1'b1, en_at: 1'b1, en_bypass: 1'b1, gqa_mode: 1'b0};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) cfg <= CFG_RESET;
    else if (cmd_valid) begin
      if (cmd.op == TMU_SET) begin
        cfg.d_lsb  <= cmd.cfg.d_lsb;
        cfg.d_msb  <= cmd.cfg.d_msb;
        cfg.b_bits <= (cmd.cfg.b_bits > 3'(BB_MAX)) ? 3'(BB_MAX) : cmd.cfg.b_bits;
      end else if (cmd.op == TMU_SET_BYP) begin
        cfg.bypass_ub <= cmd.cfg.bypass_ub;
        cfg.bypass_lb <= cmd.cfg.bypass_lb;
        cfg.en_dbp    <= cmd.cfg.en_dbp;
        cfg.en_at     <= cmd.cfg.en_at;
        cfg.en_bypass <= cmd.cfg.en_bypass;
        cfg.gqa_mode  <= cmd.cfg.gqa_mode;
      end
    end
  end

  wire clear = cmd_valid && cmd.op == TMU_CLEAR;

  // ---------------- tensor metadata ----------------
  laddr_t        tt_addr  [NSL+1];
  tensor_match_t tt_match [NSL+1];

  tmu_tensor_table #(.NENT(NTENSOR), .NPORT(NSL + 1)) u_tensor (
    .clk, .rst_n, .cmd, .cmd_valid, .reg_drop(ev_reg_drop),
    .lk_addr(tt_addr), .lk_match(tt_match), .ent_valid(tensor_valid));

  for (genvar s = 0; s < NSL; s++) begin : g_lk
    assign tt_addr[s]   = lk_laddr[s];
    assign lk_bypass[s] = tt_match[s].bypass;
  end

  // ---------------- notification arbitration ----------------
  logic [SW-1:0] gidx;
  rr_arbiter #(.N(NSL)) u_arb (
    .clk, .rst_n, .req(ntf_valid), .advance(1'b1),
    .grant(ntf_ready), .grant_idx(gidx));

  logic             n_v;
  laddr_t           n_laddr;
  logic [TAG_W-1:0] n_tag;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) n_v <= 1'b0;
    else        n_v <= |ntf_valid;
  end
  always_ff @(posedge clk) begin
    n_laddr <= ntf_laddr[gidx];
    n_tag   <= ntf_tag[gidx];
  end

  assign tt_addr[NSL] = n_laddr;
  wire tensor_match_t nm = tt_match[NSL];

  // ---------------- live tile info and dead FIFO ----------------
  wire [TAG_W-1:0] n_tid = TAG_W'(tag_field(64'(n_tag), cfg.d_msb, cfg.d_lsb));
  wire             upd   = n_v && nm.hit && nm.tll;

  logic             retire_v;
  logic [TAG_W-1:0] retire_id;

  tmu_live_tile_table #(.NENT(NTILE), .ID_W(TAG_W)) u_live (
    .clk, .rst_n, .clear,
    .upd_valid(upd), .upd_id(n_tid), .upd_nacc(nm.nacc),
    .retire_valid(retire_v), .retire_id(retire_id),
    .track_drop(ev_drop), .live_count(live_count));

  logic [TAG_W-1:0] q_id [NSL][WAYS];
  for (genvar s = 0; s < NSL; s++) begin : g_q
    for (genvar w = 0; w < WAYS; w++) begin : g_w
      assign q_id[s][w] = TAG_W'(tag_field(64'(q_tag[s][w]), cfg.d_msb, cfg.d_lsb));
    end
  end

  tmu_dead_fifo #(.DEPTH(DEAD_DEPTH), .ID_W(TAG_W), .NQ(NSL), .WAYS(WAYS)) u_dead (
    .clk, .rst_n, .push(retire_v), .push_id(retire_id),
    .q_id(q_id), .q_dead(q_dead), .count(dead_count), .overwrite(ev_overwrite));

  assign ev_tll    = upd;
  assign ev_retire = retire_v;
endmodule
