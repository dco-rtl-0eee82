// dco_top: the accelerators' shared last-level cache with its Tensor
// Management Unit (TMU), i.e. the "shared cache + TMU" block between the
// accelerator cores and system main memory.
//
// Contents: NSL LLC slices (llc_slice), one TMU shared by all slices, a
// crossbar from the NC cores to the slices (llc_xbar) and the core-pair
// monitor that feeds the gqa_bypass variant. The host CPU, the accelerator cores
// and main memory are outside; their connections are ports:
//   - cmd/cmd_valid: TMU registration instructions from the CPU;
//   - core_req*/core_rsp*: one whole-line request/response port per core,
//     core_commit: one pulse per instruction a core commits;
//   - mem_*: one memory port per slice (reads answered in order).
// Statistics leave as per-slice event pulses (slice_ev), the slices'
// gears and the TMU's events and occupancy.
//
// Defaults are the main configuration: 32 slices, 16 cores, 8-way slices,
// a 4 MiB LLC (128 sets x 8 ways x 128-byte lines per slice), 8 tensor
// entries, 256 tile entries, a 16-deep dead FIFO. CLEAR also clears the
// core-pair monitor's counters.
module dco_top
  import dco_pkg::*;
#(
  parameter int NSL        = NSLICE,
  parameter int NC         = NCORE,
  parameter int NSETS      = 128,
  parameter int WAYS       = 8,
  parameter int NTENSOR    = 8,
  parameter int NTILE      = 256,
  parameter int DEAD_DEPTH = 16,
  parameter int REQ_Q      = 12,
  parameter int RESP_Q     = 64,
  parameter int WINDOW     = 256,
  localparam int TAG_W     = LADDR_W - $clog2(NSL) - $clog2(NSETS)
) (
  input  logic             clk,
  input  logic             rst_n,
  // host CPU
  input  tmu_cmd_t         cmd,
  input  logic             cmd_valid,
  output tmu_cfg_t         cfg,
  // accelerator cores
  input  logic [NC-1:0]    core_req_valid,
  output logic [NC-1:0]    core_req_ready,
  input  core_req_t        core_req [NC],
  output logic [NC-1:0]    core_rsp_valid,
  input  logic [NC-1:0]    core_rsp_ready,
  output core_rsp_t        core_rsp [NC],
  input  logic [NC-1:0]    core_commit,
  // main memory, one port per slice
  output logic [NSL-1:0]   mem_req_valid,
  input  logic [NSL-1:0]   mem_req_ready,
  output mem_req_t         mem_req [NSL],
  input  logic [NSL-1:0]   mem_rsp_valid,
  input  line_t            mem_rsp_data [NSL],
  // statistics
  output slice_ev_t        slice_ev [NSL],
  output logic [GEAR_W-1:0] slice_gear [NSL],
  output logic             tmu_ev_tll,
  output logic             tmu_ev_retire,
  output logic             tmu_ev_drop,
  output logic             tmu_ev_overwrite,
  output logic             tmu_ev_reg_drop,
  output logic [NTENSOR-1:0] tmu_tensor_valid,
  output logic [$clog2(NTILE+1)-1:0]      tmu_live_count,
  output logic [$clog2(DEAD_DEPTH+1)-1:0] tmu_dead_count
);
  // ---------------- interconnect ----------------
  logic [NSL-1:0] s_req_valid, s_req_ready, s_rsp_valid, s_rsp_ready;
  core_req_t      s_req [NSL];
  core_rsp_t      s_rsp [NSL];

  llc_xbar #(.NC(NC), .NS(NSL)) u_xbar (
    .clk, .rst_n,
    .c_req_valid(core_req_valid), .c_req_ready(core_req_ready), .c_req(core_req),
    .c_rsp_valid(core_rsp_valid), .c_rsp_ready(core_rsp_ready), .c_rsp(core_rsp),
    .s_req_valid, .s_req_ready, .s_req, .s_rsp_valid, .s_rsp_ready, .s_rsp);

  // ---------------- core pairs (gqa_bypass) ----------------
  logic [NC-1:0] core_slow;
  core_pair_monitor #(.NC(NC)) u_pairs (
    .clk, .rst_n, .clear(cmd_valid && cmd.op == TMU_CLEAR),
    .commit(core_commit), .slow(core_slow));

  // ---------------- TMU ----------------
  logic [NSL-1:0]   ntf_valid, ntf_ready, lk_bypass;
  laddr_t           ntf_laddr [NSL];
  logic [TAG_W-1:0] ntf_tag   [NSL];
  laddr_t           lk_laddr  [NSL];
  logic [TAG_W-1:0] q_tag     [NSL][WAYS];
  logic [WAYS-1:0]  q_dead    [NSL];

  tmu #(.NSL(NSL), .NTENSOR(NTENSOR), .NTILE(NTILE), .DEAD_DEPTH(DEAD_DEPTH),
        .WAYS(WAYS), .TAG_W(TAG_W)) u_tmu (
    .clk, .rst_n, .cmd, .cmd_valid, .cfg,
    .ntf_valid, .ntf_ready, .ntf_laddr, .ntf_tag,
    .lk_laddr, .lk_bypass, .q_tag, .q_dead,
    .ev_tll(tmu_ev_tll), .ev_retire(tmu_ev_retire), .ev_drop(tmu_ev_drop),
    .ev_overwrite(tmu_ev_overwrite), .ev_reg_drop(tmu_ev_reg_drop),
    .live_count(tmu_live_count), .dead_count(tmu_dead_count),
    .tensor_valid(tmu_tensor_valid));

  // ---------------- LLC slices ----------------
  for (genvar s = 0; s < NSL; s++) begin : g_slice
    llc_slice #(.NSETS(NSETS), .WAYS(WAYS), .REQ_Q(REQ_Q), .RESP_Q(RESP_Q),
                .WINDOW(WINDOW), .NC(NC), .NSL(NSL)) u_slice (
      .clk, .rst_n,
      .req_valid(s_req_valid[s]), .req_ready(s_req_ready[s]), .req(s_req[s]),
      .rsp_valid(s_rsp_valid[s]), .rsp_ready(s_rsp_ready[s]), .rsp(s_rsp[s]),
      .mem_req_valid(mem_req_valid[s]), .mem_req_ready(mem_req_ready[s]),
      .mem_req(mem_req[s]), .mem_rsp_valid(mem_rsp_valid[s]),
      .mem_rsp_data(mem_rsp_data[s]),
      .cfg, .core_slow,
      .ntf_valid(ntf_valid[s]), .ntf_ready(ntf_ready[s]),
      .ntf_laddr(ntf_laddr[s]), .ntf_tag(ntf_tag[s]),
      .lk_laddr(lk_laddr[s]), .lk_bypass(lk_bypass[s]),
      .q_tag(q_tag[s]), .q_dead(q_dead[s]),
      .ev(slice_ev[s]), .gear(slice_gear[s]));
  end
endmodule
