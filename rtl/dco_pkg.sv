// dco_pkg: constants and types shared by the DCO shared-cache subsystem.
//
// The address map follows the main configuration: 48-bit physical
// addresses, 32 LLC slices, 8-way slices. A cache line is 128 bytes (the
// cores' vector length; the line size itself is this design's choice).
// A physical address splits, from the bottom, into
//   [6:0]   byte offset in the line
//   [11:7]  slice number (lines are interleaved over the slices)
//   [..:12] set index inside the slice (width set by the slice's NSETS)
//   the rest is the tag.
// Cores and memory move whole lines; the interfaces therefore carry line
// addresses (the physical address without the offset).
//
// The TMU command encodes the three registration instructions of the
// design (register tensor, clear, set D_LSB/D_MSB/B_BITS) plus a fourth,
// this design's own, that sets the bypass-gear thresholds and the policy
// enables.
package dco_pkg;

  localparam int PA_W       = 48;              // physical address width
  localparam int LINE_BYTES = 128;             // bytes per cache line
  localparam int OFF_W      = $clog2(LINE_BYTES);
  localparam int LINE_W     = LINE_BYTES * 8;  // bits per line
  localparam int LADDR_W    = PA_W - OFF_W;    // line address width
  localparam int NSLICE     = 32;              // LLC slices
  localparam int NCORE      = 16;              // accelerator cores
  localparam int CORE_W     = $clog2(NCORE);
  localparam int NACC_W     = 16;              // nAcc / accCnt width
  localparam int TLEN_W     = 16;              // tile length in lines
  localparam int OPID_W     = 2;               // operand id
  localparam int BPOS_W     = 6;               // D_LSB / D_MSB bit positions
  localparam int BB_MAX     = 4;               // largest B_BITS supported
  localparam int GEAR_W     = $clog2(2**BB_MAX + 1);
  localparam int EVC_W      = 16;              // eviction-count thresholds

  typedef logic [LADDR_W-1:0] laddr_t;
  typedef logic [LINE_W-1:0]  line_t;
  typedef logic [CORE_W-1:0]  core_id_t;

  // Core -> LLC request (one whole line) and LLC -> core response.
  typedef struct packed {
    laddr_t   laddr;
    logic     we;
    line_t    wdata;
    core_id_t core;
  } core_req_t;

  typedef struct packed {
    line_t    rdata;
    logic     we;     // 1: acknowledge of a write
    core_id_t core;
  } core_rsp_t;

  // LLC slice -> main memory request; reads are answered in order.
  typedef struct packed {
    laddr_t laddr;
    logic   we;
    line_t  wdata;
  } mem_req_t;

  typedef enum logic [2:0] {
    TMU_NOP       = 3'd0,
    TMU_REG       = 3'd1,  // register tensor metadata
    TMU_CLEAR     = 3'd2,  // clear the current registration
    TMU_SET       = 3'd3,  // set D_LSB, D_MSB, B_BITS
    TMU_SET_BYP   = 3'd4   // set bypass_ub, bypass_lb and policy enables
  } tmu_op_e;

  // Runtime configuration held by the TMU and broadcast to the slices.
  typedef struct packed {
    logic [BPOS_W-1:0] d_lsb;
    logic [BPOS_W-1:0] d_msb;
    logic [2:0]        b_bits;
    logic [EVC_W-1:0]  bypass_ub;
    logic [EVC_W-1:0]  bypass_lb;
    logic              en_dbp;     // dead block prediction
    logic              en_at;      // anti-thrashing
    logic              en_bypass;  // dynamic bypassing
    logic              gqa_mode;   // gqa_bypass variant
  } tmu_cfg_t;

  typedef struct packed {
    tmu_op_e             op;
    // TMU_REG fields
    logic [NACC_W-1:0]   nacc;
    laddr_t              base;      // tensor base (line address)
    logic                bypass;    // bypass the whole tensor
    logic [TLEN_W-1:0]   tilelen;   // tile size in lines, a power of two
    logic [OPID_W-1:0]   opid;
    // TMU_SET / TMU_SET_BYP fields
    tmu_cfg_t            cfg;
  } tmu_cmd_t;

  // Result of matching an address against the tensor table.
  typedef struct packed {
    logic              hit;
    logic [NACC_W-1:0] nacc;
    logic              bypass;
    logic              tll;   // line is the last line of its tile
  } tensor_match_t;

  // Per-slice event pulses, for statistics and testing.
  typedef struct packed {
    logic hit;         // request hit
    logic miss;        // request missed
    logic bypass;      // miss served without allocation
    logic evict;       // a valid line was evicted
    logic evict_dead;  // ... chosen by dead block prediction
    logic evict_at;    // ... chosen by the anti-thrashing tier
    logic writeback;   // dirty victim written to memory
    logic gear_up;     // B_GEAR raised
    logic gear_down;   // B_GEAR lowered
  } slice_ev_t;

  // Extract tag[msb:lsb] (right-aligned) from a tag.
  function automatic logic [63:0] tag_field(input logic [63:0] tag,
                                            input logic [BPOS_W-1:0] msb,
                                            input logic [BPOS_W-1:0] lsb);
    logic [63:0] mask;
    logic [6:0]  n;
    n    = {1'b0, msb} - {1'b0, lsb} + 7'd1;
    mask = (n >= 7'd64) ? '1 : ((64'd1 << n) - 64'd1);
    return (tag >> lsb) & mask;
  endfunction

endpackage
