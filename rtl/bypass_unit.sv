// bypass_unit: the bypass decision taken on an LLC miss.
//
// A missing line is not allocated in the LLC when
//   - its tensor was registered with the bypass flag (whole-tensor bypass,
//     e.g. the Q and O tensors that stay in the cores' scratchpads), or
//   - dynamic bypassing is on and its priority tag[B_BITS-1:0] is below
//     the slice's current gear B_GEAR, i.e. it belongs to one of the
//     B_GEAR lowest tiers, the same tiers that anti-thrashing evicts
//     first. In gqa_bypass mode this applies only to requests of the
//     slower core of a core pair; the faster core's data is always cached.
// Purely combinational. The rule tag[B_BITS-1:0] < B_GEAR and the
// gqa_bypass restriction are the paper's.
module bypass_unit
  import dco_pkg::*;
(
  input  logic              tensor_bypass,
  input  logic [BB_MAX-1:0] tag_lo,     // tag[BB_MAX-1:0] of the missing line
  input  logic [2:0]        b_bits,
  input  logic [GEAR_W-1:0] gear,
  input  logic              en_bypass,
  input  logic              gqa_mode,
  input  logic              core_slow,  // requester is the slower of its pair
  output logic              bypass,
  output logic              dyn_bypass  // bypassed by the gear rule
);
  logic [BB_MAX-1:0] prio;
  assign prio       = tag_lo & BB_MAX'((5'd1 << b_bits) - 5'd1);
  assign dyn_bypass = en_bypass && (GEAR_W'(prio) < gear) && (!gqa_mode || core_slow);
  assign bypass     = tensor_bypass || dyn_bypass;
endmodule
