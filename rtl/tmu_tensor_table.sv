// tmu_tensor_table: the TMU's tensor metadata module.
//
// Holds NENT registered tensors. Each entry keeps what the registration
// instruction carries: expected accesses per tile (nAcc), tensor base
// address, whole-tensor bypass flag, tile length and operand id. A TMU_REG
// command fills the lowest free entry (it is dropped, and reg_drop pulses,
// when all entries are taken); TMU_CLEAR invalidates every entry.
//
// NPORT lookup ports match a line address combinationally: the owning
// tensor is the valid entry with the greatest base not above the address
// (tensors are registered by base address only, so each tensor is taken
// to extend up to the next registered base). Tiles are contiguous,
// power-of-two-aligned runs of tilelen lines starting at the base; the
// port reports whether the address is the tile's last line (TLL), which
// is the access the live-tile counters count. The paper gives the fields
// and the TLL rule; the matching rule and the tile layout are this
// design's choices.
module tmu_tensor_table
  import dco_pkg::*;
#(
  parameter int NENT  = 8,
  parameter int NPORT = 2
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  tmu_cmd_t                cmd,
  input  logic                    cmd_valid,
  output logic                    reg_drop,
  input  laddr_t                  lk_addr  [NPORT],
  output tensor_match_t           lk_match [NPORT],
  output logic [NENT-1:0]         ent_valid
);
  typedef struct packed {
    logic [NACC_W-1:0] nacc;
    laddr_t            base;
    logic              bypass;
    logic [TLEN_W-1:0] tilelen;
    logic [OPID_W-1:0] opid;
  } tensor_ent_t;

  tensor_ent_t ent [NENT];
  logic [NENT-1:0] valid;
  assign ent_valid = valid;

  // lowest free entry
  logic                      have_free;
  logic [$clog2(NENT)-1:0]   free_idx;
  always_comb begin
    have_free = 1'b0;
    free_idx  = '0;
    for (int i = NENT - 1; i >= 0; i--)
      if (!valid[i]) begin
        have_free = 1'b1;
        free_idx  = i[$clog2(NENT)-1:0];
      end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      valid    <= '0;
      reg_drop <= 1'b0;
    end else begin
      reg_drop <= 1'b0;
      if (cmd_valid && cmd.op == TMU_CLEAR) valid <= '0;
      else if (cmd_valid && cmd.op == TMU_REG) begin
        if (have_free) valid[free_idx] <= 1'b1;
        else           reg_drop        <= 1'b1;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (cmd_valid && cmd.op == TMU_REG && have_free)
      ent[free_idx] <= '{nacc: cmd.nacc, base: cmd.base, bypass: cmd.bypass,
                         tilelen: cmd.tilelen, opid: cmd.opid};
  end

  for (genvar p = 0; p < NPORT; p++) begin : g_port
    always_comb begin
      logic   found;
      laddr_t best_base, off;
      logic [$clog2(NENT)-1:0] best;
      logic [TLEN_W-1:0] tmask;
      found     = 1'b0;
      best_base = '0;
      best      = '0;
      for (int i = 0; i < NENT; i++) begin
        if (valid[i] && ent[i].base <= lk_addr[p] &&
            (!found || ent[i].base > best_base)) begin
          found     = 1'b1;
          best_base = ent[i].base;
          best      = i[$clog2(NENT)-1:0];
        end
      end
      off   = lk_addr[p] - ent[best].base;
      tmask = ent[best].tilelen - TLEN_W'(1);
      lk_match[p].hit    = found;
      lk_match[p].nacc   = ent[best].nacc;
      lk_match[p].bypass = found && ent[best].bypass;
      lk_match[p].tll    = found &&
          ((off[TLEN_W-1:0] & tmask) == tmask);
    end
  end
endmodule
