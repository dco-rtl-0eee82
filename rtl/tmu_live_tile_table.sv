// tmu_live_tile_table: the TMU's live tile info.
//
// NENT entries of {tile identifier, accCnt}. Each cycle at most one
// tile-last-line (TLL) access is presented (upd_valid, tile id, nAcc of
// its tensor). The identifier is looked up associatively:
//   - present: accCnt increments; when it reaches nAcc the entry retires;
//   - absent:  a free entry is taken with accCnt = 1, or the tile retires
//              at once when nAcc is 1.
// A retiring tile's identifier is presented on retire_valid/retire_id in
// the same cycle (combinational), for the dead tile FIFO. When no entry is
// free the access is not tracked and track_drop is high. clear invalidates
// every entry. Counting and retirement at accCnt == nAcc follow the paper;
// the drop-when-full rule is this design's choice.
module tmu_live_tile_table
  import dco_pkg::*;
#(
  parameter int NENT = 256,
  parameter int ID_W = 29
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              clear,
  input  logic              upd_valid,
  input  logic [ID_W-1:0]   upd_id,
  input  logic [NACC_W-1:0] upd_nacc,
  output logic              retire_valid,
  output logic [ID_W-1:0]   retire_id,
  output logic              track_drop,
  output logic [$clog2(NENT+1)-1:0] live_count
);
  localparam int IW = $clog2(NENT);

  logic [NENT-1:0]   valid;
  logic [ID_W-1:0]   tid    [NENT];
  logic [NACC_W-1:0] acc_cnt[NENT];

  logic          hit, have_free;
  logic [IW-1:0] hit_idx, free_idx;

  always_comb begin
    hit = 1'b0; hit_idx = '0;
    have_free = 1'b0; free_idx = '0;
    for (int i = NENT - 1; i >= 0; i--) begin
      if (valid[i] && tid[i] == upd_id) begin
        hit = 1'b1; hit_idx = i[IW-1:0];
      end
      if (!valid[i]) begin
        have_free = 1'b1; free_idx = i[IW-1:0];
      end
    end
  end

  wire [NACC_W-1:0] next_cnt = hit ? acc_cnt[hit_idx] + NACC_W'(1) : NACC_W'(1);
  wire              reaches  = (next_cnt >= upd_nacc);

  assign retire_valid = upd_valid && !clear && (hit || have_free) && reaches;
  assign retire_id    = upd_id;
  assign track_drop   = upd_valid && !clear && !hit && !have_free;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) valid <= '0;
    else if (clear) valid <= '0;
    else if (upd_valid) begin
      if (hit && reaches)                valid[hit_idx]  <= 1'b0;
      else if (!hit && have_free && !reaches) valid[free_idx] <= 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    if (upd_valid && !clear) begin
      if (hit) acc_cnt[hit_idx] <= next_cnt;
      else if (have_free) begin
        acc_cnt[free_idx] <= next_cnt;
        tid[free_idx]     <= upd_id;
      end
    end
  end

  always_comb begin
    live_count = '0;
    for (int i = 0; i < NENT; i++) live_count += valid[i];
  end
endmodule
