// tmu_dead_fifo: the TMU's dead tile identifier FIFO.
//
// DEPTH identifiers of tiles whose expected accesses are all done. push
// writes an identifier at the tail; when the FIFO is full the oldest
// identifier is overwritten, as the paper prescribes. An identifier that
// is already held is not written twice (this design's choice, so that a
// repeated retirement does not push out other tiles). Only reset empties
// the FIFO.
//
// NQ query ports each present WAYS identifiers (tag[D_MSB:D_LSB] of every
// way of a set) and get back, in the same cycle, which of them are in the
// FIFO. The FIFO is kept small so that this all-against-all comparison
// fits in the cycle in which the replacement decision is made.
module tmu_dead_fifo #(
  parameter int DEPTH = 16,
  parameter int ID_W  = 29,
  parameter int NQ    = 1,
  parameter int WAYS  = 8
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              push,
  input  logic [ID_W-1:0]   push_id,
  input  logic [ID_W-1:0]   q_id   [NQ][WAYS],
  output logic [WAYS-1:0]   q_dead [NQ],
  output logic [$clog2(DEPTH+1)-1:0] count,
  output logic              overwrite   // a push displaced the oldest id
);
  localparam int AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  logic [ID_W-1:0]  ids [DEPTH];
  logic [DEPTH-1:0] valid;
  logic [AW-1:0]    tail;   // next slot to write; the oldest when full

  logic present;
  always_comb begin
    present = 1'b0;
    for (int i = 0; i < DEPTH; i++)
      if (valid[i] && ids[i] == push_id) present = 1'b1;
  end

  wire do_push = push && !present;
  assign overwrite = do_push && valid[tail];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      valid <= '0;
      tail  <= '0;
    end else if (do_push) begin
      valid[tail] <= 1'b1;
      tail <= (tail == AW'(DEPTH - 1)) ? '0 : tail + AW'(1);
    end
  end

  always_ff @(posedge clk) begin
    if (do_push) ids[tail] <= push_id;
  end

  always_comb begin
    count = '0;
    for (int i = 0; i < DEPTH; i++) count += valid[i];
  end

  for (genvar q = 0; q < NQ; q++) begin : g_q
    for (genvar w = 0; w < WAYS; w++) begin : g_w
      always_comb begin
        q_dead[q][w] = 1'b0;
        for (int i = 0; i < DEPTH; i++)
          if (valid[i] && ids[i] == q_id[q][w]) q_dead[q][w] = 1'b1;
      end
    end
  end
endmodule
