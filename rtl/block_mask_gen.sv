// block_mask_gen: which ways of the accessed set are closed to writes.
//
// Sampled set (paper): a way is blocked when its write count in the previous
// interval, the newest history entry, exceeds THRESHOLD (29). Nothing is blocked
// while the history is still empty.
// Unsampled set (paper): a way is blocked when the PC-table value of the IP that
// brought its line is negative. The paper's text and the caption of its flow figure
// say "< 0"; a label in the same figure would also block at 0; this design follows
// the text. An empty way is never blocked (this design's choice). Combinational.
module block_mask_gen #(
  parameter int unsigned NUM_WAYS  = 16,
  parameter int unsigned CNT_W     = 16,
  parameter int unsigned PCT_VAL_W = 32,
  parameter int unsigned THRESHOLD = 29
) (
  input  logic                          is_sampled,
  input  logic                          hist_valid,
  input  logic [NUM_WAYS-1:0][CNT_W-1:0] prev_cnt,
  input  logic [NUM_WAYS-1:0]           line_valid,
  input  logic signed [PCT_VAL_W-1:0]   pct_val [NUM_WAYS],
  output logic [NUM_WAYS-1:0]           blocked
);
  always_comb begin
    for (int w = 0; w < NUM_WAYS; w++) begin
      if (is_sampled)
        blocked[w] = hist_valid && (prev_cnt[w] > CNT_W'(THRESHOLD));
      else
        blocked[w] = line_valid[w] && (pct_val[w] < 0);
    end
  end
endmodule
