// way_variance: spread of the write counts over the ways of one set.
//
// The paper judges a blocking decision by the variance of the per-way write counts.
// This unit returns N*sum(c^2) - (sum c)^2 for the N = NUM_WAYS counts, which is
// N^2 times the population variance. The scale factor is the same for every set, so
// comparisons and weighted means of these values order exactly like the variances
// themselves, and no divider is needed (a choice of this design). Combinational.
module way_variance #(
  parameter int unsigned NUM_WAYS = 16,
  parameter int unsigned CNT_W    = 16,
  localparam int unsigned WAY_W   = $clog2(NUM_WAYS),
  localparam int unsigned VAR_W   = 2 * CNT_W + 2 * WAY_W + 1
) (
  input  logic [NUM_WAYS-1:0][CNT_W-1:0] cnt,
  output logic [VAR_W-1:0]               var_scaled
);
  logic [VAR_W-1:0] sum, sumsq, nsumsq, sum2;

  always_comb begin
    sum   = '0;
    sumsq = '0;
    for (int w = 0; w < NUM_WAYS; w++) begin
      sum   = sum + VAR_W'(cnt[w]);
      sumsq = sumsq + VAR_W'(cnt[w]) * VAR_W'(cnt[w]);
    end
    nsumsq     = sumsq * VAR_W'(NUM_WAYS);
    sum2       = sum * sum;
    var_scaled = nsumsq - sum2;
  end
endmodule
