// sample_set_detect: tells whether an LLC set is one of the sampled sets.
//
// Rule (from the paper): the low SAMPLE_BITS bits of the set index are compared with
// the set index shifted right by log2(NUM_SETS) - SAMPLE_BITS, i.e. with its top
// SAMPLE_BITS bits. With 2048 sets and 6 bits this is set[5:0] == set[10:5], which
// holds for exactly 2**(11-6) = 32 sets spread evenly over the cache. Because the
// comparison ties every bit to one of the low log2(NUM_SETS) - SAMPLE_BITS bits,
// those low bits number the sampled sets 0..NUM_SAMPLED-1 (this numbering is this
// design's choice), so sample_idx is simply those wires of set_idx. Purely
// combinational.
module sample_set_detect #(
  parameter int unsigned NUM_SETS    = 2048,
  parameter int unsigned SAMPLE_BITS = 6,
  localparam int unsigned SET_W      = $clog2(NUM_SETS),
  localparam int unsigned SIDX_W     = SET_W - SAMPLE_BITS
) (
  input  logic [SET_W-1:0]  set_idx,
  output logic              is_sampled,
  output logic [SIDX_W-1:0] sample_idx
);
  initial begin
    assert (SAMPLE_BITS < SET_W && 2 * SAMPLE_BITS >= SET_W)
      else $error("sample_set_detect: SAMPLE_BITS must lie in [SET_W/2, SET_W)");
  end

  always_comb begin
    is_sampled = (set_idx[SAMPLE_BITS-1:0] == set_idx[SET_W-1 -: SAMPLE_BITS]);
    sample_idx = set_idx[SIDX_W-1:0];
  end
endmodule
