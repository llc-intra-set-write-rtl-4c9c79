// srrip_victim: SRRIP replacement that never picks a blocked way.
//
// The paper uses SRRIP in the LLC and requires that its victim is not a blocked way;
// the SRRIP details are the usual ones (not from the paper): each line has an
// RRPV_W-bit re-reference prediction value, a fill inserts at RRPV_MAX-1, a hit sets
// it to 0, and the victim is a way at RRPV_MAX, all ways being aged until one gets
// there. This unit does that search in one step: among the candidate (unblocked)
// ways it takes the first empty one, else the first with the largest RRPV, and
// reports age_by = RRPV_MAX - that RRPV, the amount the caller adds to every valid
// line's RRPV. If every way is blocked, the blocking is ignored for this fill and
// all_blocked is raised (the paper does not say what happens then). Combinational.
module srrip_victim #(
  parameter int unsigned NUM_WAYS = 16,
  parameter int unsigned RRPV_W   = 2,
  localparam int unsigned WAY_W   = $clog2(NUM_WAYS)
) (
  input  logic [NUM_WAYS-1:0]             valid,
  input  logic [NUM_WAYS-1:0][RRPV_W-1:0] rrpv,
  input  logic [NUM_WAYS-1:0]             blocked,
  output logic [WAY_W-1:0]                victim,
  output logic [RRPV_W-1:0]               age_by,
  output logic                            all_blocked
);
  logic [NUM_WAYS-1:0] cand;
  logic                found_empty;
  logic [RRPV_W-1:0]   best;

  always_comb begin
    all_blocked = &blocked;
    cand        = all_blocked ? '1 : ~blocked;
    victim      = '0;
    found_empty = 1'b0;
    for (int w = NUM_WAYS - 1; w >= 0; w--) begin
      if (cand[w] && !valid[w]) begin
        victim      = WAY_W'(w);
        found_empty = 1'b1;
      end
    end
    best = '0;
    for (int w = 0; w < NUM_WAYS; w++)
      if (cand[w] && rrpv[w] > best) best = rrpv[w];
    if (!found_empty) begin
      for (int w = NUM_WAYS - 1; w >= 0; w--)
        if (cand[w] && rrpv[w] == best) victim = WAY_W'(w);
      age_by = '1 - best;
    end else begin
      age_by = '0;
    end
  end
endmodule
