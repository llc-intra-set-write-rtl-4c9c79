// interval_timer: divides time into intervals of INTERVAL clock cycles.
//
// The paper measures intervals in processor cycles ("I cycles"); at the end of each
// interval the sampled-set write counters are pushed into the history and cleared,
// and the PC table is trained. The paper does not give I; 100000 cycles is this
// design's default. interval_end is a one-cycle pulse on the last cycle of every
// interval; the first interval starts at the cycle after reset is released.
module interval_timer #(
  parameter int unsigned INTERVAL = 100000,
  localparam int unsigned CW      = (INTERVAL > 1) ? $clog2(INTERVAL) : 1
) (
  input  logic clk,
  input  logic rst_n,
  output logic interval_end
);
  logic [CW-1:0] cnt;

  assign interval_end = (cnt == CW'(INTERVAL - 1));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)            cnt <= '0;
    else if (interval_end) cnt <= '0;
    else                   cnt <= cnt + 1'b1;
  end
endmodule
