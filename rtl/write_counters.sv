// write_counters: write counters of the sampled sets for the current interval.
//
// One cell per sampled set and way holds the number of writes the way received in
// this interval and the instruction pointer of the latest of them (paper, Fig. 1:
// each cell is "count | IP"). A write increments the count (saturating at
// 2**CNT_W-1, a width this design chose) and overwrites the IP. clear, pulsed at the
// interval end, zeroes every cell; a write in the same cycle is the first write of
// the next interval. Only the NUM_SAMPLED sampled sets have counters, as in the paper.
// The whole array is visible on `live` so the history can copy it in one cycle.
module write_counters #(
  parameter int unsigned NUM_SAMPLED = 32,
  parameter int unsigned NUM_WAYS    = 16,
  parameter int unsigned CNT_W       = 16,
  parameter int unsigned IP_W        = 64,
  localparam int unsigned SIDX_W     = (NUM_SAMPLED > 1) ? $clog2(NUM_SAMPLED) : 1,
  localparam int unsigned WAY_W      = $clog2(NUM_WAYS),
  localparam int unsigned REC_W      = CNT_W + IP_W
) (
  input  logic                                           clk,
  input  logic                                           rst_n,
  input  logic                                           clear,
  input  logic                                           wr_valid,
  input  logic [SIDX_W-1:0]                              wr_sample,
  input  logic [WAY_W-1:0]                               wr_way,
  input  logic [IP_W-1:0]                                wr_ip,
  output logic [NUM_SAMPLED-1:0][NUM_WAYS-1:0][REC_W-1:0] live
);
  typedef struct packed {
    logic [CNT_W-1:0] cnt;
    logic [IP_W-1:0]  ip;
  } rec_t;

  // One register per cell, each with its own write match, so that the array maps onto
  // plain enabled flip-flops.
  for (genvar s = 0; s < NUM_SAMPLED; s++) begin : g_set
    for (genvar w = 0; w < NUM_WAYS; w++) begin : g_way
      rec_t cell_q;
      logic hit;
      assign hit = wr_valid && (int'(wr_sample) == s) && (int'(wr_way) == w);

      always_ff @(posedge clk or negedge rst_n) begin
        if (!rst_n) begin
          cell_q <= '0;
        end else if (hit) begin
          if (clear)                  cell_q.cnt <= CNT_W'(1);
          else if (cell_q.cnt != '1)  cell_q.cnt <= cell_q.cnt + 1'b1;
          cell_q.ip <= wr_ip;
        end else if (clear) begin
          cell_q <= '0;
        end
      end
      assign live[s][w] = cell_q;
    end
  end
endmodule
