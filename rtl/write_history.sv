// write_history: the last HIST_K intervals of write counters of every sampled set.
//
// The paper keeps, for each sampled set, the counter values and IPs of the previous
// k = 8 intervals and drops the oldest once k are held (Fig. 2). Because all sampled
// sets close an interval together, this design stores the history as a circular
// buffer of HIST_K slots, each slot a snapshot of the whole counter array; push
// writes the snapshot into the slot after the newest one and so drops the oldest.
// valid_cnt tells how many slots hold data (0..HIST_K); slots are not reset.
//
// Two asynchronous read ports return one set's row (NUM_WAYS cells of count|IP):
//   blk_*  : the newest entry (age 0), used to block ways in sampled sets,
//   rd_*   : the entry of age rd_age (0 = newest), used by the feedback trainer.
// A push becomes visible on the read ports in the cycle after it.
module write_history #(
  parameter int unsigned NUM_SAMPLED = 32,
  parameter int unsigned NUM_WAYS    = 16,
  parameter int unsigned HIST_K      = 8,
  parameter int unsigned CNT_W       = 16,
  parameter int unsigned IP_W        = 64,
  localparam int unsigned SIDX_W     = (NUM_SAMPLED > 1) ? $clog2(NUM_SAMPLED) : 1,
  localparam int unsigned AGE_W      = (HIST_K > 1) ? $clog2(HIST_K) : 1,
  localparam int unsigned VC_W       = $clog2(HIST_K + 1),
  localparam int unsigned REC_W      = CNT_W + IP_W
) (
  input  logic                                           clk,
  input  logic                                           rst_n,
  input  logic                                           push,
  input  logic [NUM_SAMPLED-1:0][NUM_WAYS-1:0][REC_W-1:0] push_data,
  input  logic [SIDX_W-1:0]                              blk_sample,
  output logic [NUM_WAYS-1:0][REC_W-1:0]                 blk_row,
  input  logic [SIDX_W-1:0]                              rd_sample,
  input  logic [AGE_W-1:0]                               rd_age,
  output logic [NUM_WAYS-1:0][REC_W-1:0]                 rd_row,
  output logic [VC_W-1:0]                                valid_cnt
);
  typedef logic [NUM_SAMPLED-1:0][NUM_WAYS-1:0][REC_W-1:0] snap_t;

  snap_t             mem [HIST_K];
  logic [AGE_W-1:0]  newest;     // slot of the age-0 entry

  function automatic logic [AGE_W-1:0] slot_of(input logic [AGE_W-1:0] nw,
                                                input logic [AGE_W-1:0] age);
    return AGE_W'((int'(nw) + HIST_K - int'(age)) % HIST_K);
  endfunction

  function automatic logic [AGE_W-1:0] next_slot(input logic [AGE_W-1:0] nw);
    return (int'(nw) == HIST_K - 1) ? '0 : nw + 1'b1;
  endfunction

  always_ff @(posedge clk) begin
    if (push) mem[next_slot(newest)] <= push_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      newest    <= AGE_W'(HIST_K - 1);
      valid_cnt <= '0;
    end else if (push) begin
      newest <= next_slot(newest);
      if (valid_cnt != VC_W'(HIST_K)) valid_cnt <= valid_cnt + 1'b1;
    end
  end

  always_comb begin
    blk_row = mem[newest][blk_sample];
    rd_row  = mem[slot_of(newest, rd_age)][rd_sample];
  end
endmodule
