// feedback_trainer: variance-based training of the PC table from the sampled sets.
//
// At every interval end (start pulse, given in the same cycle as the history push)
// the trainer walks the sampled sets one after the other. For a set it
//   1. computes V0, the (scaled) variance of the per-way write counts of the interval
//      that just ended: the interval in which the ways over THRESHOLD in the interval
//      before were blocked;
//   2. forms the weighted mean of the variances of the older history entries, the
//      entry of age a weighing HIST_K - a (newer entries weigh more);
//   3. for every way whose count in the age-1 entry exceeded THRESHOLD, i.e. every way
//      that was blocked during the interval just ended, sends an update for the IP
//      recorded with that way: +1 if V0 is below the weighted mean (the blocking
//      evened the writes out), -1 if it is above, none if equal.
// Sampling, the k-entry history, the variance, the recency-weighted mean and the
// +/-1 feedback to the blocking IP follow the paper; the weights HIST_K - a, the
// comparison of V0 against the mean and the one-step-per-cycle schedule are this
// design's choices. The mean is compared without division: V0 * sum(w) against
// sum(w * V). Nothing is trained until the history holds two entries.
//
// Timing: one history read per cycle; 1 + (valid entries - 1) + 1 + NUM_WAYS cycles per
// set, 25 per set and 800 per interval at the default sizes; busy is high meanwhile.
// The interval must be longer than that (checked by the top).
module feedback_trainer #(
  parameter int unsigned NUM_SAMPLED = 32,
  parameter int unsigned NUM_WAYS    = 16,
  parameter int unsigned HIST_K      = 8,
  parameter int unsigned CNT_W       = 16,
  parameter int unsigned IP_W        = 64,
  parameter int unsigned THRESHOLD   = 29,
  localparam int unsigned SIDX_W     = (NUM_SAMPLED > 1) ? $clog2(NUM_SAMPLED) : 1,
  localparam int unsigned AGE_W      = (HIST_K > 1) ? $clog2(HIST_K) : 1,
  localparam int unsigned VC_W       = $clog2(HIST_K + 1),
  localparam int unsigned WAY_W      = $clog2(NUM_WAYS),
  localparam int unsigned REC_W      = CNT_W + IP_W,
  localparam int unsigned VAR_W      = 2 * CNT_W + 2 * WAY_W + 1,
  localparam int unsigned ACC_W      = VAR_W + 2 * AGE_W + 2
) (
  input  logic                           clk,
  input  logic                           rst_n,
  input  logic                           start,
  input  logic [VC_W-1:0]                valid_cnt,
  output logic [SIDX_W-1:0]              rd_sample,
  output logic [AGE_W-1:0]               rd_age,
  input  logic [NUM_WAYS-1:0][REC_W-1:0] rd_row,
  output logic                           upd_valid,
  output logic [IP_W-1:0]                upd_ip,
  output logic                           upd_inc,
  output logic                           busy
);
  typedef struct packed {
    logic [CNT_W-1:0] cnt;
    logic [IP_W-1:0]  ip;
  } rec_t;

  typedef enum logic [2:0] {S_IDLE, S_VNEW, S_MEAN, S_CMP, S_UPD} state_e;

  state_e            state;
  logic [SIDX_W-1:0] sidx;
  logic [AGE_W-1:0]  age;
  logic [WAY_W-1:0]  way;
  logic [VAR_W-1:0]  v0;
  logic [ACC_W-1:0]  acc, wsum;
  logic              dir_inc, dir_any;

  logic [NUM_WAYS-1:0][CNT_W-1:0] row_cnt;
  logic [VAR_W-1:0]               row_var;
  rec_t                           recs [NUM_WAYS];
  rec_t                           cur_rec;

  always_comb begin
    for (int w = 0; w < NUM_WAYS; w++) begin
      recs[w]    = rd_row[w];
      row_cnt[w] = recs[w].cnt;
    end
  end

  way_variance #(.NUM_WAYS(NUM_WAYS), .CNT_W(CNT_W)) u_var (
    .cnt(row_cnt), .var_scaled(row_var)
  );

  assign rd_sample = sidx;
  assign busy      = (state != S_IDLE);
  assign cur_rec   = recs[way];

  always_comb begin
    unique case (state)
      S_MEAN:  rd_age = age;
      S_UPD:   rd_age = AGE_W'(1);
      default: rd_age = '0;
    endcase
    upd_valid = (state == S_UPD) && dir_any && (cur_rec.cnt > CNT_W'(THRESHOLD));
    upd_ip    = cur_rec.ip;
    upd_inc   = dir_inc;
  end

  function automatic logic last_set(input logic [SIDX_W-1:0] s);
    return int'(s) == NUM_SAMPLED - 1;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= S_IDLE;
      sidx    <= '0;
      age     <= '0;
      way     <= '0;
      v0      <= '0;
      acc     <= '0;
      wsum    <= '0;
      dir_inc <= 1'b0;
      dir_any <= 1'b0;
    end else begin
      unique case (state)
        S_IDLE: if (start) begin
          state <= S_VNEW;
          sidx  <= '0;
        end
        S_VNEW: begin
          if (valid_cnt < VC_W'(2)) begin
            state <= S_IDLE;
          end else begin
            v0    <= row_var;
            acc   <= '0;
            wsum  <= '0;
            age   <= AGE_W'(1);
            state <= S_MEAN;
          end
        end
        S_MEAN: begin
          acc  <= acc + ACC_W'(HIST_K - int'(age)) * ACC_W'(row_var);
          wsum <= wsum + ACC_W'(HIST_K - int'(age));
          if (VC_W'(age) == valid_cnt - 1'b1) state <= S_CMP;
          else                                age   <= age + 1'b1;
        end
        S_CMP: begin
          dir_inc <= (ACC_W'(v0) * wsum) < acc;
          dir_any <= (ACC_W'(v0) * wsum) != acc;
          way     <= '0;
          state   <= S_UPD;
        end
        S_UPD: begin
          if (int'(way) == NUM_WAYS - 1) begin
            if (last_set(sidx)) begin
              state <= S_IDLE;
            end else begin
              sidx  <= sidx + 1'b1;
              state <= S_VNEW;
            end
          end else begin
            way <= way + 1'b1;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
