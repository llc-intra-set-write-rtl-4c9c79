// llc_wb_top: last-level cache controller with intra-set write balancing.
//
// An NVM last-level cache wears out unevenly when a few ways of a set take most of
// the writes. This controller closes such ways to writes for a while and redirects
// the writes to other ways of the set:
//   * Sampled sets (32 of 2048, sample_set_detect) count the writes per way in every
//     interval (write_counters) and keep the last HIST_K intervals (write_history).
//     A way whose count in the previous interval exceeded THRESHOLD is blocked.
//   * At every interval end the feedback_trainer compares the variance of the way
//     counts after blocking with a recency-weighted mean of earlier variances and
//     moves the PC-table value of the IP that caused the blocking up (helped) or
//     down (hurt).
//   * Unsampled sets have no counters: a way is blocked when the PC-table value of
//     the IP that brought its line is negative.
//   * A write that hits a blocked way is treated as a miss: the copy is invalidated
//     and the data is written into the SRRIP victim, which is never a blocked way.
//     Fills after a miss also avoid blocked ways.
// The mechanism follows the paper; the request interface, single-cycle lookup,
// eviction outputs, the handling of reads (never redirected) and of a set whose
// ways are all blocked (blocking ignored) are this design's choices.
//
// Interface: req_valid/req_ready handshake, one request per cycle; req_write = 1 for
// a write into the LLC (writeback from the level above), 0 for a read. The response
// comes in the next cycle (resp_valid) with the set and way used; resp_data_we tells
// the external data array to write that line (fill or write). req_ready is low for
// NUM_SETS cycles after reset while the tag array clears itself. resp_evict_addr is a
// line address, so its low log2(LINE_BYTES) bits are always zero.
module llc_wb_top
  import wb_pkg::*;
#(
  parameter int unsigned NUM_SETS    = 2048,
  parameter int unsigned NUM_WAYS    = 16,
  parameter int unsigned SAMPLE_BITS = 6,
  parameter int unsigned THRESHOLD   = 29,
  parameter int unsigned HIST_K      = 8,
  parameter int unsigned INTERVAL    = 100000,
  parameter int unsigned PCT_ENTRIES = 1024,
  parameter int unsigned CNT_W       = 16,
  parameter int unsigned IP_W        = 64,
  parameter int unsigned PCT_VAL_W   = 32,
  parameter int unsigned ADDR_W      = 64,
  parameter int unsigned LINE_BYTES  = 64,
  parameter int unsigned RRPV_W      = 2,
  localparam int unsigned SET_W      = $clog2(NUM_SETS),
  localparam int unsigned WAY_W      = $clog2(NUM_WAYS),
  localparam int unsigned OFF_W      = $clog2(LINE_BYTES),
  localparam int unsigned TAG_W      = ADDR_W - SET_W - OFF_W,
  localparam int unsigned PIDX_W     = $clog2(PCT_ENTRIES),
  localparam int unsigned SIDX_W     = SET_W - SAMPLE_BITS,
  localparam int unsigned NUM_SAMPLED = 2 ** SIDX_W
) (
  input  logic                clk,
  input  logic                rst_n,
  // request from the level above
  input  logic                req_valid,
  output logic                req_ready,
  input  logic                req_write,
  input  logic [ADDR_W-1:0]   req_addr,
  input  logic [IP_W-1:0]     req_ip,
  // response, one cycle after the request was accepted
  output logic                resp_valid,
  output logic                resp_write,
  output logic                resp_hit,
  output logic                resp_redirect,
  output logic                resp_sampled,
  output logic [SET_W-1:0]    resp_set,
  output logic [WAY_W-1:0]    resp_way,
  output logic                resp_data_we,
  output logic [NUM_WAYS-1:0] resp_blocked,
  output logic                resp_evict_valid,
  output logic                resp_evict_dirty,
  output logic [ADDR_W-1:0]   resp_evict_addr,
  // interval boundary and training activity
  output logic                interval_end,
  output logic                train_busy,
  output logic                pct_upd_valid,
  output logic                pct_upd_inc
);
  localparam int unsigned REC_W = CNT_W + IP_W;
  localparam int unsigned VC_W  = $clog2(HIST_K + 1);
  localparam int unsigned AGE_W = (HIST_K > 1) ? $clog2(HIST_K) : 1;
  localparam logic [RRPV_W-1:0] RRPV_MAX = '1;

  typedef struct packed {
    logic              valid;
    logic              dirty;
    logic [RRPV_W-1:0] rrpv;
    logic [TAG_W-1:0]  tag;
    logic [PIDX_W-1:0] pidx;
  } line_t;

  typedef struct packed {
    logic [CNT_W-1:0] cnt;
    logic [IP_W-1:0]  ip;
  } rec_t;

  localparam int unsigned LINE_W = $bits(line_t);

  initial begin
    assert (INTERVAL > NUM_SAMPLED * (NUM_WAYS + HIST_K + 2) + 2)
      else $error("llc_wb_top: INTERVAL too short for the trainer to finish");
  end

  // ---------------------------------------------------------------- request decode
  logic               accept;
  logic [SET_W-1:0]   set_idx;
  logic [TAG_W-1:0]   tag;
  logic [PIDX_W-1:0]  ip_idx;

  assign accept  = req_valid && req_ready;
  assign set_idx = req_addr[OFF_W +: SET_W];
  assign tag     = req_addr[ADDR_W-1 -: TAG_W];
  assign ip_idx  = PIDX_W'(ip_fold(64'(req_ip), PIDX_W));

  // ---------------------------------------------------------------- tag array
  logic                            tags_ready;
  logic [NUM_WAYS-1:0][LINE_W-1:0] rd_row_raw, wr_row_raw;
  line_t                           row     [NUM_WAYS];
  line_t                           new_row [NUM_WAYS];
  logic                            tag_we;

  llc_tag_array #(.NUM_SETS(NUM_SETS), .NUM_WAYS(NUM_WAYS), .LINE_W(LINE_W)) u_tags (
    .clk, .rst_n, .ready(tags_ready),
    .rd_set(set_idx), .rd_row(rd_row_raw),
    .wr_en(tag_we), .wr_set(set_idx), .wr_row(wr_row_raw)
  );

  assign req_ready = tags_ready;

  always_comb begin
    for (int w = 0; w < NUM_WAYS; w++) begin
      row[w]        = line_t'(rd_row_raw[w]);
      wr_row_raw[w] = new_row[w];
    end
  end

  // ---------------------------------------------------------------- sampled sets
  logic              is_sampled;
  logic [SIDX_W-1:0] sample_idx;

  sample_set_detect #(.NUM_SETS(NUM_SETS), .SAMPLE_BITS(SAMPLE_BITS)) u_samp (
    .set_idx, .is_sampled, .sample_idx
  );

  interval_timer #(.INTERVAL(INTERVAL)) u_timer (.clk, .rst_n, .interval_end);

  logic                                            cnt_wr;
  logic [WAY_W-1:0]                                cnt_way;
  logic [NUM_SAMPLED-1:0][NUM_WAYS-1:0][REC_W-1:0] live;

  write_counters #(.NUM_SAMPLED(NUM_SAMPLED), .NUM_WAYS(NUM_WAYS), .CNT_W(CNT_W),
                   .IP_W(IP_W)) u_cnt (
    .clk, .rst_n, .clear(interval_end),
    .wr_valid(cnt_wr), .wr_sample(sample_idx), .wr_way(cnt_way), .wr_ip(req_ip),
    .live
  );

  logic [NUM_WAYS-1:0][REC_W-1:0] blk_row, tr_row;
  logic [SIDX_W-1:0]              tr_sample;
  logic [AGE_W-1:0]               tr_age;
  logic [VC_W-1:0]                hist_cnt;

  write_history #(.NUM_SAMPLED(NUM_SAMPLED), .NUM_WAYS(NUM_WAYS), .HIST_K(HIST_K),
                  .CNT_W(CNT_W), .IP_W(IP_W)) u_hist (
    .clk, .rst_n, .push(interval_end), .push_data(live),
    .blk_sample(sample_idx), .blk_row,
    .rd_sample(tr_sample), .rd_age(tr_age), .rd_row(tr_row),
    .valid_cnt(hist_cnt)
  );

  // ---------------------------------------------------------------- training
  logic [IP_W-1:0] upd_ip;

  feedback_trainer #(.NUM_SAMPLED(NUM_SAMPLED), .NUM_WAYS(NUM_WAYS), .HIST_K(HIST_K),
                     .CNT_W(CNT_W), .IP_W(IP_W), .THRESHOLD(THRESHOLD)) u_train (
    .clk, .rst_n, .start(interval_end), .valid_cnt(hist_cnt),
    .rd_sample(tr_sample), .rd_age(tr_age), .rd_row(tr_row),
    .upd_valid(pct_upd_valid), .upd_ip, .upd_inc(pct_upd_inc), .busy(train_busy)
  );

  logic [NUM_WAYS-1:0][PIDX_W-1:0] pct_rd_idx;
  logic signed [PCT_VAL_W-1:0]     pct_val [NUM_WAYS];

  pc_table #(.PCT_ENTRIES(PCT_ENTRIES), .PCT_VAL_W(PCT_VAL_W), .NRD(NUM_WAYS)) u_pct (
    .clk, .rst_n, .rd_idx(pct_rd_idx), .rd_val(pct_val),
    .upd_valid(pct_upd_valid), .upd_idx(PIDX_W'(ip_fold(64'(upd_ip), PIDX_W))),
    .upd_inc(pct_upd_inc)
  );

  // ---------------------------------------------------------------- blocking
  logic [NUM_WAYS-1:0]            line_valid;
  logic [NUM_WAYS-1:0][CNT_W-1:0] prev_cnt;
  logic [NUM_WAYS-1:0]            blocked;
  rec_t                           blk_rec [NUM_WAYS];

  always_comb begin
    for (int w = 0; w < NUM_WAYS; w++) begin
      line_valid[w] = row[w].valid;
      pct_rd_idx[w] = row[w].pidx;
      blk_rec[w]    = blk_row[w];
      prev_cnt[w]   = blk_rec[w].cnt;
    end
  end

  block_mask_gen #(.NUM_WAYS(NUM_WAYS), .CNT_W(CNT_W), .PCT_VAL_W(PCT_VAL_W),
                   .THRESHOLD(THRESHOLD)) u_blk (
    .is_sampled, .hist_valid(hist_cnt != '0), .prev_cnt, .line_valid, .pct_val, .blocked
  );

  // ---------------------------------------------------------------- lookup + replacement
  logic [NUM_WAYS-1:0]             hit_vec;
  logic                            hit;
  logic [WAY_W-1:0]                hit_way;
  logic [NUM_WAYS-1:0][RRPV_W-1:0] rrpv_vec;
  logic [WAY_W-1:0]                victim;
  logic [RRPV_W-1:0]               age_by;
  logic                            all_blocked;
  logic [NUM_WAYS-1:0]             vict_valid;

  always_comb begin
    hit_vec = '0;
    hit_way = '0;
    for (int w = 0; w < NUM_WAYS; w++) begin
      hit_vec[w]  = row[w].valid && (row[w].tag == tag);
      rrpv_vec[w] = row[w].rrpv;
    end
    for (int w = NUM_WAYS - 1; w >= 0; w--)
      if (hit_vec[w]) hit_way = WAY_W'(w);
    hit = |hit_vec;
  end

  // On a redirected write the old copy is dropped before the victim is chosen.
  always_comb begin
    vict_valid = line_valid;
    if (hit) vict_valid[hit_way] = 1'b0;
  end

  srrip_victim #(.NUM_WAYS(NUM_WAYS), .RRPV_W(RRPV_W)) u_repl (
    .valid(hit ? vict_valid : line_valid), .rrpv(rrpv_vec), .blocked,
    .victim, .age_by, .all_blocked
  );

  logic              redirect, fill, data_we;
  logic [WAY_W-1:0]  use_way;
  logic              ev_valid, ev_dirty;
  logic [ADDR_W-1:0] ev_addr;

  always_comb begin
    redirect = req_write && hit && blocked[hit_way] && !all_blocked;
    fill     = !hit || redirect;
    use_way  = fill ? victim : hit_way;
    data_we  = req_write || fill;
    ev_valid = fill && row[victim].valid && !(hit && victim == hit_way);
    ev_dirty = row[victim].dirty;
    ev_addr  = {row[victim].tag, SET_W'(set_idx), OFF_W'(0)};

    for (int w = 0; w < NUM_WAYS; w++) new_row[w] = row[w];
    if (!fill) begin
      new_row[hit_way].rrpv = '0;
      if (req_write) new_row[hit_way].dirty = 1'b1;
    end else begin
      if (redirect) new_row[hit_way].valid = 1'b0;
      for (int w = 0; w < NUM_WAYS; w++)
        if (new_row[w].valid) begin
          if (RRPV_W'(RRPV_MAX - new_row[w].rrpv) < age_by) new_row[w].rrpv = RRPV_MAX;
          else new_row[w].rrpv = new_row[w].rrpv + age_by;
        end
      new_row[victim].valid = 1'b1;
      new_row[victim].dirty = req_write;
      new_row[victim].rrpv  = RRPV_MAX - 1'b1;
      new_row[victim].tag   = tag;
      new_row[victim].pidx  = ip_idx;
    end
    tag_we  = accept;
    cnt_wr  = accept && is_sampled && data_we;
    cnt_way = use_way;
  end

  // ---------------------------------------------------------------- response
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      resp_valid       <= 1'b0;
      resp_write       <= 1'b0;
      resp_hit         <= 1'b0;
      resp_redirect    <= 1'b0;
      resp_sampled     <= 1'b0;
      resp_set         <= '0;
      resp_way         <= '0;
      resp_data_we     <= 1'b0;
      resp_blocked     <= '0;
      resp_evict_valid <= 1'b0;
      resp_evict_dirty <= 1'b0;
      resp_evict_addr  <= '0;
    end else begin
      resp_valid <= accept;
      if (accept) begin
        resp_write       <= req_write;
        resp_hit         <= hit && !redirect;
        resp_redirect    <= redirect;
        resp_sampled     <= is_sampled;
        resp_set         <= set_idx;
        resp_way         <= use_way;
        resp_data_we     <= data_we;
        resp_blocked     <= blocked;
        resp_evict_valid <= ev_valid;
        resp_evict_dirty <= ev_dirty;
        resp_evict_addr  <= ev_addr;
      end
    end
  end

  // ---------------------------------------------------------------- rules
  // A tag is present in at most one way of a set.
  a_unique_tag: assert property (@(posedge clk) disable iff (!rst_n)
    accept |-> $onehot0(hit_vec));
  // A fill never lands on a blocked way unless every way is blocked.
  a_no_blocked_fill: assert property (@(posedge clk) disable iff (!rst_n)
    (accept && fill && !all_blocked) |-> !blocked[victim]);
endmodule
