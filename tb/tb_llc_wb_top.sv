// tb_llc_wb_top: end-to-end test of the write-balancing LLC at reduced size
// (64 sets, 4 sampled, 4 ways, threshold 3, 4-entry history, 300-cycle intervals).
//
// A reference model written here from the rules of the design (tag lookup, SRRIP
// with a step-by-step ageing search, blocking of sampled and unsampled sets, counters,
// history, variance feedback and a saturating PC table) predicts every response;
// after each training phase the whole PC table is compared. Traffic is random over
// two sampled and three unsampled sets, with six tags per set and six instruction
// pointers, and its intensity changes from interval to interval so that sets see
// both light and heavy write phases. Requests pause during interval ends and
// training so that the model can apply a training phase at once. Every mechanism
// (sampled and unsampled blocking, redirected write hits, fills steered around
// blocked ways, the all-blocked fallback, evictions, PC-table increments and
// decrements, interval ends) is counted and must occur.
module tb_llc_wb_top;
  localparam int NSETS = 64, NW = 4, TH = 3, K = 4, INTERVAL = 300, NPCT = 64;
  localparam int CW = 8, VW = 8, RMAX = 3, NSAMP = 4;
  localparam int NINTERVALS = 60;

  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic req_valid = 0, req_ready, req_write = 0;
  logic [63:0] req_addr = '0, req_ip = '0;
  logic resp_valid, resp_write, resp_hit, resp_redirect, resp_sampled, resp_data_we;
  logic [5:0] resp_set;
  logic [1:0] resp_way;
  logic [NW-1:0] resp_blocked;
  logic resp_evict_valid, resp_evict_dirty;
  logic [63:0] resp_evict_addr;
  logic interval_end, train_busy, pct_upd_valid, pct_upd_inc;

  llc_wb_top #(.NUM_SETS(NSETS), .NUM_WAYS(NW), .SAMPLE_BITS(4), .THRESHOLD(TH), .HIST_K(K),
               .INTERVAL(INTERVAL), .PCT_ENTRIES(NPCT), .CNT_W(CW), .IP_W(64),
               .PCT_VAL_W(VW), .ADDR_W(64), .LINE_BYTES(64), .RRPV_W(2)) dut (.*);

  always #5 clk = ~clk;

  // ---------------------------------------------------------------- reference model
  bit  mv [NSETS][NW], md [NSETS][NW];
  int  mr [NSETS][NW], mp [NSETS][NW];
  longint mt [NSETS][NW];
  int  cnt [NSAMP][NW], hc [K][NSAMP][NW], vc;
  longint cip [NSAMP][NW], hip [K][NSAMP][NW];
  int  pct [NPCT];
  longint ips [6];

  // expected response of the request in flight
  bit  e_pending, e_hit, e_redir, e_samp, e_we, e_ev, e_evd;
  int  e_set, e_way;
  bit [NW-1:0] e_blk;
  longint e_evaddr;

  // mechanism counters
  int n_blk_s, n_blk_u, n_redir, n_steer, n_allb, n_ev, n_evd, n_int, n_inc, n_dec, n_hit, n_miss;

  function automatic int samp_slot(int s);
    case (s)
      0: return 0;
      21: return 1;
      42: return 2;
      63: return 3;
      default: return -1;
    endcase
  endfunction

  function automatic int fold(longint ip);
    longint a;
    a = 0;
    for (int i = 0; i < 64; i += 6) a ^= (ip >> i) & 63;
    return int'(a & 63);
  endfunction

  function automatic longint pvar(int a, int s);
    longint v;
    v = 0;
    for (int i = 0; i < NW; i++)
      for (int j = i + 1; j < NW; j++)
        v += longint'(hc[a][s][i] - hc[a][s][j]) * longint'(hc[a][s][i] - hc[a][s][j]);
    return v;
  endfunction

  task automatic model_interval();
    for (int a = K - 1; a > 0; a--)
      for (int s = 0; s < NSAMP; s++)
        for (int w = 0; w < NW; w++) begin
          hc[a][s][w] = hc[a-1][s][w]; hip[a][s][w] = hip[a-1][s][w];
        end
    for (int s = 0; s < NSAMP; s++)
      for (int w = 0; w < NW; w++) begin
        hc[0][s][w] = cnt[s][w]; hip[0][s][w] = cip[s][w];
        cnt[s][w] = 0; cip[s][w] = 0;
      end
    if (vc < K) vc++;
    if (vc >= 2)
      for (int s = 0; s < NSAMP; s++) begin
        longint acc, wsum, v0;
        acc = 0; wsum = 0;
        v0 = pvar(0, s);
        for (int a = 1; a < vc; a++) begin
          acc  += longint'(K - a) * pvar(a, s);
          wsum += K - a;
        end
        if (v0 * wsum != acc)
          for (int w = 0; w < NW; w++)
            if (hc[1][s][w] > TH) begin
              int i;
              i = fold(hip[1][s][w]);
              if (v0 * wsum < acc) begin if (pct[i] < 127) pct[i]++; end
              else                 begin if (pct[i] > -128) pct[i]--; end
            end
      end
  endtask

  task automatic model_access(bit wr, int set, longint tag, longint ip);
    int slot, hitw, vict, steps;
    bit hit, allb, fill;
    bit blk [NW];
    bit vv [NW];
    int r [NW];
    slot = samp_slot(set);
    hit = 0; hitw = 0;
    for (int w = NW - 1; w >= 0; w--)
      if (mv[set][w] && mt[set][w] == tag) begin hit = 1; hitw = w; end
    allb = 1;
    for (int w = 0; w < NW; w++) begin
      if (slot >= 0) blk[w] = (vc > 0) && (hc[0][slot][w] > TH);
      else           blk[w] = mv[set][w] && (pct[mp[set][w]] < 0);
      e_blk[w] = blk[w];
      if (!blk[w]) allb = 0;
      vv[w] = mv[set][w];
      r[w]  = mr[set][w];
    end
    if (hit) vv[hitw] = 0;
    // SRRIP: first empty candidate, else age step by step until a candidate is at max
    vict = -1; steps = 0;
    for (int w = 0; w < NW && vict < 0; w++)
      if ((allb || !blk[w]) && !vv[w]) vict = w;
    while (vict < 0) begin
      for (int w = 0; w < NW && vict < 0; w++)
        if ((allb || !blk[w]) && r[w] == RMAX) vict = w;
      if (vict < 0) begin
        for (int w = 0; w < NW; w++) r[w]++;
        steps++;
      end
    end
    e_redir = wr && hit && blk[hitw] && !allb;
    fill    = !hit || e_redir;
    e_hit   = hit && !e_redir;
    e_way   = fill ? vict : hitw;
    e_we    = wr || fill;
    e_ev    = fill && mv[set][vict] && !(hit && vict == hitw);
    e_evd   = md[set][vict];
    e_evaddr = (mt[set][vict] << 12) | longint'(set << 6);
    e_samp  = slot >= 0;
    e_set   = set;
    // statistics
    if (e_blk != 0 && slot >= 0) n_blk_s++;
    if (e_blk != 0 && slot < 0) n_blk_u++;
    if (e_redir) n_redir++;
    if (fill && !allb && e_blk != 0) n_steer++;
    if (allb && fill) n_allb++;
    if (e_ev) n_ev++;
    if (e_ev && e_evd) n_evd++;
    if (e_hit) n_hit++; else n_miss++;
    // state update
    if (!fill) begin
      mr[set][hitw] = 0;
      if (wr) md[set][hitw] = 1;
    end else begin
      if (e_redir) mv[set][hitw] = 0;
      for (int w = 0; w < NW; w++)
        if (mv[set][w]) mr[set][w] = (mr[set][w] + steps > RMAX) ? RMAX : mr[set][w] + steps;
      mv[set][vict] = 1; md[set][vict] = wr; mr[set][vict] = RMAX - 1;
      mt[set][vict] = tag; mp[set][vict] = fold(ip);
    end
    if (slot >= 0 && e_we) begin
      if (cnt[slot][e_way] < 255) cnt[slot][e_way]++;
      cip[slot][e_way] = ip;
    end
  endtask

  task automatic check_resp();
    checks++;
    if (!resp_valid || resp_hit != e_hit || resp_redirect != e_redir || resp_sampled != e_samp ||
        int'(resp_set) != e_set || int'(resp_way) != e_way || resp_data_we != e_we ||
        resp_blocked != e_blk || resp_evict_valid != e_ev ||
        (e_ev && (resp_evict_dirty != e_evd || resp_evict_addr != 64'(e_evaddr)))) begin
      failures++;
      if (failures < 20)
        $display("FAIL @%0t set %0d: valid %0b hit %0b/%0b redir %0b/%0b way %0d/%0d we %0b/%0b blk %h/%h ev %0b/%0b evd %0b/%0b addr %h/%h",
                 $time, e_set, resp_valid, resp_hit, e_hit, resp_redirect, e_redir, resp_way, e_way,
                 resp_data_we, e_we, resp_blocked, e_blk, resp_evict_valid, e_ev,
                 resp_evict_dirty, e_evd, resp_evict_addr, e_evaddr);
    end
  endtask

  task automatic check_pct();
    for (int i = 0; i < NPCT; i++) begin
      checks++;
      if (int'($signed(dut.u_pct.tbl[i])) != pct[i]) begin
        failures++;
        if (failures < 20) $display("FAIL pct[%0d] = %0d expected %0d", i, $signed(dut.u_pct.tbl[i]), pct[i]);
      end
    end
  endtask

  always @(posedge clk) if (pct_upd_valid) begin
    if (pct_upd_inc) n_inc++; else n_dec++;
  end

  initial begin
    repeat (INTERVAL * (NINTERVALS + 5)) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int cyc, rate, sets [5];
  initial begin
    sets = '{0, 21, 5, 6, 7};
    for (int i = 0; i < 6; i++) ips[i] = {$urandom, $urandom};
    for (int s = 0; s < NSETS; s++) for (int w = 0; w < NW; w++) begin
      mv[s][w] = 0; md[s][w] = 0; mr[s][w] = 0; mt[s][w] = 0; mp[s][w] = 0;
    end
    for (int a = 0; a < K; a++) for (int s = 0; s < NSAMP; s++) for (int w = 0; w < NW; w++) begin
      hc[a][s][w] = 0; hip[a][s][w] = 0;
    end
    for (int s = 0; s < NSAMP; s++) for (int w = 0; w < NW; w++) begin cnt[s][w] = 0; cip[s][w] = 0; end
    for (int i = 0; i < NPCT; i++) pct[i] = 0;
    vc = 0; e_pending = 0;
    n_blk_s = 0; n_blk_u = 0; n_redir = 0; n_steer = 0; n_allb = 0; n_ev = 0; n_evd = 0;
    n_int = 0; n_inc = 0; n_dec = 0; n_hit = 0; n_miss = 0;
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1;
    cyc = 1;                       // cycle number since reset release, 1-based
    rate = 30;
    // the tag array clears itself for NSETS cycles
    while (!req_ready) begin @(negedge clk); cyc++; end
    checks++;
    if (cyc != NSETS + 1) begin failures++; $display("FAIL: ready after %0d cycles", cyc - 1); end
    while (n_int < NINTERVALS) begin
      if (e_pending) begin check_resp(); e_pending = 0; end
      req_valid = 0;
      checks++;
      if (interval_end != (cyc % INTERVAL == 0)) begin
        failures++;
        $display("FAIL: interval_end=%0b in cycle %0d", interval_end, cyc);
      end
      if (interval_end) begin
        n_int++;
        model_interval();
        rate = (n_int % 3 == 0) ? 8 : ((n_int % 3 == 1) ? 30 : 60);
      end else if (!train_busy && req_ready && ($urandom % 100) < rate) begin
        int set, t;
        bit wr;
        longint ip;
        set = sets[$urandom % 5];
        t   = int'($urandom % 6);
        wr  = ($urandom % 100) < 60;
        ip  = ($urandom % 4 != 0) ? ips[t] : ips[$urandom % 6];
        req_valid = 1;
        req_write = wr;
        req_ip    = 64'(ip);
        req_addr  = (64'(t + 1) << 12) | (64'(set) << 6) | 64'($urandom % 64);
        model_access(wr, set, longint'(t + 1), ip);
        e_pending = 1;
      end
      @(negedge clk);
      cyc++;
      if (!train_busy && n_int > 0 && cyc % INTERVAL == (NSAMP * (K + 1 + NW) + 3) % INTERVAL)
        check_pct();
    end
    if (e_pending) check_resp();
    @(negedge clk);
    while (train_busy) @(negedge clk);
    check_pct();
    $display("mechanisms: sampled-blocking %0d unsampled-blocking %0d redirect %0d steered-fill %0d all-blocked %0d evict %0d dirty-evict %0d intervals %0d pct-inc %0d pct-dec %0d hits %0d misses %0d",
             n_blk_s, n_blk_u, n_redir, n_steer, n_allb, n_ev, n_evd, n_int, n_inc, n_dec, n_hit, n_miss);
    if (n_blk_s == 0) begin failures++; $display("FAIL: no sampled-set blocking"); end
    if (n_blk_u == 0) begin failures++; $display("FAIL: no unsampled-set blocking"); end
    if (n_redir == 0) begin failures++; $display("FAIL: no redirected write hit"); end
    if (n_steer == 0) begin failures++; $display("FAIL: no fill steered around a blocked way"); end
    if (n_allb == 0)  begin failures++; $display("FAIL: all-blocked fallback never used"); end
    if (n_evd == 0)   begin failures++; $display("FAIL: no dirty eviction"); end
    if (n_inc == 0)   begin failures++; $display("FAIL: no PC-table increment"); end
    if (n_dec == 0)   begin failures++; $display("FAIL: no PC-table decrement"); end
    checks += 8;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
