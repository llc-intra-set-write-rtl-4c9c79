// tb_feedback_trainer: the testbench plays the history (random counts around the
// threshold, 0..HIST_K valid entries), pulses start and collects the PC-table
// updates. Expected updates are computed here from the pairwise variance and the
// recency-weighted mean; the busy time is checked against the schedule
// NUM_SAMPLED * (valid + 1 + NUM_WAYS) cycles (1 cycle when fewer than two entries).
module tb_feedback_trainer;
  localparam int NS = 2, NW = 4, K = 4, CW = 8, IPW = 16, TH = 5, RW = CW + IPW;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, start = 0;
  logic [2:0] valid_cnt;
  logic [0:0] rd_sample;
  logic [1:0] rd_age;
  logic [NW-1:0][RW-1:0] rd_row;
  logic upd_valid, upd_inc, busy;
  logic [IPW-1:0] upd_ip;

  int hcnt [K][NS][NW];
  int hip  [K][NS][NW];
  int exp_ip [$], exp_inc [$], got_ip [$], got_inc [$];
  int ninc, ndec, nnone, busy_cyc, exp_cyc;

  feedback_trainer #(.NUM_SAMPLED(NS), .NUM_WAYS(NW), .HIST_K(K), .CNT_W(CW), .IP_W(IPW),
                     .THRESHOLD(TH)) dut (.*);

  always #5 clk = ~clk;

  always_comb
    for (int w = 0; w < NW; w++)
      rd_row[w] = {CW'(hcnt[rd_age][rd_sample][w]), IPW'(hip[rd_age][rd_sample][w])};

  always @(posedge clk) if (upd_valid) begin
    got_ip.push_back(int'(upd_ip));
    got_inc.push_back(int'(upd_inc));
  end
  always @(posedge clk) if (busy) busy_cyc++;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic longint pvar(int a, int s);
    longint v;
    v = 0;
    for (int i = 0; i < NW; i++)
      for (int j = i + 1; j < NW; j++)
        v += longint'(hcnt[a][s][i] - hcnt[a][s][j]) * longint'(hcnt[a][s][i] - hcnt[a][s][j]);
    return v;
  endfunction

  initial begin
    ninc = 0; ndec = 0; nnone = 0;
    for (int a = 0; a < K; a++) for (int s = 0; s < NS; s++) for (int w = 0; w < NW; w++) begin
      hcnt[a][s][w] = 0; hip[a][s][w] = 0;
    end
    valid_cnt = 0;
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1;
    for (int round = 0; round < 300; round++) begin
      int vc;
      vc = (round % 10 == 0) ? round % 2 : 2 + int'($urandom % (K - 1));
      valid_cnt = 3'(vc);
      for (int a = 0; a < K; a++) for (int s = 0; s < NS; s++) for (int w = 0; w < NW; w++) begin
        hcnt[a][s][w] = (round % 7 == 3) ? 4 : int'($urandom % 12);
        hip[a][s][w]  = int'($urandom % 65536);
      end
      exp_ip.delete(); exp_inc.delete(); got_ip.delete(); got_inc.delete();
      if (vc >= 2) begin
        for (int s = 0; s < NS; s++) begin
          longint acc, wsum, v0;
          acc  = 0;
          wsum = 0;
          v0   = pvar(0, s);
          for (int a = 1; a < vc; a++) begin
            acc  += longint'(K - a) * pvar(a, s);
            wsum += K - a;
          end
          if (v0 * wsum == acc) nnone++;
          else begin
            if (v0 * wsum < acc) ninc++; else ndec++;
            for (int w = 0; w < NW; w++)
              if (hcnt[1][s][w] > TH) begin
                exp_ip.push_back(hip[1][s][w]);
                exp_inc.push_back(v0 * wsum < acc);
              end
          end
        end
        exp_cyc = NS * (vc + 1 + NW);
      end else exp_cyc = 1;
      busy_cyc = 0;
      @(negedge clk) start = 1;
      @(negedge clk) start = 0;
      while (busy) @(negedge clk);
      checks++;
      if (busy_cyc != exp_cyc) begin
        failures++;
        $display("FAIL round %0d: busy %0d cycles, expected %0d", round, busy_cyc, exp_cyc);
      end
      checks++;
      if (got_ip.size() != exp_ip.size()) begin
        failures++;
        $display("FAIL round %0d: %0d updates, expected %0d", round, got_ip.size(), exp_ip.size());
      end else begin
        for (int i = 0; i < exp_ip.size(); i++) begin
          checks++;
          if (got_ip[i] != exp_ip[i] || got_inc[i] != exp_inc[i]) begin
            failures++;
            $display("FAIL round %0d upd %0d: ip %h inc %0d, expected %h %0d", round, i,
                     got_ip[i], got_inc[i], exp_ip[i], exp_inc[i]);
          end
        end
      end
      repeat (2) @(negedge clk);
    end
    checks++;
    if (ninc == 0 || ndec == 0 || nnone == 0) begin
      failures++;
      $display("FAIL: inc %0d dec %0d none %0d", ninc, ndec, nnone);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
