// tb_write_counters: random writes and interval clears against a reference array,
// including saturation of the (narrowed) counters and a write in the clear cycle.
module tb_write_counters;
  localparam int NS = 4, NW = 4, CW = 4, IPW = 12;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, clear = 0, wr_valid = 0;
  logic [1:0] wr_sample, wr_way;
  logic [IPW-1:0] wr_ip;
  logic [NS-1:0][NW-1:0][CW+IPW-1:0] live;
  int ref_cnt [NS][NW];
  int ref_ip  [NS][NW];
  int nsat, nclrwr;

  write_counters #(.NUM_SAMPLED(NS), .NUM_WAYS(NW), .CNT_W(CW), .IP_W(IPW)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic compare();
    for (int s = 0; s < NS; s++)
      for (int w = 0; w < NW; w++) begin
        checks++;
        if (int'(live[s][w][CW+IPW-1:IPW]) != ref_cnt[s][w] ||
            (ref_cnt[s][w] != 0 && int'(live[s][w][IPW-1:0]) != ref_ip[s][w])) begin
          failures++;
          $display("FAIL [%0d][%0d]: cnt %0d ip %0h, expected %0d %0h", s, w,
                   live[s][w][CW+IPW-1:IPW], live[s][w][IPW-1:0], ref_cnt[s][w], ref_ip[s][w]);
        end
      end
  endtask

  initial begin
    nsat = 0; nclrwr = 0;
    for (int s = 0; s < NS; s++) for (int w = 0; w < NW; w++) begin ref_cnt[s][w] = 0; ref_ip[s][w] = 0; end
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1;
    compare();
    for (int t = 0; t < 3000; t++) begin
      @(negedge clk);
      wr_valid  = ($urandom % 4) != 0;
      wr_sample = 2'($urandom % 2);           // two hot sets reach saturation
      wr_way    = 2'($urandom % 2);
      wr_ip     = IPW'($urandom);
      clear     = ($urandom % 100) == 0;
      @(posedge clk);
      #1;
      if (clear) begin
        for (int s = 0; s < NS; s++) for (int w = 0; w < NW; w++) ref_cnt[s][w] = 0;
        if (wr_valid) nclrwr++;
      end
      if (wr_valid) begin
        if (ref_cnt[wr_sample][wr_way] == (1 << CW) - 1) nsat++;
        else ref_cnt[wr_sample][wr_way]++;
        ref_ip[wr_sample][wr_way] = int'(wr_ip);
      end
      compare();
    end
    checks++;
    if (nsat == 0 || nclrwr == 0) begin
      failures++;
      $display("FAIL: saturation (%0d) or clear+write (%0d) never exercised", nsat, nclrwr);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
