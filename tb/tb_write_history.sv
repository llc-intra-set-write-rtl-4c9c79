// tb_write_history: pushes random snapshots and checks both read ports for every
// set and every held age against a reference list of the last HIST_K snapshots.
module tb_write_history;
  localparam int NS = 2, NW = 3, K = 4, CW = 6, IPW = 10, RW = CW + IPW;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, push = 0;
  logic [NS-1:0][NW-1:0][RW-1:0] push_data;
  logic [0:0] blk_sample, rd_sample;
  logic [1:0] rd_age;
  logic [NW-1:0][RW-1:0] blk_row, rd_row;
  logic [2:0] valid_cnt;
  logic [NS-1:0][NW-1:0][RW-1:0] hist_q [$];

  write_history #(.NUM_SAMPLED(NS), .NUM_WAYS(NW), .HIST_K(K), .CNT_W(CW), .IP_W(IPW)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1;
    #1;
    checks++;
    if (valid_cnt != 0) begin failures++; $display("FAIL: valid_cnt after reset %0d", valid_cnt); end
    for (int t = 0; t < 300; t++) begin
      @(negedge clk);
      push = ($urandom % 3) != 0;
      for (int s = 0; s < NS; s++) for (int w = 0; w < NW; w++) push_data[s][w] = RW'($urandom);
      @(posedge clk);
      if (push) begin
        hist_q.push_front(push_data);
        if (hist_q.size() > K) void'(hist_q.pop_back());
      end
      @(negedge clk);
      push = 0;
      checks++;
      if (int'(valid_cnt) != hist_q.size()) begin
        failures++;
        $display("FAIL t=%0d: valid_cnt %0d expected %0d", t, valid_cnt, hist_q.size());
      end
      for (int s = 0; s < NS; s++) begin
        blk_sample = 1'(s);
        for (int a = 0; a < hist_q.size(); a++) begin
          rd_sample = 1'(s);
          rd_age    = 2'(a);
          #1;
          checks++;
          if (rd_row != hist_q[a][s]) begin
            failures++;
            $display("FAIL t=%0d set %0d age %0d: %h expected %h", t, s, a, rd_row, hist_q[a][s]);
          end
          checks++;
          if (blk_row != hist_q[0][s]) begin
            failures++;
            $display("FAIL t=%0d set %0d: newest %h expected %h", t, s, blk_row, hist_q[0][s]);
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
