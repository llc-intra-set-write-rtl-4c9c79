// tb_block_mask_gen: random inputs; expected mask from the blocking rules
// (sampled: previous count > threshold once history exists; unsampled: valid line
// whose PC-table value is negative).
module tb_block_mask_gen;
  localparam int NW = 16, CW = 16, VW = 32, TH = 29;
  int checks = 0, failures = 0;
  logic                   is_sampled, hist_valid;
  logic [NW-1:0][CW-1:0]  prev_cnt;
  logic [NW-1:0]          line_valid;
  logic signed [VW-1:0]   pct_val [NW];
  logic [NW-1:0]          blocked, expect_b;

  block_mask_gen #(.NUM_WAYS(NW), .CNT_W(CW), .PCT_VAL_W(VW), .THRESHOLD(TH)) dut (.*);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 3000; t++) begin
      is_sampled = $urandom % 2;
      hist_valid = ($urandom % 8) != 0;
      line_valid = NW'($urandom);
      for (int w = 0; w < NW; w++) begin
        prev_cnt[w] = CW'(25 + $urandom % 10);     // around the threshold, 29 and 30 included
        pct_val[w]  = VW'(int'($urandom % 5) - 2); // -2..2, zero included
      end
      #1;
      for (int w = 0; w < NW; w++)
        expect_b[w] = is_sampled ? (hist_valid && int'(prev_cnt[w]) >= TH + 1)
                                 : (line_valid[w] && int'(pct_val[w]) <= -1);
      checks++;
      if (blocked !== expect_b) begin
        failures++;
        $display("FAIL t=%0d: blocked %h expected %h", t, blocked, expect_b);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
