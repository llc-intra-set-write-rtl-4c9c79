// tb_way_variance: compares the scaled variance with the pairwise form
// sum over i<j of (c_i - c_j)^2, which equals N*sum(c^2) - (sum c)^2.
module tb_way_variance;
  localparam int NW = 16, CW = 16;
  int checks = 0, failures = 0;
  logic [NW-1:0][CW-1:0] cnt;
  logic [2*CW+2*4:0]     var_scaled;
  longint                ref_v;

  way_variance #(.NUM_WAYS(NW), .CNT_W(CW)) dut (.*);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 2000; t++) begin
      for (int w = 0; w < NW; w++) begin
        case (t % 4)
          0: cnt[w] = CW'($urandom % 40);
          1: cnt[w] = CW'($urandom);
          2: cnt[w] = '1;                      // all equal and maximal: variance 0
          default: cnt[w] = (w == t % NW) ? '1 : '0;
        endcase
      end
      #1;
      ref_v = 0;
      for (int i = 0; i < NW; i++)
        for (int j = i + 1; j < NW; j++)
          ref_v += (longint'(cnt[i]) - longint'(cnt[j])) * (longint'(cnt[i]) - longint'(cnt[j]));
      checks++;
      if (longint'(var_scaled) != ref_v) begin
        failures++;
        $display("FAIL t=%0d: %0d expected %0d", t, var_scaled, ref_v);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
