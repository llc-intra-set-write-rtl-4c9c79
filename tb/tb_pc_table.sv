// tb_pc_table: random +/-1 updates against a reference table, with narrow values
// so that both saturation limits are reached; all read ports are checked each cycle.
module tb_pc_table;
  localparam int NE = 16, VW = 4, NRD = 3, VMAX = 7, VMIN = -8;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, upd_valid = 0, upd_inc = 0;
  logic [NRD-1:0][3:0] rd_idx;
  logic signed [VW-1:0] rd_val [NRD];
  logic [3:0] upd_idx;
  int ref_t [NE];
  int nmax, nmin;

  pc_table #(.PCT_ENTRIES(NE), .PCT_VAL_W(VW), .NRD(NRD)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    nmax = 0; nmin = 0;
    for (int i = 0; i < NE; i++) ref_t[i] = 0;
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1;
    for (int t = 0; t < 4000; t++) begin
      @(negedge clk);
      for (int r = 0; r < NRD; r++) rd_idx[r] = 4'($urandom);
      #1;
      for (int r = 0; r < NRD; r++) begin
        checks++;
        if (int'(rd_val[r]) != ref_t[rd_idx[r]]) begin
          failures++;
          $display("FAIL t=%0d port %0d idx %0d: %0d expected %0d", t, r, rd_idx[r], rd_val[r], ref_t[rd_idx[r]]);
        end
      end
      upd_valid = ($urandom % 4) != 0;
      upd_idx   = 4'($urandom % 4);
      upd_inc   = (t / 500) % 2 == 0 ? ($urandom % 5 != 0) : ($urandom % 5 == 0);
      @(posedge clk);
      if (upd_valid) begin
        if (upd_inc) begin if (ref_t[upd_idx] < VMAX) ref_t[upd_idx]++; else nmax++; end
        else         begin if (ref_t[upd_idx] > VMIN) ref_t[upd_idx]--; else nmin++; end
      end
    end
    checks++;
    if (nmax == 0 || nmin == 0) begin failures++; $display("FAIL: saturation not reached"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
