// tb_llc_tag_array: checks the clear-after-reset sweep (ready low for NUM_SETS
// cycles, every row zero afterwards) and random row writes and reads.
module tb_llc_tag_array;
  localparam int NS = 8, NW = 2, LW = 7;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, ready, wr_en = 0;
  logic [2:0] rd_set, wr_set;
  logic [NW-1:0][LW-1:0] rd_row, wr_row;
  logic [NW-1:0][LW-1:0] ref_m [NS];
  int nready;

  llc_tag_array #(.NUM_SETS(NS), .NUM_WAYS(NW), .LINE_W(LW)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    // put garbage in before reset to see the sweep clear it
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1;
    repeat (NS + 2) @(negedge clk);
    wr_en = 1;
    for (int s = 0; s < NS; s++) begin
      wr_set = 3'(s); wr_row = '1;
      @(negedge clk);
    end
    wr_en = 0;
    rst_n = 0;
    @(negedge clk);
    rst_n = 1;
    nready = 0;
    // the sweep takes NS cycles; writes meanwhile are ignored
    wr_en = 1; wr_set = 3'd5; wr_row = '1;
    for (int c = 0; c < NS + 3; c++) begin
      #1;
      if (ready) nready++;
      if (c < NS) begin
        checks++;
        if (ready) begin failures++; $display("FAIL: ready in sweep cycle %0d", c); end
      end
      if (ready) wr_en = 0;
      @(negedge clk);
    end
    wr_en = 0;
    checks++;
    if (nready != 3) begin failures++; $display("FAIL: ready count %0d", nready); end
    for (int s = 0; s < NS; s++) begin
      rd_set = 3'(s);
      #1;
      checks++;
      if (rd_row != '0) begin failures++; $display("FAIL: row %0d not cleared: %h", s, rd_row); end
      ref_m[s] = '0;
    end
    for (int t = 0; t < 500; t++) begin
      @(negedge clk);
      wr_en  = $urandom % 2;
      wr_set = 3'($urandom);
      wr_row = (NW*LW)'($urandom);
      rd_set = 3'($urandom);
      #1;
      checks++;
      if (rd_row != ref_m[rd_set]) begin failures++; $display("FAIL t=%0d row %0d", t, rd_set); end
      @(posedge clk);
      if (wr_en) ref_m[wr_set] = wr_row;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
