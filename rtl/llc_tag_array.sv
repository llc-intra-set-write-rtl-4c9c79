// llc_tag_array: tag and metadata store of the LLC, one row per set.
//
// A row holds NUM_WAYS line records of LINE_W bits each; the top decides their
// layout (valid, dirty, RRPV, tag and the PC-table index of the IP that brought the
// line). Reads are asynchronous (the whole row of the addressed set), writes are
// synchronous and replace the whole row. After reset the array clears itself one row
// per cycle; ready stays low for those NUM_SETS cycles and writes are ignored
// meanwhile. The array is written as a plain memory so that a synthesis flow can
// map it onto a RAM macro.
module llc_tag_array #(
  parameter int unsigned NUM_SETS = 2048,
  parameter int unsigned NUM_WAYS = 16,
  parameter int unsigned LINE_W   = 60,
  localparam int unsigned SET_W   = $clog2(NUM_SETS)
) (
  input  logic                            clk,
  input  logic                            rst_n,
  output logic                            ready,
  input  logic [SET_W-1:0]                rd_set,
  output logic [NUM_WAYS-1:0][LINE_W-1:0] rd_row,
  input  logic                            wr_en,
  input  logic [SET_W-1:0]                wr_set,
  input  logic [NUM_WAYS-1:0][LINE_W-1:0] wr_row
);
  typedef logic [NUM_WAYS-1:0][LINE_W-1:0] row_t;

  row_t             mem [NUM_SETS];
  logic [SET_W-1:0] clr_set;
  logic             clearing;

  assign ready  = !clearing;
  assign rd_row = mem[rd_set];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      clearing <= 1'b1;
      clr_set  <= '0;
    end else if (clearing) begin
      clr_set <= clr_set + 1'b1;
      if (int'(clr_set) == NUM_SETS - 1) clearing <= 1'b0;
    end
  end

  always_ff @(posedge clk) begin
    if (clearing)   mem[clr_set] <= '0;
    else if (wr_en) mem[wr_set]  <= wr_row;
  end
endmodule
