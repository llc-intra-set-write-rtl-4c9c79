// pc_table: signed confidence value per instruction pointer.
//
// The paper keeps a map from each 64-bit IP to an int that starts at zero and is
// incremented when blocking by that IP helped and decremented when it hurt; a
// negative value makes the ways brought in by that IP blocked in unsampled sets.
// A map has no fixed size, so this design uses a direct-mapped, untagged table of
// PCT_ENTRIES signed PCT_VAL_W-bit values indexed by an XOR-fold of the IP
// (wb_pkg::ip_fold); IPs that fold to the same index share a value. Values saturate
// at the signed range and are zero after reset.
//
// NRD asynchronous read ports (one per way, so a whole set is judged at once) and one
// update port; an update is visible to reads in the next cycle.
module pc_table #(
  parameter int unsigned PCT_ENTRIES = 1024,
  parameter int unsigned PCT_VAL_W   = 32,
  parameter int unsigned NRD         = 16,
  localparam int unsigned IDX_W      = $clog2(PCT_ENTRIES)
) (
  input  logic                                 clk,
  input  logic                                 rst_n,
  input  logic [NRD-1:0][IDX_W-1:0]            rd_idx,
  output logic signed [PCT_VAL_W-1:0]          rd_val [NRD],
  input  logic                                 upd_valid,
  input  logic [IDX_W-1:0]                     upd_idx,
  input  logic                                 upd_inc     // 1: +1, 0: -1
);
  localparam logic signed [PCT_VAL_W-1:0] VMAX = {1'b0, {(PCT_VAL_W-1){1'b1}}};
  localparam logic signed [PCT_VAL_W-1:0] VMIN = {1'b1, {(PCT_VAL_W-1){1'b0}}};

  // tbl[i] is entry i; each entry is a register of its own generate block.
  logic [PCT_ENTRIES-1:0][PCT_VAL_W-1:0] tbl;
  logic signed [PCT_VAL_W-1:0]           cur, nxt;

  // One shared +/-1 with saturation; each entry only decodes its index.
  always_comb begin
    cur = $signed(tbl[upd_idx]);
    nxt = cur;
    if (upd_inc && cur != VMAX)       nxt = cur + 1;
    else if (!upd_inc && cur != VMIN) nxt = cur - 1;
  end

  for (genvar i = 0; i < PCT_ENTRIES; i++) begin : g_ent
    logic [PCT_VAL_W-1:0] val;
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n)                                 val <= '0;
      else if (upd_valid && int'(upd_idx) == i)   val <= nxt;
    end
    assign tbl[i] = val;
  end

  always_comb begin
    for (int r = 0; r < NRD; r++) rd_val[r] = $signed(tbl[rd_idx[r]]);
  end
endmodule
