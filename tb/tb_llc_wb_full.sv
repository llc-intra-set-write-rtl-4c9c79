// tb_llc_wb_full: the write-balancing LLC at its full default size (2048 sets,
// 16 ways, 32 sampled sets, threshold 29, 8-entry history, 100000-cycle intervals,
// 1024-entry PC table), taken through four intervals of a directed scenario whose
// outcome is worked out by hand:
//   interval 1: line A of sampled set 0 is written 40 times by IP_A (way 0); lines
//               B, C fill ways 1, 2. Unsampled set 5 gets line P from IP_B (way 0)
//               and line Q from IP_A (way 1).
//   interval 2: way 0 of set 0 had 40 > 29 writes, so the next write to A (IP_B) is
//               redirected to the first free way, 3; A is then written 35 more times.
//               Training at the end: set 0 variance 15*36^2 = 19440 against the
//               previous 16*(40^2+1+1) - 42^2 = 23868: lower, so IP_A gets +1.
//   interval 3: way 3 had 36 writes: the write to A (IP_C) is redirected to way 0 (free,
//               not blocked), then 59 more writes. Variance 15*60^2 = 54000 is above the
//               weighted mean (7*19440 + 6*23868)/13, so IP_B (blocking of way 3) gets -1.
//   interval 4: in unsampled set 5 the line brought by IP_B is now blocked: a write to
//               P is redirected to way 2; line Q (IP_A, value +1) is not blocked.
module tb_llc_wb_full;
  import wb_pkg::*;
  localparam int INTERVAL = 100000;

  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic req_valid = 0, req_ready, req_write = 0;
  logic [63:0] req_addr = '0, req_ip = '0;
  logic resp_valid, resp_write, resp_hit, resp_redirect, resp_sampled, resp_data_we;
  logic [10:0] resp_set;
  logic [3:0] resp_way;
  logic [15:0] resp_blocked;
  logic resp_evict_valid, resp_evict_dirty;
  logic [63:0] resp_evict_addr;
  logic interval_end, train_busy, pct_upd_valid, pct_upd_inc;
  int n_inc, n_dec, n_int, cyc;

  llc_wb_top dut (.*);

  localparam logic [63:0] IP_A = 64'h0000_0000_0040_1a20;
  localparam logic [63:0] IP_B = 64'h0000_0000_0040_2b64;
  localparam logic [63:0] IP_C = 64'h0000_0000_0040_3c08;

  always #5 clk = ~clk;
  always @(posedge clk) begin
    if (pct_upd_valid) begin if (pct_upd_inc) n_inc++; else n_dec++; end
    if (interval_end) n_int++;
  end
  always @(posedge clk) cyc++;

  initial begin
    repeat (5 * INTERVAL) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [63:0] addr(int tag, int set);
    return (64'(tag) << 17) | (64'(set) << 6);
  endfunction

  // one request; checks the response fields given (way < 0: not checked)
  task automatic access(bit wr, logic [63:0] a, logic [63:0] ip, bit e_hit, bit e_redir,
                        int e_way, logic [15:0] e_blk);
    @(negedge clk);
    req_valid = 1; req_write = wr; req_addr = a; req_ip = ip;
    @(negedge clk);
    req_valid = 0;
    checks++;
    if (!resp_valid || resp_hit != e_hit || resp_redirect != e_redir ||
        (e_way >= 0 && int'(resp_way) != e_way) || resp_blocked != e_blk || resp_data_we != (wr || !e_hit)) begin
      failures++;
      $display("FAIL @%0t addr %h: hit %0b/%0b redir %0b/%0b way %0d/%0d blk %h/%h",
               $time, a, resp_hit, e_hit, resp_redirect, e_redir, resp_way, e_way, resp_blocked, e_blk);
    end
  endtask

  task automatic wait_interval(int n);
    while (n_int < n) @(negedge clk);
    @(negedge clk);
    while (train_busy) @(negedge clk);
  endtask

  initial begin
    n_inc = 0; n_dec = 0; n_int = 0; cyc = 0;
    checks++;
    if (ip_fold(IP_A, 10) == ip_fold(IP_B, 10)) begin failures++; $display("FAIL: IPs alias"); end
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1;
    while (!req_ready) @(negedge clk);
    checks++;
    if (cyc != 3 + 2048) begin failures++; $display("FAIL: ready after %0d cycles", cyc - 3); end
    // ---- interval 1
    access(1, addr(1, 0), IP_A, 0, 0, 0, '0);
    repeat (39) access(1, addr(1, 0), IP_A, 1, 0, 0, '0);
    access(0, addr(2, 0), IP_A, 0, 0, 1, '0);
    access(0, addr(3, 0), IP_A, 0, 0, 2, '0);
    access(0, addr(1, 5), IP_B, 0, 0, 0, '0);
    access(0, addr(2, 5), IP_A, 0, 0, 1, '0);
    checks++;
    if (dut.live[0][0][79:64] != 40) begin failures++; $display("FAIL: count %0d", dut.live[0][0][79:64]); end
    wait_interval(1);
    // ---- interval 2
    access(1, addr(1, 0), IP_B, 0, 1, 3, 16'h0001);
    access(0, addr(1, 0), IP_B, 1, 0, 3, 16'h0001);
    repeat (35) access(1, addr(1, 0), IP_B, 1, 0, 3, 16'h0001);
    wait_interval(2);
    checks++;
    if (n_inc != 1 || n_dec != 0) begin failures++; $display("FAIL: after interval 2 inc %0d dec %0d", n_inc, n_dec); end
    // ---- interval 3
    access(1, addr(1, 0), IP_C, 0, 1, 0, 16'h0008);
    repeat (59) access(1, addr(1, 0), IP_C, 1, 0, 0, 16'h0008);
    wait_interval(3);
    checks++;
    if (n_inc != 1 || n_dec != 1) begin failures++; $display("FAIL: after interval 3 inc %0d dec %0d", n_inc, n_dec); end
    // ---- interval 4: PC-table blocking in an unsampled set
    access(0, addr(2, 5), IP_C, 1, 0, 1, 16'h0001);
    access(1, addr(1, 5), IP_C, 0, 1, 2, 16'h0001);
    access(1, addr(2, 5), IP_C, 1, 0, 1, 16'h0000);
    // sampled set 0 now blocks way 0 (60 writes in interval 3)
    access(1, addr(1, 0), IP_C, 0, 1, -1, 16'h0001);
    $display("intervals %0d, PC-table increments %0d, decrements %0d, cycles %0d", n_int, n_inc, n_dec, cyc);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
