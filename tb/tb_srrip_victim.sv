// tb_srrip_victim: random ways against a step-by-step SRRIP search: take the first
// empty unblocked way, else age the unblocked ways one step at a time until one of
// them reaches the maximum RRPV; the number of steps is the expected age_by.
module tb_srrip_victim;
  localparam int NW = 16, RW = 2, RMAX = 3;
  int checks = 0, failures = 0;
  logic [NW-1:0]         valid, blocked;
  logic [NW-1:0][RW-1:0] rrpv;
  logic [3:0]            victim;
  logic [RW-1:0]         age_by;
  logic                  all_blocked;
  int exp_v, exp_age, r [NW], nall, naged;
  bit cand [NW];

  srrip_victim #(.NUM_WAYS(NW), .RRPV_W(RW)) dut (.*);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    nall = 0; naged = 0;
    for (int t = 0; t < 4000; t++) begin
      valid   = (t % 3 == 0) ? NW'($urandom) : '1;
      blocked = (t % 50 == 0) ? '1 : NW'($urandom & $urandom);
      for (int w = 0; w < NW; w++) rrpv[w] = RW'($urandom % ((t % 2) ? 3 : 4));
      #1;
      exp_v = -1; exp_age = 0;
      for (int w = 0; w < NW; w++) begin
        cand[w] = (blocked == '1) ? 1'b1 : !blocked[w];
        r[w]    = int'(rrpv[w]);
      end
      for (int w = 0; w < NW && exp_v < 0; w++)
        if (cand[w] && !valid[w]) exp_v = w;
      while (exp_v < 0) begin
        for (int w = 0; w < NW && exp_v < 0; w++)
          if (cand[w] && r[w] == RMAX) exp_v = w;
        if (exp_v < 0) begin
          for (int w = 0; w < NW; w++) r[w]++;
          exp_age++;
        end
      end
      if (exp_age > 0) naged++;
      if (blocked == '1) nall++;
      checks++;
      if (int'(victim) != exp_v || int'(age_by) != exp_age || all_blocked != (blocked == '1)) begin
        failures++;
        $display("FAIL t=%0d: victim %0d age %0d all %0b, expected %0d %0d",
                 t, victim, age_by, all_blocked, exp_v, exp_age);
      end
      checks++;
      if (blocked != '1 && blocked[victim]) begin
        failures++;
        $display("FAIL t=%0d: blocked victim", t);
      end
    end
    checks++;
    if (nall == 0 || naged == 0) begin failures++; $display("FAIL: cases not reached"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
