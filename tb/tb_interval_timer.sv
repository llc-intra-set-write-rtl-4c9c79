// tb_interval_timer: checks that interval_end pulses for exactly one cycle every
// INTERVAL cycles, the first one INTERVAL cycles after reset is released.
module tb_interval_timer;
  localparam int INTERVAL = 13;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, interval_end;
  int cyc, last, npulse;

  interval_timer #(.INTERVAL(INTERVAL)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1;
    cyc = 0; last = 0; npulse = 0;
    // cyc numbers the cycles after reset release from 1; the pulse is in cycle INTERVAL*n
    repeat (INTERVAL * 10) begin
      #1;
      cyc++;
      checks++;
      if (interval_end !== ((cyc % INTERVAL) == 0)) begin
        failures++;
        $display("FAIL cycle %0d: interval_end=%0b", cyc, interval_end);
      end
      if (interval_end) begin
        npulse++;
        if (last != 0) begin
          checks++;
          if (cyc - last != INTERVAL) begin
            failures++;
            $display("FAIL: pulse distance %0d", cyc - last);
          end
        end
        last = cyc;
      end
      @(negedge clk);
    end
    checks++;
    if (npulse != 10) begin failures++; $display("FAIL: %0d pulses", npulse); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
