// tb_sample_set_detect: checks the sampled-set rule over every set of a 2048-set LLC.
// The expected sampled sets are built independently: the 5 free bits b of a sampled
// set repeat as set = b | b<<5 | b[0]<<10, and each one's slot must be b.
module tb_sample_set_detect;
  int checks = 0, failures = 0;
  logic [10:0] set_idx;
  logic        is_sampled;
  logic [4:0]  sample_idx;
  bit          expect_s [2048];
  int          slot_of [2048];
  int          nsampled;

  sample_set_detect #(.NUM_SETS(2048), .SAMPLE_BITS(6)) dut (.*);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int s = 0; s < 2048; s++) expect_s[s] = 0;
    for (int b = 0; b < 32; b++) begin
      int s;
      s = b | (b << 5) | ((b & 1) << 10);
      expect_s[s] = 1;
      slot_of[s]  = b;
    end
    nsampled = 0;
    for (int s = 0; s < 2048; s++) begin
      set_idx = 11'(s);
      #1;
      checks++;
      if (is_sampled !== expect_s[s]) begin
        failures++;
        $display("FAIL set %0d: is_sampled=%0b expected %0b", s, is_sampled, expect_s[s]);
      end
      if (is_sampled) nsampled++;
      if (expect_s[s]) begin
        checks++;
        if (int'(sample_idx) != slot_of[s]) begin
          failures++;
          $display("FAIL set %0d: slot %0d expected %0d", s, sample_idx, slot_of[s]);
        end
      end
    end
    checks++;
    if (nsampled != 32) begin
      failures++;
      $display("FAIL: %0d sampled sets, expected 32", nsampled);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
