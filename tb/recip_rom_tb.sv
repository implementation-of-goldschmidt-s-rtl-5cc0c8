// recip_rom_tb -- exhaustive check of the reciprocal table.
//
// For every index the expected entry is computed with real arithmetic, the
// reciprocal of the interval midpoint 1 + (i + 0.5) * 2^-P scaled by 2^(P+2)
// and rounded to nearest, and compared with the table. It also checks that K1
// times any D of the interval is within 2^-P of 1, which is what the first
// Goldschmidt step needs. Combinational block: no clock, so the watchdog is
// a time limit.
module recip_rom_tb;
  localparam int P = 8;
  logic [P-1:0] d_idx;
  logic [P+1:0] k1;
  int checks = 0, failures = 0;

  recip_rom #(.P(P)) dut (.d_idx, .k1);

  initial begin
    #1_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 2**P; i++) begin
      real mid, expect_r, lo, hi, err_lo, err_hi;
      int expect_k;
      d_idx = P'(i);
      #1;
      mid      = 1.0 + (real'(i) + 0.5) / real'(2**P);
      expect_r = real'(2**(P+2)) / mid;
      expect_k = $rtoi(expect_r + 0.5);
      checks++;
      if (int'(k1) != expect_k) begin
        failures++;
        $display("FAIL idx=%0d k1=%0d expected=%0d", i, k1, expect_k);
      end
      lo     = 1.0 + real'(i) / real'(2**P);
      hi     = 1.0 + real'(i + 1) / real'(2**P);
      err_lo = 1.0 - real'(k1) / real'(2**(P+2)) * lo;
      err_hi = 1.0 - real'(k1) / real'(2**(P+2)) * hi;
      if (err_lo < 0.0) err_lo = -err_lo;
      if (err_hi < 0.0) err_hi = -err_hi;
      checks++;
      if (err_lo > 1.0 / real'(2**P) || err_hi > 1.0 / real'(2**P)) begin
        failures++;
        $display("FAIL idx=%0d k1=%0d: |1-K1*D| too large (%f, %f)", i, k1, err_lo, err_hi);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
