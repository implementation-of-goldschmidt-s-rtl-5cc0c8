// gs_twos_comp_tb -- checks K = 2 - r of the 2's complement block.
//
// The expected K is 2.0 - r computed as a plain subtraction of the fixed-point
// word 2^(FRAC+1); it is checked for values of r near 1 (where the divider
// uses the block), for random r in (0, 2), and at the ends of that range.
// The range flag is checked for r in (0, 2) and for r = 0 and r >= 2.
module gs_twos_comp_tb;
  localparam int W = 64, FRAC = 62;
  localparam logic [W-1:0] ONE = 64'h4000_0000_0000_0000;
  localparam logic [W-1:0] TWO = 64'h8000_0000_0000_0000;
  logic [W-1:0] r, k;
  logic in_range;
  int checks = 0, failures = 0;

  gs_twos_comp #(.W(W), .FRAC(FRAC)) dut (.*);

  initial begin
    #10_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(logic [W-1:0] v, logic range_exp);
    r = v;
    #1;
    checks++;
    if (in_range !== range_exp || (range_exp && k !== TWO - v)) begin
      failures++;
      $display("FAIL r=%h k=%h exp=%h in_range=%b", v, k, TWO - v, in_range);
    end
  endtask

  initial begin
    check(ONE, 1);
    check(64'h1, 1);
    check(TWO - 1, 1);
    check(64'h0, 0);
    check(TWO, 0);
    check('1, 0);
    for (int i = 0; i < 500; i++) begin   // near 1: within 1 +- 2^-8
      logic [W-1:0] d = {9'b0, 23'($urandom), 32'($urandom)};
      check(ONE - (64'd1 << 54) + d, 1);
    end
    for (int i = 0; i < 500; i++) begin
      logic [W-1:0] v = {2'b0, 30'($urandom), 32'($urandom)};
      if (v != 0) check(v, 1);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
