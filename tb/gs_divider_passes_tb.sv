// gs_divider_passes_tb -- the divider with other settings of the pass counter.
//
// The number of fed-back passes sets how many Goldschmidt factors are
// applied, and so the accuracy. Three dividers with FB_PASSES = 0, 1 and 3
// (results q2, q3 and q5) get the same random operands. With the table error
// e < 2^-8, q_i = Q * (1 - e^(2^(i-1))), so each result may fall short of the
// exact quotient by at most Q*e^(2^(i-1)) plus a few units of truncation:
//   FB_PASSES = 0: below 2^-15, FB_PASSES = 1: below 2^-31,
//   FB_PASSES = 3: a few units of 2^-62, like the default setting.
// Each result is checked against those bounds, and each latency against
// MUL_LAT + (FB_PASSES+1)*(MUL_LAT+1) + 1.
module gs_divider_passes_tb;
  localparam int SF = 52, W = 64, FRAC = 62, MUL_LAT = 4, N_OPS = 500;
  localparam int NI = 3;
  localparam int FBS [NI] = '{0, 1, 3};
  // Allowed shortfall below the exact quotient, in units of 2^-62.
  localparam longint BELOW [NI] = '{longint'(1) << 47, longint'(1) << 31, 16};

  logic clk = 0, rst_n = 0;
  logic in_valid = 0;
  logic [SF:0] n_sig = '0, d_sig = '0;
  logic [NI-1:0] in_ready, out_valid;
  logic [W-1:0] q [NI];
  int checks = 0, failures = 0, cycle = 0;
  int accept_cycle = 0;
  longint worst [NI] = '{0, 0, 0};

  for (genvar g = 0; g < NI; g++) begin : g_div
    gs_divider #(.FB_PASSES(FBS[g])) dut (
      .clk, .rst_n, .in_valid, .in_ready(in_ready[g]), .n_sig, .d_sig,
      .out_valid(out_valid[g]), .q(q[g]));
  end

  always #5 clk = ~clk;
  always @(posedge clk) cycle <= cycle + 1;

  initial begin
    repeat (N_OPS * 40 + 1000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [W-1:0] ref_q(logic [SF:0] n, logic [SF:0] d);
    logic [127:0] num = {75'b0, n} << FRAC;
    return W'(num / {75'b0, d});
  endfunction

  initial begin
    logic [SF:0] n, d;
    logic [W-1:0] e;
    logic [NI-1:0] seen;
    longint err;
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1;
    for (int op = 0; op < N_OPS; op++) begin
      n = {1'b1, 20'($urandom), 32'($urandom)};
      d = {1'b1, 20'($urandom), 32'($urandom)};
      if (op == 0) begin n = {1'b1, {SF{1'b1}}}; d = {1'b1, {SF{1'b0}}}; end
      if (op == 1) begin n = {1'b1, {SF{1'b0}}}; d = {2'b10, {(SF-1){1'b1}}}; end
      e = ref_q(n, d);
      @(negedge clk);
      n_sig = n; d_sig = d; in_valid = 1;
      @(posedge clk);
      accept_cycle = cycle;
      checks++;
      if (in_ready != '1) begin
        failures++;
        $display("FAIL dividers not idle");
      end
      @(negedge clk) in_valid = 0;
      seen = '0;
      while (seen != '1) begin
        @(posedge clk);
        for (int g = 0; g < NI; g++) if (out_valid[g]) begin
          seen[g] = 1'b1;
          err = (q[g] > e) ? longint'(q[g] - e) : -longint'(e - q[g]);
          if (-err > worst[g]) worst[g] = -err;
          checks++;
          if (err > 4 || -err > BELOW[g]) begin
            failures++;
            $display("FAIL FB_PASSES=%0d N=%h D=%h q=%h exp=%h err=%0d", FBS[g], n, d, q[g], e, err);
          end
          checks++;
          if (cycle - accept_cycle - 1 != MUL_LAT + (FBS[g] + 1) * (MUL_LAT + 1) + 1) begin
            failures++;
            $display("FAIL FB_PASSES=%0d latency %0d", FBS[g], cycle - accept_cycle - 1);
          end
        end
      end
    end
    for (int g = 0; g < NI; g++)
      $display("FB_PASSES=%0d: largest shortfall %0d units of 2^-62", FBS[g], worst[g]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
