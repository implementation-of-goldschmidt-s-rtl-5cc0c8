// gs_divider_tb -- end-to-end test of the Goldschmidt divider at its default
// parameters (53-bit significands, 64-bit datapath, 8-bit table, 4-cycle
// multipliers, two feedback passes).
//
// Operand pairs (corner cases, then random significands in [1, 2)) are
// offered on in_valid after random gaps, often while the divider is busy.
// For each, the exact truncated quotient floor(N * 2^62 / D) is computed with
// a wide integer division and the divider's q must be within TOL units of
// 2^-62 of it. The latency from the accepting edge to out_valid must be
// MUL_LAT + 3*(MUL_LAT+1) + 1 = 20 cycles. The test also counts how often
// each mechanism of the datapath happened, and fails if one never did: the logic block taking r1;
// taking a fed-back r; the counter switching back to r1 after its last pass;
// MULT Y skipped on the last round; a new operand held back by in_ready.
// (Both r1 and a fed-back r offered at once cannot happen with one operation
// in flight; the logic block's own test covers that row.)
module gs_divider_tb;
  localparam int SF = 52, W = 64, FRAC = 62, MUL_LAT = 4, FB = 2;
  localparam int LATENCY = MUL_LAT + (FB + 1) * (MUL_LAT + 1) + 1;
  localparam int N_OPS = 2000;
  localparam longint TOL = 16;

  logic clk = 0, rst_n = 0;
  logic in_valid = 0, in_ready, out_valid;
  logic [SF:0] n_sig = '0, d_sig = '0;
  logic [W-1:0] q;
  int checks = 0, failures = 0, cycle = 0;
  int n_r1 = 0, n_fb = 0, n_switch_back = 0, n_y_skipped = 0, n_stall = 0;
  longint max_err = 0;

  gs_divider dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cycle <= cycle + 1;

  initial begin
    repeat (N_OPS * (LATENCY + 6) + 1000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Mechanism counters, sampled from the datapath.
  always @(posedge clk) if (rst_n) begin
    if (dut.u_logic.o_valid && !dut.u_logic.o_sel_fb) n_r1++;
    if (dut.u_logic.o_sel_fb) n_fb++;
    if (dut.u_logic.o_sel_fb && dut.u_logic.o_last) n_switch_back++;
    if (dut.k_valid && dut.k_last) n_y_skipped++;
    if (in_valid && !in_ready) n_stall++;
  end

  // Latency: clock edges from the edge that accepts an operand to the edge
  // that raises out_valid. At the edge where out_valid is first seen high,
  // that edge count is cycle - accept_cycle - 1.
  int accept_cycle = 0;
  always @(posedge clk) if (rst_n) begin
    if (in_valid && in_ready) accept_cycle <= cycle;
    if (out_valid) begin
      checks++;
      if (cycle - accept_cycle - 1 != LATENCY) begin
        failures++;
        $display("FAIL latency %0d, expected %0d", cycle - accept_cycle - 1, LATENCY);
      end
    end
  end

  function automatic logic [W-1:0] ref_q(logic [SF:0] n, logic [SF:0] d);
    logic [127:0] num = {75'b0, n} << FRAC;
    return W'(num / {75'b0, d});
  endfunction

  // Expected quotients in issue order; checked when out_valid rises.
  logic [W-1:0] expq[$];
  logic [SF:0]  expn[$], expd[$];
  int done = 0;

  always @(posedge clk) if (rst_n && out_valid) begin
    logic [W-1:0] e;
    logic [SF:0] n, d;
    longint err;
    checks++;
    if (expq.size() == 0) begin
      failures++;
      $display("FAIL result with no operation outstanding");
    end else begin
      e = expq.pop_front(); n = expn.pop_front(); d = expd.pop_front();
      err = (q > e) ? longint'(q - e) : -longint'(e - q);
      if (err > max_err) max_err = err;
      if (-err > max_err) max_err = -err;
      if (err > TOL || err < -TOL) begin
        failures++;
        $display("FAIL N=%h D=%h q=%h exp=%h err=%0d", n, d, q, e, err);
      end
    end
    done++;
  end

  // Offer one operand after 'gap' cycles and hold it until accepted. A gap
  // shorter than the latency offers it while the divider is still busy.
  task automatic divide(logic [SF:0] n, logic [SF:0] d, int gap);
    repeat (gap) @(negedge clk);
    @(negedge clk);
    n_sig = n; d_sig = d; in_valid = 1;
    expq.push_back(ref_q(n, d)); expn.push_back(n); expd.push_back(d);
    do @(posedge clk); while (!in_ready);
    @(negedge clk) in_valid = 0;
    n_sig = '0; d_sig = '0;
  endtask

  initial begin
    logic [SF:0] n, d;
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1;
    // corner cases
    divide({1'b1, {SF{1'b0}}}, {1'b1, {SF{1'b0}}}, 0);  // 1/1
    divide({1'b1, {SF{1'b1}}}, {1'b1, {SF{1'b0}}}, 0);  // (2-u)/1
    divide({1'b1, {SF{1'b0}}}, {1'b1, {SF{1'b1}}}, 0);  // 1/(2-u)
    divide({1'b1, {SF{1'b1}}}, {1'b1, {SF{1'b1}}}, 0);  // x/x
    divide({2'b11, {(SF-1){1'b0}}}, {2'b10, {(SF-2){1'b0}}, 1'b1}, 30);
    for (int i = 0; i < N_OPS; i++) begin
      n = {1'b1, 20'($urandom), 32'($urandom)};
      d = {1'b1, 20'($urandom), 32'($urandom)};
      divide(n, d, $urandom_range(0, LATENCY + 4));
    end
    while (done < N_OPS + 5) @(posedge clk);
    repeat (3) @(posedge clk);
    $display("max |error| = %0d units of 2^-%0d", max_err, FRAC);
    $display("mechanisms: r1 taken %0d, fed-back r taken %0d, counter switch-back %0d, MULT Y skipped %0d, stalled cycles %0d",
             n_r1, n_fb, n_switch_back, n_y_skipped, n_stall);
    checks++; if (n_r1 == 0)          begin failures++; $display("FAIL r1 never taken"); end
    checks++; if (n_fb == 0)          begin failures++; $display("FAIL fed-back r never taken"); end
    checks++; if (n_switch_back == 0) begin failures++; $display("FAIL counter never switched back"); end
    checks++; if (n_y_skipped == 0)   begin failures++; $display("FAIL last round never seen"); end
    checks++; if (n_stall == 0)       begin failures++; $display("FAIL in_ready never held an operand"); end
    checks++; if (done != N_OPS + 5)   begin failures++; $display("FAIL %0d results", done); end
    checks++; if (n_fb != FB * n_r1)  begin failures++; $display("FAIL %0d fed-back passes for %0d operations", n_fb, n_r1); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
