// gs_mult_tb -- checks the pipelined fixed-point multiplier.
//
// Random operand pairs below 4.0 are issued with random gaps (including
// back-to-back issue). Each expected product is computed by a shift-and-add
// loop and truncated to the FRAC fraction bits; it is queued with its issue
// cycle and its tag. Every output must match the head of the queue and come
// exactly LAT cycles after issue. A watchdog ends the run if it hangs.
module gs_mult_tb;
  localparam int W = 64, FRAC = 62, LAT = 4, N_OPS = 400;
  logic clk = 0, rst_n = 0;
  logic in_valid = 0, out_valid;
  logic [W-1:0] a = '0, b = '0, p;
  logic in_tag = 0, out_tag;
  int checks = 0, failures = 0, cycle = 0, issued = 0, received = 0;

  typedef struct { logic [W-1:0] prod; logic tag; int at; } exp_t;
  exp_t q[$];

  gs_mult #(.W(W), .FRAC(FRAC), .LAT(LAT)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cycle <= cycle + 1;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [W-1:0] ref_mul(logic [W-1:0] x, logic [W-1:0] y);
    logic [2*W-1:0] acc = '0;
    for (int i = 0; i < W; i++)
      if (y[i]) acc = acc + ({{W{1'b0}}, x} << i);
    return acc[FRAC +: W];
  endfunction

  // Check outputs
  always @(posedge clk) begin
    if (rst_n && out_valid) begin
      exp_t e;
      checks++;
      if (q.size() == 0) begin
        failures++;
        $display("FAIL unexpected output");
      end else begin
        e = q.pop_front();
        if (p !== e.prod || out_tag !== e.tag || cycle - e.at != LAT) begin
          failures++;
          $display("FAIL p=%h exp=%h tag=%b/%b latency=%0d", p, e.prod, out_tag, e.tag, cycle - e.at);
        end
      end
      received++;
    end
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    while (issued < N_OPS) begin
      @(negedge clk);
      if ($urandom_range(0, 2) != 0) begin
        a = {2'($urandom), 30'($urandom), 32'($urandom)};
        b = {2'($urandom), 30'($urandom), 32'($urandom)};
        if (issued == 0) begin a = 64'h4000_0000_0000_0000; b = 64'h4000_0000_0000_0000; end // 1.0 * 1.0
        if (issued == 1) begin a = '1; b = '1; end
        in_tag   = 1'($urandom);
        in_valid = 1;
        q.push_back('{ref_mul(a, b), in_tag, cycle});
        issued++;
      end else in_valid = 0;
    end
    @(negedge clk) in_valid = 0;
    repeat (LAT + 3) @(posedge clk);
    checks++;
    if (received != N_OPS || q.size() != 0) begin
      failures++;
      $display("FAIL received %0d of %0d", received, N_OPS);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
