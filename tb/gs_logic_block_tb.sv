// gs_logic_block_tb -- checks the selection rule and the pass counter of the
// logic block.
//
// Each step drives r1/rfb and their valid bits, then checks the
// combinational outputs against the truth table (rfb has priority, r1 when
// only r1 is offered and the block is idle, 0 when nothing is offered) and
// the state after the clock edge (active flag, count). With FB_PASSES = 2 an
// operation is: r1 pass, first fed-back pass, second fed-back pass (marked
// last, then the counter resets). r1 offered while active must be discarded.
// The sequence is repeated with random values several times.
module gs_logic_block_tb;
  localparam int W = 64, FB = 2;
  logic clk = 0, rst_n = 0;
  logic [W-1:0] r1 = '0, rfb = '0, o;
  logic r1_valid = 0, rfb_valid = 0, o_valid, o_sel_fb, o_last, active;
  logic [0:0] count;
  int checks = 0, failures = 0;

  gs_logic_block #(.W(W), .FB_PASSES(FB)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // e_src: expected output 0 = zero, 1 = r1, 2 = rfb.
  // Drive one cycle and check outputs before the edge, state after it.
  task automatic step(logic v1, logic vf, int e_src, logic e_valid,
                      logic e_fb, logic e_last, logic e_active_after, int e_count_after);
    logic [W-1:0] e_o;
    @(negedge clk);
    r1 = {$urandom, $urandom}; rfb = {$urandom, $urandom};
    r1_valid = v1; rfb_valid = vf;
    #1;
    e_o = (e_src == 2) ? rfb : (e_src == 1) ? r1 : '0;
    checks++;
    if (o !== e_o || o_valid !== e_valid || o_sel_fb !== e_fb || o_last !== e_last) begin
      failures++;
      $display("FAIL %0t in=%b%b o=%h exp=%h valid=%b/%b fb=%b/%b last=%b/%b", $time, v1, vf,
               o, e_o, o_valid, e_valid, o_sel_fb, e_fb, o_last, e_last);
    end
    @(posedge clk); #1;
    checks++;
    if (active !== e_active_after || int'(count) != e_count_after) begin
      failures++;
      $display("FAIL %0t active=%b/%b count=%0d/%0d", $time, active, e_active_after, count, e_count_after);
    end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    for (int rep = 0; rep < 20; rep++) begin
      // (0,0): nothing offered, output 0
      step(0, 0, 0, 0, 0, 0, 0, 0);
      // (1,0): r1 taken, operation starts
      step(1, 0, 1, 1, 0, 0, 1, 0);
      // r1 offered again while active: discarded
      step(1, 0, 0, 0, 0, 0, 1, 0);
      step(0, 0, 0, 0, 0, 0, 1, 0);
      // (0,1): first fed-back pass
      step(0, 1, 2, 1, 1, 0, 1, 1);
      // (1,1): second fed-back pass has priority, is the last, counter resets
      step(1, 1, 2, 1, 1, 1, 0, 0);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
