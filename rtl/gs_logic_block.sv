// gs_logic_block -- the logic block that lets one pair of multipliers
// (MULT X, MULT Y) perform every Goldschmidt iteration through feedback.
//
// It chooses which r feeds the 2's complement block:
//
//     r1_valid  rfb_valid | o
//     --------------------+-------------
//        1         0      | r1
//        0         1      | rfb  (r_{2,3..i}, fed back from MULT Y)
//        1         1      | rfb
//        0         0      | 0
//
// so the fed-back value has priority, as in the published truth table. A
// counter records how many times a fed-back r has passed. The first pass of
// r1 starts an operation (the block becomes active); while it is active, r1
// is discarded. After FB_PASSES fed-back passes the counter resets and the
// block goes back to taking r1. The pass that is number FB_PASSES (or the r1
// pass itself when FB_PASSES is 0) produces the last factor K of the
// operation, and o_last marks it. With FB_PASSES = 2 the block passes r1, r2,
// r3, which become K2, K3, K4, and q4 is the quotient, as in the published method.
//
// The published description gives the counter both as counting fed-back passes and as
// timing a fixed number of cycles; this block counts passes, which gives the
// same schedule and does not depend on the multiplier latency.
//
// Interface: r1/r1_valid from MULT 2, rfb/rfb_valid from MULT Y. Outputs o,
// o_valid, o_sel_fb (the fed-back input was taken, used by the divider to
// choose q_{i-1} over q1 in the same way), o_last, and the counter value.
// Outputs are combinational from the inputs; the counter and the active flag
// update on the clock edge after a pass.
module gs_logic_block #(
  parameter int unsigned W         = gs_pkg::W,
  parameter int unsigned FB_PASSES = gs_pkg::FB_PASSES,
  localparam int unsigned CW       = (FB_PASSES < 2) ? 1 : $clog2(FB_PASSES)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic [W-1:0]  r1,
  input  logic          r1_valid,
  input  logic [W-1:0]  rfb,
  input  logic          rfb_valid,
  output logic [W-1:0]  o,
  output logic          o_valid,
  output logic          o_sel_fb,
  output logic          o_last,
  output logic          active,
  output logic [CW-1:0] count
);

  logic take_r1, take_fb, fb_done;

  assign take_fb = rfb_valid;
  assign take_r1 = r1_valid && !rfb_valid && !active;
  assign fb_done = take_fb && (int'(count) == int'(FB_PASSES) - 1);

  always_comb begin
    if (take_fb)      o = rfb;
    else if (take_r1) o = r1;
    else              o = '0;
  end

  assign o_valid  = take_fb || take_r1;
  assign o_sel_fb = take_fb;
  assign o_last   = fb_done || (take_r1 && FB_PASSES == 0);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      active <= 1'b0;
      count  <= '0;
    end else if (take_r1) begin
      active <= (FB_PASSES != 0);
      count  <= '0;
    end else if (take_fb) begin
      if (fb_done) begin
        active <= 1'b0;
        count  <= '0;
      end else begin
        count  <= count + 1'b1;
      end
    end
  end

  // A fed-back r only exists inside an operation.
  a_fb_only_when_active: assert property (@(posedge clk) disable iff (!rst_n)
    rfb_valid |-> active);

endmodule
