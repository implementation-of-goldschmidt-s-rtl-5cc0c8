// gs_divider -- Goldschmidt divider with one shared multiplier pair and
// feedback through a logic block.
//
// Computes Q = N/D for normalised significands N, D in [1, 2). The factor
// K1 ~ 1/D comes from a reciprocal table; MULT 1 and MULT 2 form q1 = K1*N
// and r1 = K1*D. From then on a single pair of multipliers does every
// iteration: the logic block picks r1 the first time and the fed-back r_i
// afterwards, the 2's complement block turns it into K_{i+1} = 2 - r_i, and
// MULT X / MULT Y form q_{i+1} = K_{i+1}*q_i and r_{i+1} = K_{i+1}*r_i. As
// r_i -> 1, q_i -> N/D. After FB_PASSES fed-back passes (2 by default) the
// last factor K4 is applied to q3 only, MULT Y stays idle, and q4 is the
// quotient. The architecture (one table, MULT 1, MULT 2, one logic block,
// one 2's complement block, MULT X, MULT Y, 4-cycle multiplications) follows
// the published method; the register placement and handshake below are this design's.
//
// Number format: operands are SIG_FRAC+1 bit significands 1.f (hidden bit
// included). Inside, every value is a W-bit unsigned fixed-point word with
// FRAC fraction bits; narrower values are padded with zeros on the right to
// that width before they enter a multiplier. The quotient q is returned in
// that W-bit format (value q * 2^-FRAC), truncated, not rounded.
//
// Timing (one operation at a time, cycles counted from the accepting edge):
//   edge 0            N, D, K1 registered (in_valid && in_ready)
//   edge MUL_LAT      q1, r1 out of MULT 1 / MULT 2
//   +1                logic block + 2's complement, K2 registered
//   +MUL_LAT          q2, r2 out of MULT X / MULT Y, fed back
//   ... one (1 + MUL_LAT) round per factor K2 .. K_{FB_PASSES+2}
//   +1                q registered, out_valid pulses for one cycle
// Latency = MUL_LAT + (FB_PASSES+1)*(MUL_LAT+1) + 1 = 20 cycles by default.
// in_ready is low while an operation is in flight (the multipliers are
// reused, so a new division cannot overlap the feedback rounds).
module gs_divider #(
  parameter int unsigned SIG_FRAC  = gs_pkg::SIG_FRAC,
  parameter int unsigned W         = gs_pkg::W,
  parameter int unsigned FRAC      = gs_pkg::FRAC,
  parameter int unsigned P         = gs_pkg::P,
  parameter int unsigned MUL_LAT   = gs_pkg::MUL_LAT,
  parameter int unsigned FB_PASSES = gs_pkg::FB_PASSES
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              in_valid,
  output logic              in_ready,
  input  logic [SIG_FRAC:0] n_sig,
  input  logic [SIG_FRAC:0] d_sig,
  output logic              out_valid,
  output logic [W-1:0]      q
);

  localparam int unsigned CW = (FB_PASSES < 2) ? 1 : $clog2(FB_PASSES);

  // ---------------- input stage: table lookup and operand alignment ------
  logic [P+1:0] k1_tab;
  logic [W-1:0] n_al, d_al, k1_al;
  logic         s0_valid, busy;

  recip_rom #(.P(P)) u_rom (
    .d_idx (d_sig[SIG_FRAC-1 -: P]),
    .k1    (k1_tab)
  );

  assign in_ready = !busy;

  always_ff @(posedge clk) begin
    if (!rst_n) s0_valid <= 1'b0;
    else        s0_valid <= in_valid && in_ready;
  end

  // Zero-pad the narrower values to the multiplier width n = W.
  always_ff @(posedge clk) begin
    if (in_valid && in_ready) begin
      n_al  <= W'({n_sig, {(FRAC-SIG_FRAC){1'b0}}});
      d_al  <= W'({d_sig, {(FRAC-SIG_FRAC){1'b0}}});
      k1_al <= W'({k1_tab, {(FRAC-P-2){1'b0}}});
    end
  end

  // ---------------- MULT 1, MULT 2 ----------------------------------------
  logic [W-1:0] q1, r1;
  logic         q1_valid, r1_valid;
  logic         unused_t1, unused_t2;

  gs_mult #(.W(W), .FRAC(FRAC), .LAT(MUL_LAT)) u_mult1 (
    .clk, .rst_n, .in_valid(s0_valid), .a(k1_al), .b(n_al), .in_tag(1'b0),
    .out_valid(q1_valid), .p(q1), .out_tag(unused_t1));

  gs_mult #(.W(W), .FRAC(FRAC), .LAT(MUL_LAT)) u_mult2 (
    .clk, .rst_n, .in_valid(s0_valid), .a(k1_al), .b(d_al), .in_tag(1'b0),
    .out_valid(r1_valid), .p(r1), .out_tag(unused_t2));

  // ---------------- logic block and 2's complement ------------------------
  logic [W-1:0]  x_p, y_p;
  logic          x_valid, x_last, y_valid, unused_ty;
  logic [W-1:0]  lb_o, k_next, q_sel;
  logic          lb_valid, lb_sel_fb, lb_last, lb_active, k_in_range;
  logic [CW-1:0] lb_count;

  gs_logic_block #(.W(W), .FB_PASSES(FB_PASSES)) u_logic (
    .clk, .rst_n,
    .r1(r1), .r1_valid(r1_valid),
    .rfb(y_p), .rfb_valid(y_valid),
    .o(lb_o), .o_valid(lb_valid), .o_sel_fb(lb_sel_fb), .o_last(lb_last),
    .active(lb_active), .count(lb_count));

  gs_twos_comp #(.W(W), .FRAC(FRAC)) u_twos (
    .r(lb_o), .k(k_next), .in_range(k_in_range));

  // q follows the same choice as r: q1 first, then the fed-back q_i.
  assign q_sel = lb_sel_fb ? x_p : q1;

  // ---------------- K register (the feedback cycle) -----------------------
  logic [W-1:0] k_reg, qprev_reg, rprev_reg;
  logic         k_valid, k_last;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      k_valid <= 1'b0;
      k_last  <= 1'b0;
    end else begin
      k_valid <= lb_valid;
      k_last  <= lb_last;
    end
  end

  always_ff @(posedge clk) begin
    if (lb_valid) begin
      k_reg     <= k_next;
      qprev_reg <= q_sel;
      rprev_reg <= lb_o;
    end
  end

  // ---------------- MULT X, MULT Y ----------------------------------------
  gs_mult #(.W(W), .FRAC(FRAC), .LAT(MUL_LAT)) u_multx (
    .clk, .rst_n, .in_valid(k_valid), .a(k_reg), .b(qprev_reg), .in_tag(k_last),
    .out_valid(x_valid), .p(x_p), .out_tag(x_last));

  // The last factor only scales q: MULT Y is not started for it.
  gs_mult #(.W(W), .FRAC(FRAC), .LAT(MUL_LAT)) u_multy (
    .clk, .rst_n, .in_valid(k_valid && !k_last), .a(k_reg), .b(rprev_reg), .in_tag(1'b0),
    .out_valid(y_valid), .p(y_p), .out_tag(unused_ty));

  // ---------------- result and operation tracking -------------------------
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      busy      <= 1'b0;
    end else begin
      out_valid <= x_valid && x_last;
      if (in_valid && in_ready)   busy <= 1'b1;
      else if (x_valid && x_last) busy <= 1'b0;
    end
  end

  always_ff @(posedge clk) begin
    if (x_valid && x_last) q <= x_p;
  end

  // MULT X and MULT Y run in lock step on every round but the last.
  a_xy_lockstep: assert property (@(posedge clk) disable iff (!rst_n)
    y_valid == (x_valid && !x_last));
  // The 2's complement rule needs r in (0, 2).
  a_r_in_range: assert property (@(posedge clk) disable iff (!rst_n)
    lb_valid |-> k_in_range);
  // MULT 1 and MULT 2 always finish together.
  a_q1_r1_together: assert property (@(posedge clk) disable iff (!rst_n)
    q1_valid == r1_valid);
  // Only one operation is in flight.
  a_one_op: assert property (@(posedge clk) disable iff (!rst_n)
    s0_valid |-> !lb_active);

endmodule
