// gs_mult -- pipelined n-bit fixed-point multiplier (MULT 1, MULT 2, MULT X
// and MULT Y of the divider are all instances of it).
//
// The multiplier takes two W-bit unsigned fixed-point operands with FRAC
// fraction bits and returns their product in the same format: the full
// 2W-bit product is cut to bits [FRAC+W-1 : FRAC], i.e. truncated below
// 2^-FRAC. Operands narrower than W bits (K_1, the significands N and D) are
// padded with zeros by the divider before they reach this unit, so that one
// multiplier of width n serves every step, as the published method proposes.
//
// Timing: a product presented with in_valid appears LAT cycles later with
// out_valid (LAT = 4, the multiplication latency the published method assumes). The
// unit is fully pipelined and accepts one operand pair per cycle. A tag
// (TAG_W bits) travels with each operation; the divider uses it to mark the
// last iteration. The product is formed in the first stage and then carried
// through LAT-1 more registers, which a synthesis tool may retime into the
// multiplier array. Only the valid bits are reset (synchronous, rst_n
// active low).
module gs_mult #(
  parameter int unsigned W     = gs_pkg::W,
  parameter int unsigned FRAC  = gs_pkg::FRAC,
  parameter int unsigned LAT   = gs_pkg::MUL_LAT,
  parameter int unsigned TAG_W = 1
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  input  logic [W-1:0]     a,
  input  logic [W-1:0]     b,
  input  logic [TAG_W-1:0] in_tag,
  output logic             out_valid,
  output logic [W-1:0]     p,
  output logic [TAG_W-1:0] out_tag
);

  logic [2*W-1:0]   full;
  logic [W-1:0]     stage_p   [LAT];
  logic [TAG_W-1:0] stage_tag [LAT];
  logic [LAT-1:0]   stage_v;

  assign full = {{W{1'b0}}, a} * {{W{1'b0}}, b};

  always_ff @(posedge clk) begin
    if (!rst_n) stage_v <= '0;
    else begin
      stage_v[0] <= in_valid;
      for (int s = 1; s < LAT; s++) stage_v[s] <= stage_v[s-1];
    end
  end

  always_ff @(posedge clk) begin
    stage_p[0]   <= full[FRAC +: W];
    stage_tag[0] <= in_tag;
    for (int s = 1; s < LAT; s++) begin
      stage_p[s]   <= stage_p[s-1];
      stage_tag[s] <= stage_tag[s-1];
    end
  end

  assign out_valid = stage_v[LAT-1];
  assign p         = stage_p[LAT-1];
  assign out_tag   = stage_tag[LAT-1];

endmodule
