// recip_rom -- the K_1 lookup table of the Goldschmidt divider.
//
// The first scaling factor K_1 ~ 1/D comes from an optimal reciprocal table
// with p bits in and p+2 bits out, as the published method prescribes. The
// index is the p fraction bits of D that follow its hidden leading 1; the
// entry is the reciprocal of the midpoint of the interval those bits select,
// rounded to p+2 fraction bits (formula in gs_pkg::recip_entry). The table is
// built at elaboration time as a constant array, so it synthesises to a ROM or
// to logic; no data file is needed.
//
// Interface: d_idx (P bits) in, k1 (P+2 bits) out, K_1 = k1 * 2^-(P+2), which
// lies in (0.5, 1). Purely combinational; the divider registers the output.
// The table size P = 8 is this design's choice (the published method keeps p symbolic).
module recip_rom #(
  parameter int unsigned P = gs_pkg::P
) (
  input  logic [P-1:0] d_idx,
  output logic [P+1:0] k1
);

  typedef logic [P+1:0] rom_t [2**P];

  function automatic rom_t build_rom();
    rom_t t;
    for (int i = 0; i < 2**P; i++)
      t[i] = (P+2)'(gs_pkg::recip_entry(P, longint'(i)));
    return t;
  endfunction

  localparam rom_t ROM = build_rom();

  assign k1 = ROM[d_idx];

endmodule
