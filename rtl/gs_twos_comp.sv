// gs_twos_comp -- the "2's complement" block: K_{i+1} = 2 - r_i.
//
// In Goldschmidt's iteration the next scaling factor is K_{i+1} = 2 - r_i,
// which the published method computes as the two's complement of r_i. With r_i held in
// the divider's fixed-point format (FRAC fraction bits) and r_i in (0, 2),
// 2 - r_i is exactly the two's complement of the FRAC+1 low bits of r_i
// (one integer bit and FRAC fraction bits): invert them and add one ulp.
// The result lies in (0, 2), so the bits above FRAC are zero.
//
// Interface: r (W bits) in, k (W bits) out, same format. Combinational; the
// divider registers k together with the q and r it will multiply. in_range
// is high when r lies in (0, 2), the range the rule above needs; outside it
// the output is 2 - r modulo 2.
module gs_twos_comp #(
  parameter int unsigned W    = gs_pkg::W,
  parameter int unsigned FRAC = gs_pkg::FRAC
) (
  input  logic [W-1:0] r,
  output logic [W-1:0] k,
  output logic         in_range
);

  logic [FRAC:0] low;

  assign low      = ~r[FRAC:0] + 1'b1;
  assign k        = {{(W-FRAC-1){1'b0}}, low};
  assign in_range = (r[W-1:FRAC+1] == '0) && (r != '0);

endmodule
