// inv_lut: look-up table that replaces the matrix inversion of the least-squares step.
//
// With column 1 and k further columns chosen, A_S^T*A_S is V^2 times an "arrow" matrix:
// M+3 in the corner, 1 along the rest of the first row, first column and diagonal, 0
// elsewhere. Its inverse is fixed by k alone, and the only factor the least-squares
// step needs from it is 1/(M+3-k) (the reciprocal of the Schur complement of the
// corner). The table holds that factor for k = 0..K-1 with FRAC fractional bits,
// round(2^FRAC/(M+3-k)); it is built from that formula at elaboration. That the
// inverse is read from a table indexed by the iteration follows the paper; reducing the
// table to this one factor per iteration is this design's derivation.
//
// Interface: purely combinational, k_sel -> inv. Values of k_sel >= K give 0.
module inv_lut
  import omp_pkg::*;
#(
  parameter int unsigned M    = M_DEF,
  parameter int unsigned K    = K_DEF,
  parameter int unsigned FRAC = FRAC_DEF
) (
  input  logic [$clog2(K+1)-1:0] k_sel,
  output logic [FRAC:0]          inv
);

  always_comb begin
    inv = '0;
    for (int unsigned k = 0; k < K; k++) begin
      if (k_sel == ($clog2(K+1))'(k)) inv = (FRAC+1)'(inv_entry(M, k, FRAC));
    end
  end

endmodule
