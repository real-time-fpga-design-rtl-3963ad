// max_value_lut: fetches the measurement that belongs to the column just chosen.
//
// For a chosen column j > 1 the new entry of A_S^T*Y is V*y(j), so once the dot product
// has produced Index_Max the least-squares step needs only y(Index_Max). The paper
// names this block "LUT of Max Value" without describing it; here it is a read port on
// the block's measurement register, addressed by the index (this design's reading of
// the name).
//
// Interface: purely combinational, index -> value.
module max_value_lut
  import omp_pkg::*;
#(
  parameter int unsigned M = M_DEF
) (
  input  logic [Y_W-1:0]       y [M],
  input  logic [$clog2(M)-1:0] index,
  output logic [Y_W-1:0]       value
);

  always_comb begin
    value = '0;
    for (int j = 0; j < M; j++) begin
      if (index == ($clog2(M))'(j)) value = y[j];
    end
  end

endmodule
