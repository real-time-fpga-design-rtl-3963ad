// dot_product: picks the sensing-matrix column that contributes most to the residual.
//
// For this sensing matrix the correlation A^T r reduces to V*r(j) for columns
// 1 < j <= M and to a value that is never wanted for column 1 (column 1 is always in the
// index set), and every column beyond M is zero. The common factor V is dropped, so the
// block only has to find argmax |r(j)|:
//   stage 0   element 1 is forced to 0, the others become absolute values;
//   stages 1..LEVELS  a tree of 2-to-1 comparisons, M/2, M/4, ... 1 comparators.
// This is the structure of the paper's dot-product figure. Registering every stage, the
// tie rule (the lower index wins) and the exclusion of columns already chosen are this
// design's choices: a chosen column has a zero residual, and excluding it keeps the rule
// that each column is chosen once even when every remaining residual rounds to zero.
//
// Interface: in_valid with residual[M] (integers, index 0 is the paper's column 1) and
// chosen[M]; out_valid with index_max (0-based) LEVELS+1 cycles later. Fully pipelined.
module dot_product
  import omp_pkg::*;
#(
  parameter int unsigned M = M_DEF
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        in_valid,
  input  logic signed [R_W-1:0]       residual [M],
  input  logic        [M-1:0]         chosen,
  output logic                        out_valid,
  output logic        [$clog2(M)-1:0] index_max
);

  localparam int unsigned LEVELS = $clog2(M);
  localparam int unsigned P      = 1 << LEVELS;   // M rounded up to a power of two
  localparam int unsigned IDX_W  = LEVELS;
  localparam int unsigned KEY_W  = R_W + 1;       // {eligible, |residual|}

  logic [KEY_W-1:0] key [LEVELS+1][P];
  logic [IDX_W-1:0] idx [LEVELS+1][P];
  logic [LEVELS:0]  vld;

  // Stage 0 makes absolute values with element 1 set to 0; level l+1 of the comparison
  // tree keeps the larger of each pair of level l.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      vld <= '0;
      for (int l = 0; l <= LEVELS; l++) begin
        for (int j = 0; j < P; j++) begin
          key[l][j] <= '0;
          idx[l][j] <= '0;
        end
      end
    end else begin
      vld <= {vld[LEVELS-1:0], in_valid};
      if (in_valid) begin
        for (int j = 0; j < P; j++) begin
          idx[0][j] <= IDX_W'(j);
          if (j == 0 || j >= M) begin
            key[0][j] <= '0;
          end else begin
            key[0][j] <= {~chosen[j],
                          (residual[j] < 0) ? R_W'(-residual[j]) : R_W'(residual[j])};
          end
        end
      end
      for (int l = 0; l < LEVELS; l++) begin
        for (int j = 0; j < (P >> (l + 1)); j++) begin
          if (key[l][2*j] >= key[l][2*j+1]) begin
            key[l+1][j] <= key[l][2*j];
            idx[l+1][j] <= idx[l][2*j];
          end else begin
            key[l+1][j] <= key[l][2*j+1];
            idx[l+1][j] <= idx[l][2*j+1];
          end
        end
      end
    end
  end

  assign out_valid = vld[LEVELS];
  assign index_max = idx[LEVELS][0];

endmodule
