// inverse_transform: turns the transform-domain estimate back into image samples.
//
// The transform matrix is the +/-1 Walsh-Hadamard matrix H (natural order), so
//   x(n) = (1/V) * sum over j < M of H(n,j) * theta(j),   V = N/2,
// where theta is the V-scaled estimate that the least-squares step outputs. Columns
// beyond M always have theta = 0 with this sensing matrix and are left out. The signs
// H(n,j) are the parity of (n & j), so no matrix is stored; each output is a signed
// add/subtract tree followed by a rounding shift by log2(V). Which Walsh-Hadamard
// ordering the paper uses is not printed; the natural order is this design's choice,
// paired with the same order in the measurement matrix.
//
// Timing: out_valid and x_hat follow in_valid by one clock edge.
module inverse_transform
  import omp_pkg::*;
#(
  parameter int unsigned N = N_DEF,
  parameter int unsigned M = M_DEF
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     in_valid,
  input  logic signed [R_W-1:0]    theta [M],
  output logic                     out_valid,
  output logic signed [X_W-1:0]    x_hat [N]
);

  localparam int unsigned VSH  = $clog2(N) - 1;       // log2(V)
  localparam int unsigned SUM_W = R_W + $clog2(M) + 1;

  logic signed [SUM_W-1:0] acc [N];

  always_comb begin
    for (int n = 0; n < N; n++) begin
      acc[n] = '0;
      for (int j = 0; j < M; j++) begin
        if (wh_neg(n, j)) acc[n] -= SUM_W'(theta[j]);
        else              acc[n] += SUM_W'(theta[j]);
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      for (int n = 0; n < N; n++) x_hat[n] <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        for (int n = 0; n < N; n++) begin
          x_hat[n] <= X_W'((acc[n] + (SUM_W'(1) <<< (VSH - 1))) >>> VSH);
        end
      end
    end
  end

endmodule
