// lsp_unit: the least-squares step of OMP, reduced to shifts, adds and one multiply.
//
// For an index set S = {1} + k further columns, theta = (A_S^T A_S)^-1 A_S^T Y has a
// closed form for this sensing matrix (all values below are V*theta; V is dropped):
//   u        = (A_S^T Y)(1) - sum of y(j) over the k chosen j,  times 1/(M+3-k)
//   theta(1) = u,   theta(j) = y(j) - u for the chosen j,   0 elsewhere.
// The datapath follows the blocks of the paper's LSP figure:
//   multiply with A^T      (A^T Y)(1) = 2*y(1) + y(2) + ... + y(M), formed once when load
//                          is set and kept; later iterations subtract the stored
//                          max values (value_sum) instead of recomputing A_S^T Y;
//   LUT for the inverse    inv_lut, round(2^FRAC/(M+3-k));
//   values in transform domain  theta in fixed point, FRAC fractional bits;
//   multiply with A        (A_S theta)(1) = 2*theta(1), (A_S theta)(i) = theta(1)+theta(i);
//   shift inputs / residual     r(i) = (y(i) << FRAC) - (A_S theta)(i);
//   quit condition         iteration index (k+1) equals K, or every residual element,
//                          shifted back to an integer, is zero;
//   shift output           finish ? theta : residual, shifted right by FRAC with rounding.
// The closed form and the rounding (half up) are this design's derivation and choice.
//
// Timing: in_valid starts a solve; out_valid follows two clock edges later with
// out_data, out_finish (the reconstruction_finish flag) and out_quit. y, chosen, count
// and value_sum must stay stable from in_valid until out_valid.
module lsp_unit
  import omp_pkg::*;
#(
  parameter int unsigned M    = M_DEF,
  parameter int unsigned K    = K_DEF,
  parameter int unsigned FRAC = FRAC_DEF
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       in_valid,
  input  logic                       load,        // first iteration: form A^T Y
  input  logic [Y_W-1:0]             y [M],
  input  logic [M-1:0]               chosen,      // index set, bit 0 always set
  input  logic [$clog2(K+1)-1:0]     count,       // k, columns chosen besides column 1
  input  logic [Y_W+$clog2(K+1)-1:0] value_sum,   // sum of their measurements
  output logic                       out_valid,
  output logic                       out_finish,
  output quit_e                      out_quit,
  output logic signed [R_W-1:0]      out_data [M]
);

  localparam int unsigned ATY_W = Y_W + $clog2(M + 2);

  // ---- multiply with the transpose of the sensing matrix --------------------------
  logic [ATY_W-1:0] aty_comb, aty_q, numer;

  always_comb begin
    aty_comb = ATY_W'(y[0]) << 1;
    for (int i = 1; i < M; i++) aty_comb += ATY_W'(y[i]);
    numer = (load ? aty_comb : aty_q) - ATY_W'(value_sum);
  end

  // ---- LUT for the inverse matrix ----------------------------------------------
  logic [FRAC:0] inv;

  inv_lut #(.M(M), .K(K), .FRAC(FRAC)) u_inv_lut (
    .k_sel (count),
    .inv   (inv)
  );

  // ---- stage 1: u = numer * inverse, in fixed point ------------------------------
  logic                   s1_valid, s1_last;
  logic signed [FX_W-1:0] u_fx;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      aty_q    <= '0;
      s1_valid <= 1'b0;
      s1_last  <= 1'b0;
      u_fx     <= '0;
    end else begin
      s1_valid <= in_valid;
      if (in_valid) begin
        if (load) aty_q <= aty_comb;
        u_fx    <= FX_W'(numer) * FX_W'(inv);
        s1_last <= (count == ($clog2(K+1))'(K - 1));
      end
    end
  end

  // ---- stage 2: theta, A_S*theta, residual, quit condition, shift output ---------
  logic signed [FX_W-1:0] ys_fx    [M];   // shifted inputs
  logic signed [FX_W-1:0] theta_fx [M];
  logic signed [FX_W-1:0] atheta   [M];
  logic signed [FX_W-1:0] res_fx   [M];
  logic signed [R_W-1:0]  res_int  [M];
  logic                   res_zero;

  always_comb begin
    res_zero = 1'b1;
    for (int i = 0; i < M; i++) begin
      ys_fx[i] = FX_W'(y[i]) <<< FRAC;
      if (i == 0)         theta_fx[i] = u_fx;
      else if (chosen[i]) theta_fx[i] = ys_fx[i] - u_fx;
      else                theta_fx[i] = '0;
    end
    for (int i = 0; i < M; i++) begin
      atheta[i]  = (i == 0) ? (theta_fx[0] <<< 1) : (theta_fx[0] + theta_fx[i]);
      res_fx[i]  = ys_fx[i] - atheta[i];
      res_int[i] = fx_round(res_fx[i], FRAC);
      if (res_int[i] != '0) res_zero = 1'b0;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid  <= 1'b0;
      out_finish <= 1'b0;
      out_quit   <= QUIT_NONE;
      for (int i = 0; i < M; i++) out_data[i] <= '0;
    end else begin
      out_valid <= s1_valid;
      if (s1_valid) begin
        out_finish <= s1_last || res_zero;
        out_quit   <= res_zero ? QUIT_ZERO_RES : (s1_last ? QUIT_SPARSITY : QUIT_NONE);
        for (int i = 0; i < M; i++) begin
          out_data[i] <= (s1_last || res_zero) ? fx_round(theta_fx[i], FRAC) : res_int[i];
        end
      end
    end
  end

endmodule
