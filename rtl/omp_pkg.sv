// omp_pkg: constants and constant functions shared by the OMP reconstruction blocks.
//
// The reconstruction works on one 8x8 image block at a time, flattened to a signal of
// N = 64 samples, from M = 16 measurements (sampling rate 0.25), with at most K = 8
// OMP iterations and 11 fractional bits in the fixed-point least-squares step. These
// four numbers are the published design point. The sample width (8-bit pixels) and the
// internal word widths below are this design's own choice, sized for N = 64.
//
// The sensing matrix is never stored. The measurement matrix is the 0/1 form of the
// natural-order (Sylvester) Hadamard matrix, row i being (1 + H(i,:))/2, and the
// transform is the +/-1 Walsh-Hadamard matrix H itself. Their product A has only
// three kinds of non-zero entries (V = N/2):
//   A(1,1) = 2V,  A(i,1) = V and A(i,i) = V for 1 < i <= M,  all other entries 0,
// so every matrix product of OMP collapses to adds, shifts and compares. wh_neg()
// gives the sign of a Walsh-Hadamard entry from the parity of (row & col).
package omp_pkg;

  localparam int unsigned N_DEF          = 64;  // signal length of one block (8x8)
  localparam int unsigned M_DEF          = 16;  // measurements per block
  localparam int unsigned K_DEF          = 8;   // iteration (sparsity) limit, M/2
  localparam int unsigned FRAC_DEF       = 11;  // fractional bits of the fixed point
  localparam int unsigned NUM_BLOCKS_DEF = 16;  // parallel blocks: 16 x 64 = 1024 samples

  localparam int unsigned PIX_W = 8;   // image sample width
  localparam int unsigned Y_W   = 16;  // measurement width, unsigned (N*255 < 2^16)
  localparam int unsigned R_W   = 24;  // integer residual / transform-domain value, signed
  localparam int unsigned FX_W  = 40;  // fixed-point intermediate, signed
  localparam int unsigned X_W   = 16;  // reconstructed sample, signed

  // Why the LSP loop stopped.
  typedef enum logic [1:0] {
    QUIT_NONE     = 2'd0,
    QUIT_SPARSITY = 2'd1,  // iteration index reached K
    QUIT_ZERO_RES = 2'd2   // residual became all zero
  } quit_e;

  // 1 when entry (row, col) of the natural-order Walsh-Hadamard matrix is -1.
  function automatic logic wh_neg(input int unsigned row, input int unsigned col);
    return ^(row & col);
  endfunction

  // Fixed-point inverse-matrix constant for an index set holding column 1 plus k more
  // columns: round(2^frac / (m + 3 - k)).
  function automatic int unsigned inv_entry(input int unsigned m, input int unsigned k,
                                            input int unsigned frac);
    int unsigned s;
    s = m + 3 - k;
    return ((1 << frac) + s / 2) / s;
  endfunction

  // Drop frac fractional bits, rounding half up.
  function automatic logic signed [R_W-1:0] fx_round(input logic signed [FX_W-1:0] v,
                                                     input int unsigned frac);
    logic signed [FX_W-1:0] t;
    t = (v + (FX_W'(1) <<< (frac - 1))) >>> frac;
    return R_W'(t);
  endfunction

endpackage
