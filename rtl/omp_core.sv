// omp_core: one OMP reconstruction block, 64 samples from 16 measurements.
//
// The loop of the paper's overall architecture. The first dot product is skipped,
// because with positive measurements column 1 always wins it, so a block starts in
// the least-squares step (lsp_unit) with the index set {column 1}. Each LSP result
// either finishes the block (iteration index reached K, or the residual became zero)
// or is a residual that goes to the dot product (dot_product). The winning index
// selects its measurement (max_value_lut), both are stored (max_store), and the LSP
// runs again on the larger index set. When the LSP reports reconstruction_finish, its
// output (the transform-domain estimate) is multiplied with the transform matrix
// (inverse_transform) to give the reconstructed block.
//
// Controller: IDLE -> LSP_ISSUE -> LSP_WAIT -> (DP_WAIT -> LSP_ISSUE)* -> XF_WAIT -> IDLE.
// The state machine and the handshake are this design's own; the paper gives the
// data flow only.
//
// Interface: start (taken when ready) with y[M]; done pulses for one cycle when x_hat,
// theta, support, n_iter, quit and the selection order are valid. The first n_iter-1
// entries of sel_index/sel_value are meaningful. They stay valid until the next start.
// Latency from the clock edge that takes start to done is 8*T - 5 cycles for T iterations
// (T = 1..K): LSP 2 cycles plus one issue cycle, dot product log2(M)+1 cycles plus one
// store cycle, transform 1 cycle. With K = 8 a block takes at most 59 cycles.
module omp_core
  import omp_pkg::*;
#(
  parameter int unsigned N    = N_DEF,
  parameter int unsigned M    = M_DEF,
  parameter int unsigned K    = K_DEF,
  parameter int unsigned FRAC = FRAC_DEF
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     start,
  input  logic [Y_W-1:0]           y [M],
  output logic                     ready,
  output logic                     done,
  output logic signed [X_W-1:0]    x_hat [N],
  output logic signed [R_W-1:0]    theta [M],
  output logic [M-1:0]             support,
  output logic [$clog2(K+1)-1:0]   n_iter,
  output quit_e                    quit,
  output logic [$clog2(M)-1:0]     sel_index [K-1],  // columns in the order chosen
  output logic [Y_W-1:0]           sel_value [K-1]   // their measurements
);

  localparam int unsigned IDX_W = $clog2(M);
  localparam int unsigned CNT_W = $clog2(K + 1);

  typedef enum logic [2:0] {
    S_IDLE, S_LSP_ISSUE, S_LSP_WAIT, S_DP_WAIT, S_XF_WAIT
  } state_e;

  state_e               state;
  logic [Y_W-1:0]       y_q [M];
  logic                 first_q;

  // ---- store of max values and indexes -------------------------------------------
  logic                 st_clear, st_wr;
  logic [M-1:0]         chosen;
  logic [CNT_W-1:0]     count;
  logic [Y_W+CNT_W-1:0] value_sum;

  // ---- least-squares step --------------------------------------------------------
  logic                 lsp_in_valid, lsp_out_valid, lsp_finish;
  quit_e                lsp_quit;
  logic signed [R_W-1:0] lsp_data [M];

  // ---- dot product and LUT of max value -----------------------------------------
  logic                 dp_in_valid, dp_out_valid;
  logic [IDX_W-1:0]     index_max;
  logic [Y_W-1:0]       max_value;

  // ---- transform ----------------------------------------------------------------
  logic                 xf_in_valid, xf_out_valid;

  assign ready        = (state == S_IDLE);
  assign st_clear     = (state == S_IDLE) && start;
  assign lsp_in_valid = (state == S_LSP_ISSUE);
  assign dp_in_valid  = (state == S_LSP_WAIT) && lsp_out_valid && !lsp_finish;
  assign xf_in_valid  = (state == S_LSP_WAIT) && lsp_out_valid &&  lsp_finish;
  assign st_wr        = (state == S_DP_WAIT) && dp_out_valid;
  assign done         = (state == S_XF_WAIT) && xf_out_valid;
  assign support      = chosen;
  assign n_iter       = count + CNT_W'(1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= S_IDLE;
      first_q <= 1'b0;
      quit    <= QUIT_NONE;
      for (int i = 0; i < M; i++) begin
        y_q[i]   <= '0;
        theta[i] <= '0;
      end
    end else begin
      unique case (state)
        S_IDLE: if (start) begin
          for (int i = 0; i < M; i++) y_q[i] <= y[i];
          first_q <= 1'b1;
          state   <= S_LSP_ISSUE;
        end
        S_LSP_ISSUE: begin
          first_q <= 1'b0;
          state   <= S_LSP_WAIT;
        end
        S_LSP_WAIT: if (lsp_out_valid) begin
          if (lsp_finish) begin
            for (int i = 0; i < M; i++) theta[i] <= lsp_data[i];
            quit  <= lsp_quit;
            state <= S_XF_WAIT;
          end else begin
            state <= S_DP_WAIT;
          end
        end
        S_DP_WAIT: if (dp_out_valid) state <= S_LSP_ISSUE;
        S_XF_WAIT: if (xf_out_valid) state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end

  lsp_unit #(.M(M), .K(K), .FRAC(FRAC)) u_lsp (
    .clk        (clk),
    .rst_n      (rst_n),
    .in_valid   (lsp_in_valid),
    .load       (first_q),
    .y          (y_q),
    .chosen     (chosen),
    .count      (count),
    .value_sum  (value_sum),
    .out_valid  (lsp_out_valid),
    .out_finish (lsp_finish),
    .out_quit   (lsp_quit),
    .out_data   (lsp_data)
  );

  dot_product #(.M(M)) u_dp (
    .clk       (clk),
    .rst_n     (rst_n),
    .in_valid  (dp_in_valid),
    .residual  (lsp_data),
    .chosen    (chosen),
    .out_valid (dp_out_valid),
    .index_max (index_max)
  );

  max_value_lut #(.M(M)) u_mvl (
    .y     (y_q),
    .index (index_max),
    .value (max_value)
  );

  max_store #(.M(M), .K(K)) u_store (
    .clk        (clk),
    .rst_n      (rst_n),
    .clear      (st_clear),
    .wr_en      (st_wr),
    .wr_index   (index_max),
    .wr_value   (max_value),
    .chosen     (chosen),
    .count      (count),
    .value_sum  (value_sum),
    .index_list (sel_index),
    .value_list (sel_value)
  );

  inverse_transform #(.N(N), .M(M)) u_xf (
    .clk       (clk),
    .rst_n     (rst_n),
    .in_valid  (xf_in_valid),
    .theta     (lsp_data),
    .out_valid (xf_out_valid),
    .x_hat     (x_hat)
  );

  // The block accepts a new measurement vector only when idle.
  a_start : assert property (@(posedge clk) disable iff (!rst_n) start |-> ready)
    else $error("omp_core: start while busy");

endmodule
