// omp_top: 16 OMP reconstruction blocks in parallel, one 1024-sample signal at a time.
//
// A 1024-sample signal (for an image: sixteen 8x8 blocks) is reconstructed from 16 x 16
// = 256 measurements by sixteen independent omp_core blocks, each solving its own
// 64-sample block with up to 8 iterations, so the whole signal may hold up to 128
// non-zero transform coefficients. Sixteen parallel blocks of length 64 is the
// configuration the paper reports its timing and resources for. The blocks start
// together; since each one stops on its own quit condition they may finish at different
// times, and this top gathers their done pulses and raises done once all have finished.
// That gathering is this design's own. The per-block selection order (sel_index,
// sel_value of omp_core) is not brought out here; the final index set is.
//
// Interface: start (taken when ready) with y[b][i], measurement i of block b. done
// pulses once when every block has finished; x_hat[b][n] is sample n of block b and
// stays valid until the next start. n_iter[b], support[b] and quit[b] describe how each
// block ended. Latency: the slowest block plus one cycle, at most 60 cycles with the
// defaults, inside the 109 cycles (0.818 us at 133.33 MHz) the paper reports.
module omp_top
  import omp_pkg::*;
#(
  parameter int unsigned NUM_BLOCKS = NUM_BLOCKS_DEF,
  parameter int unsigned N          = N_DEF,
  parameter int unsigned M          = M_DEF,
  parameter int unsigned K          = K_DEF,
  parameter int unsigned FRAC       = FRAC_DEF
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     start,
  input  logic [Y_W-1:0]           y       [NUM_BLOCKS][M],
  output logic                     ready,
  output logic                     done,
  output logic signed [X_W-1:0]    x_hat   [NUM_BLOCKS][N],
  output logic signed [R_W-1:0]    theta   [NUM_BLOCKS][M],
  output logic [M-1:0]             support [NUM_BLOCKS],
  output logic [$clog2(K+1)-1:0]   n_iter  [NUM_BLOCKS],
  output quit_e                    quit    [NUM_BLOCKS]
);

  logic [NUM_BLOCKS-1:0] blk_ready, blk_done, finished;
  logic                  busy;

  for (genvar b = 0; b < NUM_BLOCKS; b++) begin : g_blk
    logic [$clog2(M)-1:0] sel_index [K-1];
    logic [Y_W-1:0]       sel_value [K-1];

    omp_core #(.N(N), .M(M), .K(K), .FRAC(FRAC)) u_core (
      .clk       (clk),
      .rst_n     (rst_n),
      .start     (start && ready),
      .y         (y[b]),
      .ready     (blk_ready[b]),
      .done      (blk_done[b]),
      .x_hat     (x_hat[b]),
      .theta     (theta[b]),
      .support   (support[b]),
      .n_iter    (n_iter[b]),
      .quit      (quit[b]),
      .sel_index (sel_index),
      .sel_value (sel_value)
    );
  end

  assign ready = !busy && (&blk_ready);

  // finished collects the blocks that are done; done pulses when the last one arrives.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy     <= 1'b0;
      finished <= '0;
      done     <= 1'b0;
    end else begin
      done <= 1'b0;
      if (start && ready) begin
        busy     <= 1'b1;
        finished <= '0;
      end else if (busy) begin
        if ((finished | blk_done) == '1) begin
          busy     <= 1'b0;
          done     <= 1'b1;
          finished <= '0;
        end else begin
          finished <= finished | blk_done;
        end
      end
    end
  end

endmodule
