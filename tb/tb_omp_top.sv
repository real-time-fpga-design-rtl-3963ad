// tb_omp_top: end-to-end test of the full design at its default size: sixteen 64-sample
// blocks, a 1024-sample signal (a 32x32 8-bit image cut into 8x8 blocks) per run.
// Each image mixes black, flat and textured blocks, so that within one run some blocks
// stop early on a zero residual while others run the full 8 iterations. Measurements
// are taken here with the 0/1 Hadamard measurement matrix. Every output of every block
// is compared bit for bit with the reference model, and the run time with the slowest
// block: (8*T_max - 5) + 1 cycles, which must also stay within the 109 cycles of the
// paper's 0.818 us at 133.33 MHz. Counted mechanisms, each of which must occur: quit on
// zero residual, quit on the sparsity limit, blocks of one run finishing at different
// times, dot-product iterations, and back-to-back runs. The PSNR of the reconstruction
// of the textured images is printed for information.
module tb_omp_top;
  import omp_pkg::*;
  import omp_ref_pkg::*;

  localparam int NB = 16;
  localparam int CNT_W = $clog2(K+1);
  localparam int RUNS = 6;

  logic clk = 0, rst_n = 0, start = 0;
  logic [Y_W-1:0]         y       [NB][M];
  logic                   ready, done;
  logic signed [X_W-1:0]  x_hat   [NB][N];
  logic signed [R_W-1:0]  theta   [NB][M];
  logic [M-1:0]           support [NB];
  logic [CNT_W-1:0]       n_iter  [NB];
  quit_e                  quit    [NB];

  int checks = 0, failures = 0, cyc = 0;
  int n_zero = 0, n_sparse = 0, n_uneven = 0, n_dp = 0, n_runs = 0;

  omp_top dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(string what, longint got, longint exp_v);
    checks++;
    if (got != exp_v) begin
      failures++;
      $display("%s: %0d expected %0d", what, got, exp_v);
    end
  endtask

  initial begin
    pix_t    blk [NB];
    result_t e   [NB];
    foreach (y[b, j]) y[b][j] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int run = 0; run < RUNS; run++) begin
      int c0, lat, tmax, tmin;
      real se;
      se = 0.0;
      // build the image: block b at (b/4, b%4)
      for (int b = 0; b < NB; b++) begin
        int kind;
        kind = (run == 0) ? 2 : ((b + run) % 5 == 0 ? 0 : ((b + run) % 5 == 1 ? 1 : 2));
        blk[b] = make_block(kind, (kind == 1) ? 2 : 4 * run + b % 7);
        if (run == RUNS - 1) blk[b] = make_block(2, 10 + b);
        begin
          yvec_t yv;
          yv = measure(blk[b]);
          for (int j = 0; j < M; j++) y[b][j] = Y_W'(yv[j]);
          e[b] = omp(yv);
        end
      end
      while (!ready) @(negedge clk);
      start = 1;
      c0 = cyc;
      @(negedge clk);
      start = 0;
      while (!done) @(negedge clk);
      lat = cyc - (c0 + 1);
      n_runs++;
      tmax = 0;
      tmin = K + 1;
      for (int b = 0; b < NB; b++) begin
        if (e[b].n_iter > tmax) tmax = e[b].n_iter;
        if (e[b].n_iter < tmin) tmin = e[b].n_iter;
        check("n_iter", n_iter[b], e[b].n_iter);
        check("quit", quit[b], e[b].zero_quit ? QUIT_ZERO_RES : QUIT_SPARSITY);
        if (quit[b] == QUIT_ZERO_RES) n_zero++;
        if (quit[b] == QUIT_SPARSITY) n_sparse++;
        if (n_iter[b] > 1) n_dp += int'(n_iter[b]) - 1;
        for (int j = 0; j < M; j++) begin
          check("theta", theta[b][j], e[b].theta[j]);
          check("support", support[b][j], e[b].sup[j]);
        end
        for (int n = 0; n < N; n++) begin
          check("x_hat", x_hat[b][n], e[b].x_hat[n]);
          se += real'((x_hat[b][n] - blk[b][n]) * (x_hat[b][n] - blk[b][n]));
        end
      end
      if (tmin != tmax) n_uneven++;
      check("run latency", lat, 8 * tmax - 5 + 1);
      checks++;
      if (lat > 109) begin
        failures++;
        $display("run %0d took %0d cycles, over 109", run, lat);
      end
      $display("run %0d: %0d cycles, iterations %0d..%0d, PSNR %0.2f dB", run, lat, tmin, tmax,
               (se == 0.0) ? 99.0 : 10.0 * $log10(255.0 * 255.0 * 1024.0 / se));
      // the next run starts as soon as the top is ready again
    end
    checks++;
    if (n_zero == 0 || n_sparse == 0 || n_uneven == 0 || n_dp == 0 || n_runs < 2) begin
      failures++;
      $display("coverage missing");
    end
    $display("zero-residual quits %0d, sparsity-limit quits %0d, runs with uneven blocks %0d,",
             n_zero, n_sparse, n_uneven);
    $display("dot-product iterations %0d, back-to-back runs %0d", n_dp, n_runs);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
