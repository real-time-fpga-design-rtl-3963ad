// tb_frame_workload: reconstructs one whole 8-bit gray frame of each size the design is
// rated for, with the full-size design: 1080p (1920x1080) and 4K (3840x2160) within the
// 120 FPS budget, 8K (7680x4320) within the 30 FPS budget.
// Each frame is synthetic: smooth shading with some textured and some flat areas. It is
// cut into 8x8 blocks, sixteen blocks per run in raster order, measured with the 0/1
// Hadamard measurement matrix and fed run after run as soon as the design is ready.
// Every reconstructed block is compared bit for bit with the reference model. The total
// cycle count of a frame must fit its budget at 133.33 MHz (1 111 111 cycles at 120 FPS,
// 4 444 444 at 30 FPS), and the PSNR of the whole frame is printed.
module tb_frame_workload;
  import omp_pkg::*;
  import omp_ref_pkg::*;

  localparam int NB = 16;
  localparam int CNT_W = $clog2(K+1);

  logic clk = 0, rst_n = 0, start = 0;
  logic [Y_W-1:0]         y       [NB][M];
  logic                   ready, done;
  logic signed [X_W-1:0]  x_hat   [NB][N];
  logic signed [R_W-1:0]  theta   [NB][M];
  logic [M-1:0]           support [NB];
  logic [CNT_W-1:0]       n_iter  [NB];
  quit_e                  quit    [NB];

  longint checks = 0, failures = 0, cyc = 0;

  omp_top dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (20000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Pixel (px, py) of the synthetic frame.
  function automatic int pixel(int px, int py, int W, int H);
    int v;
    v = 40 + (px * 150) / W + (py * 50) / H;
    if (((px / 240) + (py / 270)) % 3 == 0)       // textured tiles
      v += ((px * 7 + py * 13) % 23) - 11;
    else if (((px / 240) + (py / 270)) % 3 == 1)  // flat tiles
      v = 30 + 60 * ((px / 240) % 2);
    return v < 0 ? 0 : (v > 255 ? 255 : v);
  endfunction

  task automatic frame(int W, int H, longint budget);
    pix_t    blk [NB];
    result_t e   [NB];
    real     se;
    longint  c_first, n_zero, n_sparse;
    int      BX, BY, BLOCKS, RUNS;
    BX = W / 8;
    BY = H / 8;
    BLOCKS = BX * BY;
    RUNS = (BLOCKS + NB - 1) / NB;
    se = 0.0;
    n_zero = 0;
    n_sparse = 0;
    while (!ready) @(negedge clk);
    c_first = cyc;
    for (int run = 0; run < RUNS; run++) begin
      for (int b = 0; b < NB; b++) begin
        int g, bx, by;
        yvec_t yv;
        g  = run * NB + b;
        bx = (g < BLOCKS) ? g % BX : 0;
        by = (g < BLOCKS) ? g / BX : 0;
        for (int n = 0; n < N; n++) blk[b][n] = pixel(bx * 8 + n % 8, by * 8 + n / 8, W, H);
        yv = measure(blk[b]);
        for (int j = 0; j < M; j++) y[b][j] = Y_W'(yv[j]);
        e[b] = omp(yv);
      end
      while (!ready) @(negedge clk);
      start = 1;
      @(negedge clk);
      start = 0;
      while (!done) @(negedge clk);
      for (int b = 0; b < NB; b++) begin
        if (run * NB + b >= BLOCKS) continue;
        checks++;
        if (n_iter[b] != CNT_W'(e[b].n_iter)) failures++;
        if (quit[b] == QUIT_ZERO_RES) n_zero++; else n_sparse++;
        for (int n = 0; n < N; n++) begin
          checks++;
          if (int'(x_hat[b][n]) != e[b].x_hat[n]) begin
            failures++;
            if (failures < 10) $display("run %0d block %0d x[%0d] = %0d expected %0d",
                                        run, b, n, x_hat[b][n], e[b].x_hat[n]);
          end
          se += real'((x_hat[b][n] - blk[b][n]) * (x_hat[b][n] - blk[b][n]));
        end
      end
    end
    checks++;
    if (cyc - c_first > budget) begin
      failures++;
      $display("frame took %0d cycles, budget %0d", cyc - c_first, budget);
    end
    $display("%0dx%0d frame: %0d runs, %0d cycles (%0.2f ms at 133.33 MHz), PSNR %0.2f dB",
             W, H, RUNS, cyc - c_first, real'(cyc - c_first) / 133333.3,
             10.0 * $log10(255.0 * 255.0 * real'(W) * real'(H) / se));
    $display("  blocks stopped on zero residual %0d, on the sparsity limit %0d", n_zero, n_sparse);
  endtask

  initial begin
    foreach (y[b, j]) y[b][j] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    frame(1920, 1080, 1111111);
    frame(3840, 2160, 1111111);
    frame(7680, 4320, 4444444);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
