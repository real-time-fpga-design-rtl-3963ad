// tb_sampling_rates: runs the reconstruction block at the three sampling rates of the
// quality study, 0.25, 0.5 and 0.75 (M = 16, 32, 48 of N = 64; K = M/2 each), to show
// the RTL holds beyond its default M. M = 48 also exercises the padded comparison tree.
// For each rate:
//  * exactly sparse signals y = A*theta (DC column plus up to K-1 random columns) must
//    give exactly the true support, a zero-residual stop, theta to within 1 and
//    the block H*theta/V to within rounding;
//  * latency must be (T-1)*(L+3) + 3 cycles, L = log2(M)+1 the dot-product latency;
//  * over the same set of smooth textured 8-bit image blocks, the mean squared error must
//    fall as the rate rises (the trend of the quality study); the PSNRs are printed.
module tb_sampling_rates;
  import omp_pkg::*;
  import omp_ref_pkg::wh;
  import omp_ref_pkg::make_block;
  import omp_ref_pkg::pix_t;

  localparam int NR = 3;
  localparam int MS [NR] = '{16, 32, 48};
  localparam int MMAX = 48;
  localparam int BLOCKS = 60;

  logic clk = 0, rst_n = 0;
  logic [NR-1:0] start = '0, ready, done;
  logic [Y_W-1:0] y [MMAX];
  logic signed [X_W-1:0] x_hat [NR][N_DEF];
  logic signed [R_W-1:0] theta [NR][MMAX];
  logic [MMAX-1:0] support [NR];
  logic [5:0] n_iter [NR];
  quit_e quit [NR];

  int checks = 0, failures = 0, cyc = 0;

  for (genvar r = 0; r < NR; r++) begin : g_rate
    localparam int MR = MS[r];
    localparam int KR = MR / 2;
    logic [Y_W-1:0]              y_r [MR];
    logic signed [R_W-1:0]       th_r [MR];
    logic [MR-1:0]               sup_r;
    logic [$clog2(KR+1)-1:0]     ni_r;
    logic [$clog2(MR)-1:0]       si_r [KR-1];
    logic [Y_W-1:0]              sv_r [KR-1];
    for (genvar j = 0; j < MR; j++) begin : g_y
      assign y_r[j] = y[j];
      assign theta[r][j] = th_r[j];
    end
    for (genvar j = MR; j < MMAX; j++) begin : g_pad
      assign theta[r][j] = '0;
    end
    assign support[r] = MMAX'(sup_r);
    assign n_iter[r] = 6'(ni_r);
    omp_core #(.N(N_DEF), .M(MR), .K(KR), .FRAC(FRAC_DEF)) u_core (
      .clk(clk), .rst_n(rst_n), .start(start[r]), .y(y_r), .ready(ready[r]),
      .done(done[r]), .x_hat(x_hat[r]), .theta(th_r), .support(sup_r), .n_iter(ni_r),
      .quit(quit[r]), .sel_index(si_r), .sel_value(sv_r));
  end

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int measure1(pix_t x, int i);
    int s;
    s = 0;
    for (int n = 0; n < N_DEF; n++) if (wh(i, n) == 1) s += x[n];
    return s;
  endfunction

  task automatic run(int r, output int lat);
    int c0;
    while (!ready[r]) @(negedge clk);
    start[r] = 1;
    c0 = cyc;
    @(negedge clk);
    start[r] = 0;
    while (!done[r]) @(negedge clk);
    lat = cyc - (c0 + 1);
  endtask

  task automatic fail(string msg);
    failures++;
    if (failures < 20) $display("%s", msg);
  endtask

  initial begin
    real mse [NR];
    pix_t blk;
    foreach (y[j]) y[j] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int r = 0; r < NR; r++) begin
      int m, k, lat, l;
      m = MS[r];
      k = m / 2;
      l = $clog2(m) + 1;
      // exactly sparse signals
      for (int v = 0; v < 3 * k; v++) begin
        longint th [MMAX];
        bit     sup [MMAX];
        int     s, j;
        s = v % k;
        for (int i = 0; i < MMAX; i++) begin th[i] = 0; sup[i] = (i == 0); end
        th[0] = $urandom_range(1, 15);
        for (int c = 0; c < s; c++) begin
          do j = $urandom_range(1, m - 1); while (sup[j]);
          sup[j] = 1;
          th[j] = $urandom_range(300, 5000);
        end
        y[0] = Y_W'(2 * th[0]);
        for (int i = 1; i < MMAX; i++) y[i] = Y_W'(th[0] + th[i]);
        run(r, lat);
        checks++;
        if (int'(n_iter[r]) != s + 1 || quit[r] != QUIT_ZERO_RES)
          fail($sformatf("M=%0d: %0d iterations, quit %0d, expected %0d, zero residual",
                         m, n_iter[r], quit[r], s + 1));
        checks++;
        if (lat != s * (l + 3) + 3)
          fail($sformatf("M=%0d: latency %0d expected %0d", m, lat, s * (l + 3) + 3));
        for (int i = 0; i < m; i++) begin
          longint d;
          d = theta[r][i] - th[i];
          checks++;
          if (support[r][i] != sup[i] || d > 1 || d < -1)
            fail($sformatf("M=%0d: column %0d support %0d theta %0d, expected %0d %0d",
                           m, i, support[r][i], theta[r][i], sup[i], th[i]));
        end
        for (int n = 0; n < N_DEF; n++) begin
          real xr, d;
          xr = 0.0;
          for (int i = 0; i < m; i++) xr += real'(wh(n, i) * th[i]);
          d = real'(x_hat[r][n]) - xr / real'(N_DEF / 2);
          checks++;
          if (d > 1.5 || d < -1.5)
            fail($sformatf("M=%0d: x[%0d] = %0d expected %f", m, n, x_hat[r][n], xr / 32.0));
        end
      end
    end
    // quality trend over image blocks
    foreach (mse[r]) mse[r] = 0.0;
    for (int v = 0; v < BLOCKS; v++) begin
      blk = make_block(2, 2 + v % 10);
      for (int i = 0; i < MMAX; i++) y[i] = Y_W'(measure1(blk, i));
      for (int r = 0; r < NR; r++) begin
        int lat;
        run(r, lat);
        for (int n = 0; n < N_DEF; n++)
          mse[r] += real'((x_hat[r][n] - blk[n]) * (x_hat[r][n] - blk[n]));
      end
    end
    for (int r = 0; r < NR; r++) begin
      mse[r] = mse[r] / real'(BLOCKS * N_DEF);
      $display("sampling rate %0.2f (M=%0d): PSNR %0.2f dB", real'(MS[r]) / 64.0, MS[r],
               10.0 * $log10(255.0 * 255.0 / mse[r]));
      if (r > 0) begin
        checks++;
        if (!(mse[r] < mse[r-1])) fail("quality does not improve with the sampling rate");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
