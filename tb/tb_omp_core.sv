// tb_omp_core: end-to-end test of one reconstruction block at the default size
// (N = 64, M = 16, K = 8).
//  * Image blocks (black, flat, textured ramps) and random measurement vectors: every
//    output (estimate, index set, selection order, iteration count, quit reason and
//    the 64 reconstructed samples) must equal the reference model bit for bit.
//  * Exactly sparse signals, y = A*theta with theta on column 1 plus up to 7 random
//    columns: the block must find exactly that support, stop on a zero residual, and
//    return theta and the signal H*theta/V to within rounding.
//  * Latency: done must come 8*T - 5 clock edges after the edge that takes start, for
//    T iterations: per iteration one issue cycle, 2 LSP cycles, 5 dot-product cycles;
//    the last iteration has no dot product but one transform cycle.
module tb_omp_core;
  import omp_pkg::*;
  import omp_ref_pkg::*;

  localparam int CNT_W = $clog2(K+1);

  logic clk = 0, rst_n = 0, start = 0;
  logic [Y_W-1:0]         y [M];
  logic                   ready, done;
  logic signed [X_W-1:0]  x_hat [N];
  logic signed [R_W-1:0]  theta [M];
  logic [M-1:0]           support;
  logic [CNT_W-1:0]       n_iter;
  quit_e                  quit;
  logic [$clog2(M)-1:0]   sel_index [K-1];
  logic [Y_W-1:0]         sel_value [K-1];

  int checks = 0, failures = 0, cyc = 0;
  int n_zero = 0, n_sparse = 0;

  omp_core dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (100000) @(posedge clk);
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

  // Runs one block; returns the latency in clock edges.
  task automatic run(yvec_t yv, output int lat);
    int c0;
    for (int j = 0; j < M; j++) y[j] = Y_W'(yv[j]);
    while (!ready) @(negedge clk);
    start = 1;
    c0 = cyc;
    @(negedge clk);
    start = 0;
    while (!done) @(negedge clk);
    lat = cyc - (c0 + 1);
    if (quit == QUIT_ZERO_RES) n_zero++;
    if (quit == QUIT_SPARSITY) n_sparse++;
  endtask

  task automatic compare_ref(yvec_t yv, int lat);
    result_t e;
    e = omp(yv);
    check("n_iter", n_iter, e.n_iter);
    check("quit", quit, e.zero_quit ? QUIT_ZERO_RES : QUIT_SPARSITY);
    check("latency", lat, 8 * e.n_iter - 5);
    for (int j = 0; j < M; j++) begin
      check("theta", theta[j], e.theta[j]);
      check("support", support[j], e.sup[j]);
    end
    for (int t = 1; t < e.n_iter; t++) begin
      check("order", sel_index[t-1], e.order[t]);
      check("value", sel_value[t-1], yv[e.order[t]]);
    end
    for (int n = 0; n < N; n++) check("x_hat", x_hat[n], e.x_hat[n]);
  endtask

  initial begin
    int lat;
    foreach (y[j]) y[j] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);

    // bit-exact comparison with the reference model
    for (int v = 0; v < 80; v++) begin
      yvec_t yv;
      if (v < 4)       yv = measure(make_block(v % 2, 1 + v));
      else if (v < 60) yv = measure(make_block(2, v));
      else for (int j = 0; j < M; j++) yv[j] = (j == 0) ? $urandom_range(8000, 16320)
                                                         : $urandom_range(0, 8160);
      run(yv, lat);
      compare_ref(yv, lat);
    end

    // exactly sparse signals: support recovery
    for (int v = 0; v < 40; v++) begin
      longint th [M];
      bit     sup [M];
      yvec_t  yv;
      int     s, j;
      s = v % K;
      for (int i = 0; i < M; i++) begin th[i] = 0; sup[i] = (i == 0); end
      th[0] = $urandom_range(1, 60);
      for (int c = 0; c < s; c++) begin
        do j = $urandom_range(1, M - 1); while (sup[j]);
        sup[j] = 1;
        th[j] = $urandom_range(300, 5000);
      end
      yv[0] = int'(2 * th[0]);
      for (int i = 1; i < M; i++) yv[i] = int'(th[0] + th[i]);
      run(yv, lat);
      check("sparse n_iter", n_iter, s + 1);
      check("sparse quit", quit, QUIT_ZERO_RES);
      check("sparse latency", lat, 8 * (s + 1) - 5);
      for (int i = 0; i < M; i++) begin
        longint d;
        check("sparse support", support[i], sup[i]);
        d = theta[i] - th[i];
        checks++;
        if (d > 1 || d < -1) begin
          failures++;
          $display("sparse theta[%0d] = %0d expected %0d", i, theta[i], th[i]);
        end
      end
      for (int n = 0; n < N; n++) begin
        real xr, d;
        xr = 0.0;
        for (int i = 0; i < M; i++) xr += real'(wh(n, i) * th[i]);
        xr = xr / real'(N / 2);
        d = real'(x_hat[n]) - xr;
        checks++;
        if (d > 1.5 || d < -1.5) begin
          failures++;
          $display("sparse x[%0d] = %0d expected %f", n, x_hat[n], xr);
        end
      end
    end

    checks++;
    if (n_zero == 0 || n_sparse == 0) begin
      failures++;
      $display("coverage: zero-residual quits %0d, sparsity-limit quits %0d", n_zero, n_sparse);
    end
    $display("quit by zero residual %0d, by sparsity limit %0d", n_zero, n_sparse);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
