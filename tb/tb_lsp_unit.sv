// tb_lsp_unit: drives the least-squares unit with measurement vectors of test image
// blocks (black, flat, ramp with texture) and of random vectors, and for each with the
// first-iteration set {1} (load) and then random index sets of every size up to K. Each
// answer is compared with the reference model's least-squares step: the output vector
// (residual, or the estimate when finishing), reconstruction_finish, the quit reason, and
// the two-cycle latency. Both quit reasons must occur. Defaults: M = 16, K = 8, FRAC 11.
module tb_lsp_unit;
  import omp_pkg::*;
  import omp_ref_pkg::*;

  localparam int CNT_W = $clog2(K+1);

  logic clk = 0, rst_n = 0, in_valid = 0, load = 0;
  logic [Y_W-1:0]         y [M];
  logic [M-1:0]           chosen = '1;
  logic [CNT_W-1:0]       count = '0;
  logic [Y_W+CNT_W-1:0]   value_sum = '0;
  logic                   out_valid, out_finish;
  quit_e                  out_quit;
  logic signed [R_W-1:0]  out_data [M];

  int checks = 0, failures = 0, n_zero = 0, n_sparse = 0, n_cont = 0;

  lsp_unit dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run_step(yvec_t yv, bit sup [M], bit first);
    lsp_t e;
    int   k, sum;
    k = 0;
    sum = 0;
    for (int j = 0; j < M; j++) begin
      y[j] = Y_W'(yv[j]);
      chosen[j] = sup[j];
      if (j > 0 && sup[j]) begin k++; sum += yv[j]; end
    end
    count     = CNT_W'(k);
    value_sum = (Y_W+CNT_W)'(sum);
    load      = first;
    in_valid  = 1;
    @(negedge clk);
    in_valid  = 0;
    load      = 0;
    checks++;
    if (out_valid) begin failures++; $display("out_valid after one cycle"); end
    @(negedge clk);
    checks++;
    if (!out_valid) begin failures++; $display("out_valid missing after two cycles"); end
    e = lsp(yv, sup);
    checks++;
    if (out_finish != e.finish ||
        out_quit != (e.zero ? QUIT_ZERO_RES : (e.finish ? QUIT_SPARSITY : QUIT_NONE))) begin
      failures++;
      $display("k=%0d finish %0d/%0d quit %0d zero %0d", k, out_finish, e.finish, out_quit, e.zero);
    end
    for (int i = 0; i < M; i++) begin
      longint ev;
      ev = e.finish ? e.theta[i] : e.r[i];
      checks++;
      if (longint'(out_data[i]) != ev) begin
        failures++;
        $display("k=%0d out[%0d] = %0d expected %0d", k, i, out_data[i], ev);
      end
    end
    if (e.zero) n_zero++;
    else if (e.finish) n_sparse++;
    else n_cont++;
  endtask

  initial begin
    foreach (y[j]) y[j] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int v = 0; v < 60; v++) begin
      yvec_t yv;
      bit    sup [M];
      if (v < 2)       yv = measure(make_block(v, 3));
      else if (v < 40) yv = measure(make_block(2, v));
      else for (int j = 0; j < M; j++) yv[j] = (j == 0) ? $urandom_range(8000, 16320)
                                                         : $urandom_range(0, 8160);
      for (int j = 0; j < M; j++) sup[j] = (j == 0);
      run_step(yv, sup, 1);
      for (int s = 0; s < 8; s++) begin
        int k, j;
        k = (s < K) ? s : $urandom_range(0, K - 1);
        for (int i = 0; i < M; i++) sup[i] = (i == 0);
        for (int c = 0; c < k; c++) begin
          do j = $urandom_range(1, M - 1); while (sup[j]);
          sup[j] = 1;
        end
        run_step(yv, sup, 0);
      end
    end
    checks++;
    if (n_zero == 0 || n_sparse == 0 || n_cont == 0) begin
      failures++;
      $display("coverage: zero-residual %0d, sparsity limit %0d, continue %0d",
               n_zero, n_sparse, n_cont);
    end
    $display("quit by zero residual %0d, by sparsity limit %0d, continued %0d",
             n_zero, n_sparse, n_cont);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
