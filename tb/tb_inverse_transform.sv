// tb_inverse_transform: drives random transform-domain vectors (sparse and dense, both
// signs) and compares every output sample with sum_j H(n,j)*theta(j)/32 rounded half
// up, H taken from the reference package's Walsh-Hadamard function. Checks the one-cycle
// latency, back-to-back inputs included. Defaults: N = 64, M = 16.
module tb_inverse_transform;
  import omp_pkg::*;
  import omp_ref_pkg::wh;

  localparam int N = 64, M = 16;

  logic clk = 0, rst_n = 0, in_valid = 0, out_valid;
  logic signed [R_W-1:0] theta [M];
  logic signed [X_W-1:0] x_hat [N];
  int checks = 0, failures = 0;
  int exp_q [$];   // N expected samples per vector, flattened

  inverse_transform dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Output side: each out_valid must match the oldest pending expectation, and must
  // come exactly one cycle after its in_valid.
  int sent = 0, got = 0;
  logic in_valid_d = 0;
  always @(posedge clk) in_valid_d <= in_valid;

  always @(negedge clk) begin
    checks++;
    if (out_valid !== in_valid_d) begin
      failures++;
      $display("out_valid %0d, in_valid one cycle earlier %0d", out_valid, in_valid_d);
    end
    if (out_valid && exp_q.size() > 0) begin
      int e;
      got++;
      for (int n = 0; n < N; n++) begin
        e = exp_q.pop_front();
        checks++;
        if (int'(x_hat[n]) != e) begin
          failures++;
          $display("vector %0d x[%0d] = %0d expected %0d", got, n, x_hat[n], e);
        end
      end
    end
  end

  initial begin
    foreach (theta[j]) theta[j] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int v = 0; v < 60; v++) begin
      int th [M];
      int e [N];
      @(negedge clk);
      for (int j = 0; j < M; j++) begin
        if (v % 3 == 0 && j > 0 && $urandom_range(0, 3) != 0) th[j] = 0;
        else th[j] = int'($urandom_range(0, 40000)) - 20000;
        theta[j] = R_W'(th[j]);
      end
      for (int n = 0; n < N; n++) begin
        int acc;
        acc = 0;
        for (int j = 0; j < M; j++) acc += wh(n, j) * th[j];
        e[n] = $rtoi($floor((real'(acc) / 32.0) + 0.5));
        exp_q.push_back(e[n]);
      end
      in_valid = 1;
      sent++;
      if (v % 4 == 3) begin
        @(negedge clk);
        in_valid = 0;
      end
    end
    @(negedge clk);
    in_valid = 0;
    repeat (3) @(negedge clk);
    checks++;
    if (got != sent) begin
      failures++;
      $display("sent %0d vectors, got %0d", sent, got);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
