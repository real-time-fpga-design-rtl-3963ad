// tb_dot_product: feeds random residual vectors with random index sets, one per cycle
// or with gaps, and checks each index against an argmax computed here: element 1 and
// chosen columns excluded, largest magnitude wins, the lower index on a tie. Residuals
// are drawn from a small range so that ties and all-zero vectors occur. The result
// must arrive log2(M)+1 = 5 cycles after its input. Default M = 16.
module tb_dot_product;
  import omp_pkg::*;

  localparam int M = 16;
  localparam int LAT = $clog2(M) + 1;

  logic clk = 0, rst_n = 0, in_valid = 0, out_valid;
  logic signed [R_W-1:0] residual [M];
  logic [M-1:0]          chosen = '0;
  logic [$clog2(M)-1:0]  index_max;
  int checks = 0, failures = 0, ties = 0;
  int exp_q [$];
  int vin [$];
  int cyc = 0;

  dot_product dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) cyc <= cyc + 1;

  // Outputs are sampled mid-cycle, away from the clock edge.
  always @(negedge clk) begin
    if (out_valid) begin
      int e, t0;
      checks++;
      if (exp_q.size() == 0) begin
        failures++;
        $display("unexpected out_valid");
      end else begin
        e  = exp_q.pop_front();
        t0 = vin.pop_front();
        if (int'(index_max) != e) begin
          failures++;
          $display("index %0d expected %0d", index_max, e);
        end
        checks++;
        if (cyc - t0 != LAT) begin
          failures++;
          $display("latency %0d expected %0d", cyc - t0, LAT);
        end
      end
    end
  end

  initial begin
    foreach (residual[j]) residual[j] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int v = 0; v < 400; v++) begin
      int r [M];
      bit c [M];
      int best, bv, span;
      @(negedge clk);
      span = (v % 2) ? 3 : 3000000;
      for (int j = 0; j < M; j++) begin
        r[j] = int'($urandom_range(0, 2 * span)) - span;
        c[j] = (j == 0) || ($urandom_range(0, 3) == 0);
        residual[j] = R_W'(r[j]);
        chosen[j] = c[j];
      end
      if (v % 7 == 0) for (int j = 0; j < M; j++) begin
        r[j] = 0; residual[j] = '0;
      end
      best = -1; bv = -1;
      for (int j = 1; j < M; j++) begin
        int a;
        a = r[j] < 0 ? -r[j] : r[j];
        if (!c[j] && a == bv) ties++;
        if (!c[j] && a > bv) begin bv = a; best = j; end
      end
      if (best < 0) begin  // every column chosen: cannot happen in OMP, skip
        in_valid = 0;
        continue;
      end
      exp_q.push_back(best);
      vin.push_back(cyc);
      in_valid = 1;
      if (v % 5 == 4) begin
        @(negedge clk);
        in_valid = 0;
      end
    end
    @(negedge clk);
    in_valid = 0;
    repeat (LAT + 2) @(negedge clk);
    checks++;
    if (exp_q.size() != 0 || ties == 0) begin
      failures++;
      $display("%0d results missing, %0d ties seen", exp_q.size(), ties);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
