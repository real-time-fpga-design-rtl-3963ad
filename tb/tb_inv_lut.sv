// tb_inv_lut: checks every entry of the inverse-matrix table against 2^11/(M+3-k)
// rounded to nearest, computed here in floating point, and that indexes beyond the
// iteration limit read as 0. Defaults: M = 16, K = 8, 11 fractional bits.
module tb_inv_lut;
  import omp_pkg::*;

  localparam int M = 16, K = 8, FRAC = 11;

  logic [$clog2(K+1)-1:0] k_sel;
  logic [FRAC:0]          inv;
  int checks = 0, failures = 0;

  inv_lut dut (.k_sel(k_sel), .inv(inv));

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int k = 0; k < (1 << $clog2(K+1)); k++) begin
      int exp_v;
      k_sel = ($clog2(K+1))'(k);
      #1;
      exp_v = (k < K) ? $rtoi(2.0 ** FRAC / real'(M + 3 - k) + 0.5) : 0;
      checks++;
      if (int'(inv) != exp_v) begin
        failures++;
        $display("k=%0d inv=%0d expected %0d", k, inv, exp_v);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
