// tb_max_value_lut: loads random measurement vectors and reads every index, checking
// that the value of the addressed column comes back. Default M = 16.
module tb_max_value_lut;
  import omp_pkg::*;

  localparam int M = 16;

  logic [Y_W-1:0]       y [M];
  logic [$clog2(M)-1:0] index;
  logic [Y_W-1:0]       value;
  int checks = 0, failures = 0;
  int ref_y [M];

  max_value_lut dut (.y(y), .index(index), .value(value));

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int v = 0; v < 20; v++) begin
      for (int i = 0; i < M; i++) begin
        ref_y[i] = $urandom_range(0, 65535);
        y[i] = Y_W'(ref_y[i]);
      end
      for (int j = 0; j < M; j++) begin
        index = ($clog2(M))'(j);
        #1;
        checks++;
        if (int'(value) != ref_y[j]) begin
          failures++;
          $display("index %0d value %0d expected %0d", j, value, ref_y[j]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
