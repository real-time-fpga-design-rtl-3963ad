// tb_max_store: runs several index sets through the store, each a clear followed by up
// to K-1 writes of distinct random columns (never column 1), and after every write
// compares the chosen mask, the count, the running sum and the ordered lists with a
// model kept here. Defaults: M = 16, K = 8.
module tb_max_store;
  import omp_pkg::*;

  localparam int M = 16, K = 8;
  localparam int CNT_W = $clog2(K+1);

  logic clk = 0, rst_n = 0, clear = 0, wr_en = 0;
  logic [$clog2(M)-1:0]     wr_index = '0;
  logic [Y_W-1:0]           wr_value = '0;
  logic [M-1:0]             chosen;
  logic [CNT_W-1:0]         count;
  logic [Y_W+CNT_W-1:0]     value_sum;
  logic [$clog2(M)-1:0]     index_list [K-1];
  logic [Y_W-1:0]           value_list [K-1];

  int checks = 0, failures = 0;
  bit m_chosen [M];
  int m_count, m_sum, m_idx [K-1], m_val [K-1];

  max_store dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic compare();
    checks++;
    if (int'(count) != m_count || int'(value_sum) != m_sum) begin
      failures++;
      $display("count %0d/%0d sum %0d/%0d", count, m_count, value_sum, m_sum);
    end
    for (int j = 0; j < M; j++) begin
      checks++;
      if (chosen[j] != m_chosen[j]) begin
        failures++;
        $display("chosen[%0d] = %0d expected %0d", j, chosen[j], m_chosen[j]);
      end
    end
    for (int i = 0; i < m_count; i++) begin
      checks++;
      if (int'(index_list[i]) != m_idx[i] || int'(value_list[i]) != m_val[i]) begin
        failures++;
        $display("entry %0d: %0d/%0d expected %0d/%0d", i, index_list[i], value_list[i],
                 m_idx[i], m_val[i]);
      end
    end
  endtask

  task automatic model_clear();
    foreach (m_chosen[j]) m_chosen[j] = (j == 0);
    m_count = 0;
    m_sum = 0;
  endtask

  initial begin
    model_clear();
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    compare();
    for (int set = 0; set < 12; set++) begin
      int nwr;
      clear = 1;
      @(negedge clk);
      clear = 0;
      model_clear();
      compare();
      nwr = (set == 0) ? K - 1 : $urandom_range(1, K - 1);
      for (int w = 0; w < nwr; w++) begin
        int j;
        do j = $urandom_range(1, M - 1); while (m_chosen[j]);
        wr_en    = 1;
        wr_index = ($clog2(M))'(j);
        wr_value = Y_W'($urandom_range(0, 16320));
        m_idx[m_count] = j;
        m_val[m_count] = int'(wr_value);
        m_sum += int'(wr_value);
        m_chosen[j] = 1;
        m_count++;
        @(negedge clk);
        wr_en = 0;
        compare();
        // idle cycles must not change anything
        if ($urandom_range(0, 1)) begin
          @(negedge clk);
          compare();
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
