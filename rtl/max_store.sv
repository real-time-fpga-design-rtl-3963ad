// max_store: keeps the index set of OMP and the measurements that belong to it.
//
// Every iteration adds one column (Index_Max) and its measurement (the "max value") to
// the store. Column 1 is in the set from the start, because the first dot product is
// skipped and its result fixed to column 1. The store hands back to the least-squares
// step what it needs to extend A_S^T*Y without recomputing it: the number k of columns
// chosen besides column 1, the running sum of their measurements, and the chosen-column
// mask, which the dot product also uses. The stored lists are kept as outputs so the
// index set can be read out with the result. Storing and feeding back the max values
// and indexes follows the paper; the running sum and the mask are this design's form
// of that feedback.
//
// Interface: clear (one cycle) empties the set to {column 1}; wr_en adds wr_index with
// wr_value; the outputs change on the next clock edge. Writing a column twice or more
// than K-1 columns is a protocol error and is asserted against. K must be at least 2.
module max_store
  import omp_pkg::*;
#(
  parameter int unsigned M = M_DEF,
  parameter int unsigned K = K_DEF
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic                         clear,
  input  logic                         wr_en,
  input  logic [$clog2(M)-1:0]         wr_index,
  input  logic [Y_W-1:0]               wr_value,
  output logic [M-1:0]                 chosen,
  output logic [$clog2(K+1)-1:0]       count,
  output logic [Y_W+$clog2(K+1)-1:0]   value_sum,
  output logic [$clog2(M)-1:0]         index_list [K-1],
  output logic [Y_W-1:0]               value_list [K-1]
);

  localparam int unsigned CNT_W = $clog2(K + 1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      chosen    <= M'(1);
      count     <= '0;
      value_sum <= '0;
      for (int i = 0; i < K - 1; i++) begin
        index_list[i] <= '0;
        value_list[i] <= '0;
      end
    end else if (clear) begin
      chosen    <= M'(1);
      count     <= '0;
      value_sum <= '0;
      for (int i = 0; i < K - 1; i++) begin
        index_list[i] <= '0;
        value_list[i] <= '0;
      end
    end else if (wr_en) begin
      chosen[wr_index]  <= 1'b1;
      count             <= count + CNT_W'(1);
      value_sum         <= value_sum + (Y_W+CNT_W)'(wr_value);
      for (int i = 0; i < K - 1; i++) begin
        if (count == CNT_W'(i)) begin
          index_list[i] <= wr_index;
          value_list[i] <= wr_value;
        end
      end
    end
  end

  // A column may enter the set only once, and at most K-1 columns join column 1.
  a_once : assert property (@(posedge clk) disable iff (!rst_n)
                            (wr_en && !clear) |-> !chosen[wr_index])
    else $error("max_store: column %0d written twice", wr_index);
  a_room : assert property (@(posedge clk) disable iff (!rst_n)
                            (wr_en && !clear) |-> (count < CNT_W'(K - 1)))
    else $error("max_store: more than K-1 columns written");

endmodule
