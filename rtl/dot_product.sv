// dot_product: one row of the matrix multiplication engine.
//
// The paper's second level of parallelism: the row's input vector and
// weight row are split into P_IN equal chunks, and P_IN MACs each walk
// their own chunk, one element per cycle, at the same offset j. After the
// last element the P_IN partial sums are combined by reduce_sum. Interface:
// w[c] and x[c] are the chunk-c operands at the current offset; en/clr
// drive all MACs together; sum is valid the cycle after the last enabled
// cycle and stays until the next enabled cycle. The timing (one element per
// MAC per cycle) is this design's choice.
module dot_product
  import fastwave_pkg::*;
#(
  parameter int unsigned P_IN = NUM_PARALLEL_IN
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  en,
  input  logic  clr,
  input  data_t w   [P_IN],
  input  data_t x   [P_IN],
  output acc_t  sum
);

  acc_t partial [P_IN];

  for (genvar c = 0; c < int'(P_IN); c++) begin : g_mac
    mac_unit u_mac (
      .clk, .rst_n, .en, .clr,
      .a   (w[c]),
      .b   (x[c]),
      .acc (partial[c])
    );
  end

  reduce_sum #(.N(P_IN)) u_reduce (
    .a   (partial),
    .sum (sum)
  );

endmodule
