// reduce_sum: tree-based vector reduction of N accumulator values.
//
// Follows the paper's reduction scheme: the input array a[] is summed in
// pairs into temp[] ("mode 0"), temp[] is then summed in pairs back into a
// second array ("mode 1"), and the two modes alternate, halving the array
// each level, until a single value is left. Each level is one row of
// adders, so a reduction of N values is a tree of ceil(log2 N) levels. N
// need not be a power of two: the array is padded with zeros to the next
// power of two (this design's choice). The tree is combinational; the
// caller registers the result.
module reduce_sum
  import fastwave_pkg::*;
#(
  parameter int unsigned N = 4
) (
  input  acc_t a   [N],
  output acc_t sum
);

  localparam int unsigned LEVELS = (N <= 1) ? 0 : $clog2(N);
  localparam int unsigned P2     = 1 << LEVELS;

  // lvl[0] is a[] padded; lvl[k] holds P2 >> k partial sums. Even levels
  // play the role of a[], odd levels that of temp[].
  acc_t lvl [LEVELS+1][P2];

  always_comb begin
    for (int k = 0; k <= int'(LEVELS); k++)
      for (int i = 0; i < int'(P2); i++)
        lvl[k][i] = '0;
    for (int i = 0; i < int'(N); i++)
      lvl[0][i] = a[i];
    for (int k = 1; k <= int'(LEVELS); k++)
      for (int i = 0; i < int'(P2 >> k); i++)
        lvl[k][i] = lvl[k-1][2*i] + lvl[k-1][2*i+1];
  end

  assign sum = lvl[LEVELS][0];

endmodule
