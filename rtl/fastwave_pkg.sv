// fastwave_pkg: types and constants shared by the FastWave accelerator.
//
// Every value in the datapath (kernels, queue contents, activations, FC
// weights and biases) uses one common signed fixed-point format with 8
// integer bits and 19 fraction bits, 27 bits in all, as the paper's best
// design does. Products are kept at full precision in 64-bit accumulators;
// a result is brought back to the data format by an arithmetic shift
// (rounding toward minus infinity) followed by saturation. The accumulator
// width, the rounding and the saturation are this design's choices.
//
// The package also holds the network's shape (2 blocks of 14 layers, 128
// channels, a 100 -> 256 fully connected layer, parallelism 8 x 4) and the
// host weight-write request used to fill the on-chip memories.
package fastwave_pkg;

  // ---------------------------------------------------------------- numbers
  localparam int unsigned DATA_W = 27;  // ap_fixed<27,8>
  localparam int unsigned FRAC_W = 19;  // fraction bits
  localparam int unsigned ACC_W  = 64;  // MAC accumulator width

  typedef logic signed [DATA_W-1:0] data_t;
  typedef logic signed [ACC_W-1:0]  acc_t;

  localparam data_t DATA_MAX = {1'b0, {(DATA_W-1){1'b1}}};
  localparam data_t DATA_MIN = {1'b1, {(DATA_W-1){1'b0}}};
  localparam data_t ONE      = data_t'(1) <<< FRAC_W;

  // ---------------------------------------------------------- network shape
  localparam int unsigned NUM_BLOCKS       = 2;
  localparam int unsigned LAYERS_PER_BLOCK = 14;
  localparam int unsigned CHANNELS         = 128;
  localparam int unsigned FC_IN            = 100;
  localparam int unsigned FC_OUT           = 256;
  localparam int unsigned NUM_PARALLEL_OUT = 8;
  localparam int unsigned NUM_PARALLEL_IN  = 4;

  // ------------------------------------------------------ host weight write
  // One weight (or bias) per request. layer 0 .. L-1 selects a convolution
  // layer, layer L the fully connected layer. For a convolution layer tap
  // selects K[n][0] (applied to the popped queue entry) or K[n][1] (applied
  // to the previous layer's output); for the FC layer tap 0 writes W and
  // tap 1 writes the bias b (col ignored). row is the output channel, col
  // the input channel.
  localparam int unsigned WR_LAYER_W = 8;
  localparam int unsigned WR_IDX_W   = 10;

  typedef struct packed {
    logic                  valid;
    logic [WR_LAYER_W-1:0] layer;
    logic                  tap;
    logic [WR_IDX_W-1:0]   row;
    logic [WR_IDX_W-1:0]   col;
    data_t                 data;
  } wr_req_t;

  // --------------------------------------------------------------- helpers
  // Bring an accumulator (FRAC_W*2 fraction bits) back to the data format
  // and add an optional data-format offset, saturating at the ends.
  function automatic data_t acc_to_data(acc_t acc, data_t offset);
    acc_t s;
    s = (acc >>> FRAC_W) + acc_t'(offset);
    if (s > acc_t'(DATA_MAX)) return DATA_MAX;
    if (s < acc_t'(DATA_MIN)) return DATA_MIN;
    return data_t'(s);
  endfunction

  // Value of quantization level idx (0..levels-1), spread linearly over
  // [-1, 1]: (2*idx - (levels-1)) / (levels-1), truncated toward zero.
  function automatic data_t level_to_data(int unsigned idx, int unsigned levels);
    longint num;
    num = (longint'(2 * idx) - (longint'(levels) - 1)) * (longint'(1) << FRAC_W);
    return data_t'(num / (longint'(levels) - 1));
  endfunction

endpackage
