// fastwave_top: the FastWave accelerator (network description module).
//
// Generates audio one sample at a time with a Fast-WaveNet model held
// entirely on chip. The network is NUM_BLOCKS blocks of LAYERS_PER_BLOCK
// dilated convolution layers (filter width 2, dilation and queue length
// 1, 2, 4, ... 2^(LAYERS_PER_BLOCK-1) within each block), CHANNELS channels
// everywhere except the single-channel input of the very first layer, then
// a fully connected layer FC_IN -> FC_OUT and arg-max sampling. The
// defaults are the paper's: 2 x 14 layers, 128 channels, 100 -> 256,
// parallelism num_parallel_out x num_parallel_in = 8 x 4 for every layer
// except the first (1 x 1).
//
// Every layer is its own instance with its own queue, kernels and matrix
// multiplication engine, so each can have its own sizes and parallelism.
// The layers form a chain: a layer starts when the one before it is done,
// and the FC layer starts when the last convolution layer is done. The
// sampled level is turned back into a value in [-1, 1] (256 linear levels)
// and fed to the first layer as the next input: the autoregressive loop.
//
// Interface:
//   wr             host writes of kernels, FC weights and bias, one per
//                  cycle (see fastwave_pkg::wr_req_t); layer index
//                  NUM_BLOCKS*LAYERS_PER_BLOCK selects the FC layer.
//   start, seed,   start a generation of num_samples samples from the input
//   num_samples    value seed; all queues are emptied first. Ignored while
//                  busy.
//   sample_valid   pulses once per generated sample with sample_idx (level
//                  0..FC_OUT-1) and sample_value (its value in [-1, 1]).
//
// The FC layer reads the first FC_IN channels of the last convolution
// layer's output: the paper gives 128 output channels for that layer and a
// 100-input FC layer without saying how they connect, so this is this
// design's choice, as are the seed and sample interface and the channel
// count of the activations.
module fastwave_top
  import fastwave_pkg::*;
#(
  parameter int unsigned N_BLOCKS   = NUM_BLOCKS,
  parameter int unsigned LPB        = LAYERS_PER_BLOCK,
  parameter int unsigned CH         = CHANNELS,
  parameter int unsigned FC_N       = FC_IN,
  parameter int unsigned FC_M       = FC_OUT,
  parameter int unsigned P_OUT      = NUM_PARALLEL_OUT,
  parameter int unsigned P_IN       = NUM_PARALLEL_IN,
  parameter int unsigned P_OUT_1    = 1,
  parameter int unsigned P_IN_1     = 1,
  parameter int unsigned TANH_UNITS = 8,
  localparam int unsigned L         = N_BLOCKS * LPB,
  localparam int unsigned IW        = $clog2(FC_M)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  wr_req_t       wr,
  input  logic          start,
  input  data_t         seed,
  input  logic [31:0]   num_samples,
  output logic          busy,
  output logic          sample_valid,
  output logic [IW-1:0] sample_idx,
  output data_t         sample_value
);

  typedef enum logic [1:0] {S_IDLE, S_CLEAR, S_STEP, S_WAIT} state_t;
  state_t state;

  logic [31:0] produced;
  data_t       cur_x [1];
  logic        clear;
  logic        l_start [L];
  logic        l_done  [L];
  logic        l_busy  [L];
  data_t       act     [L][CH];
  logic        fc_start, fc_done, fc_busy;
  logic [IW-1:0] fc_idx;
  data_t       fc_score;
  data_t       fc_x [FC_N];

  assign clear = (state == S_CLEAR);

  // ------------------------------------------------------------ layer chain
  for (genvar l = 0; l < int'(L); l++) begin : g_layer
    localparam int unsigned QLEN = 1 << (l % LPB);
    if (l == 0) begin : g_first
      assign l_start[0] = (state == S_STEP);
      dilated_conv_layer #(
        .LAYER_ID (0), .IC (1), .OC (CH), .QLEN (QLEN),
        .P_OUT (P_OUT_1), .P_IN (P_IN_1), .TANH_UNITS (TANH_UNITS)
      ) u_layer (
        .clk, .rst_n, .clear,
        .start (l_start[0]),
        .x_in  (cur_x),
        .busy  (l_busy[0]),
        .done  (l_done[0]),
        .y_out (act[0]),
        .wr
      );
    end else begin : g_rest
      assign l_start[l] = l_done[l-1];
      dilated_conv_layer #(
        .LAYER_ID (l), .IC (CH), .OC (CH), .QLEN (QLEN),
        .P_OUT (P_OUT), .P_IN (P_IN), .TANH_UNITS (TANH_UNITS)
      ) u_layer (
        .clk, .rst_n, .clear,
        .start (l_start[l]),
        .x_in  (act[l-1]),
        .busy  (l_busy[l]),
        .done  (l_done[l]),
        .y_out (act[l]),
        .wr
      );
    end
  end

  // ------------------------------------------------------ FC layer + argmax
  always_comb begin
    for (int i = 0; i < int'(FC_N); i++) fc_x[i] = act[L-1][i];
  end
  assign fc_start = l_done[L-1];

  fc_layer #(.LAYER_ID (L), .N (FC_N), .M (FC_M), .P_OUT (P_OUT), .P_IN (P_IN)) u_fc (
    .clk, .rst_n,
    .start        (fc_start),
    .x_in         (fc_x),
    .busy         (fc_busy),
    .done         (fc_done),
    .sample_idx   (fc_idx),
    .sample_score (fc_score),
    .wr
  );

  // ----------------------------------------------------- generation control
  assign busy = (state != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state        <= S_IDLE;
      produced     <= '0;
      cur_x[0]     <= '0;
      sample_valid <= 1'b0;
      sample_idx   <= '0;
      sample_value <= '0;
    end else begin
      sample_valid <= 1'b0;
      unique case (state)
        S_IDLE:  if (start && num_samples != 0) begin
                   cur_x[0] <= seed;
                   produced <= '0;
                   state    <= S_CLEAR;
                 end
        S_CLEAR: state <= S_STEP;
        S_STEP:  state <= S_WAIT;
        S_WAIT:  if (fc_done) begin
                   sample_valid <= 1'b1;
                   sample_idx   <= fc_idx;
                   sample_value <= level_to_data(32'(fc_idx), FC_M);
                   cur_x[0]     <= level_to_data(32'(fc_idx), FC_M);
                   produced     <= produced + 1;
                   state        <= (produced + 1 == num_samples) ? S_IDLE : S_STEP;
                 end
        default: state <= S_IDLE;
      endcase
    end
  end

  initial begin
    assert (FC_N <= CH) else $error("FC_N must not exceed CH");
  end

endmodule
