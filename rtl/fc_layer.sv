// fc_layer: the fully connected output layer with arg-max sampling.
//
// Computes FinalOutput = W * ConvOut + b for an FC_IN-element input and
// FC_OUT outputs (100 -> 256 in the paper's network) on its own matrix
// multiplication engine (num_parallel_out = 8, num_parallel_in = 4 as in
// the paper's best design), and passes the results straight into the
// arg-max unit; no softmax is computed. W (tap 0, row = output, col =
// input) and b (tap 1, row = output) are written by the host through wr
// when its layer field equals LAYER_ID. Interface: pulse start with x_in
// stable until done; done pulses with sample_idx (the chosen quantization
// level) and sample_score (its FC output). Latency: (FC_OUT/P_OUT + 1) *
// FC_IN/P_IN + 3 cycles. W is stored output-major (the transpose of the
// paper's channels x OutputSize matrix); the arithmetic is the same.
module fc_layer
  import fastwave_pkg::*;
#(
  parameter int unsigned LAYER_ID = 28,
  parameter int unsigned N        = FC_IN,
  parameter int unsigned M        = FC_OUT,
  parameter int unsigned P_OUT    = NUM_PARALLEL_OUT,
  parameter int unsigned P_IN     = NUM_PARALLEL_IN,
  localparam int unsigned LANES   = P_OUT * P_IN,
  localparam int unsigned CH      = N / P_IN,
  localparam int unsigned NRB     = M / P_OUT,
  localparam int unsigned DEPTH   = NRB * CH,
  localparam int unsigned W_AW    = (DEPTH <= 1) ? 1 : $clog2(DEPTH),
  localparam int unsigned LW      = (LANES <= 1) ? 1 : $clog2(LANES),
  localparam int unsigned IW      = $clog2(M)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  data_t         x_in [N],
  output logic          busy,
  output logic          done,
  output logic [IW-1:0] sample_idx,
  output data_t         sample_score,
  input  wr_req_t       wr
);

  // -------------------------------------------------------- weights / bias
  logic            w_rd_en;
  logic [W_AW-1:0] w_rd_addr;
  data_t           w_rd_data [LANES];
  logic            sel, wm_en;
  logic [W_AW-1:0] wm_addr;
  logic [LW-1:0]   wm_lane;
  data_t           bias [M];

  always_comb begin
    int unsigned row, col;
    row     = 32'(wr.row);
    col     = 32'(wr.col);
    sel     = wr.valid && (32'(wr.layer) == LAYER_ID) && row < M;
    wm_en   = sel && !wr.tap && col < N;
    wm_addr = W_AW'((row / P_OUT) * CH + col % CH);
    wm_lane = LW'((row % P_OUT) * P_IN + col / CH);
  end

  always_ff @(posedge clk) begin
    if (sel && wr.tap) bias[wr.row[IW-1:0]] <= wr.data;
  end

  weight_memory #(.LANES(LANES), .DEPTH(DEPTH)) u_wmem (
    .clk,
    .wr_en   (wm_en),
    .wr_addr (wm_addr),
    .wr_lane (wm_lane),
    .wr_data (wr.data),
    .rd_en   (w_rd_en),
    .rd_addr (w_rd_addr),
    .rd_data (w_rd_data)
  );

  // ----------------------------------------------------------------- engine
  logic            mm_busy, mm_valid, mm_done;
  logic [$clog2(NRB+1)-1:0] mm_rb;
  data_t           mm_y [P_OUT];
  logic [31:0]     mm_swaps;

  mat_mul_engine #(.M(M), .N(N), .P_OUT(P_OUT), .P_IN(P_IN), .W_AW(W_AW)) u_mme (
    .clk, .rst_n,
    .start      (start),
    .w_base     ('0),
    .x          (x_in),
    .b          (bias),
    .busy       (mm_busy),
    .w_rd_en, .w_rd_addr, .w_rd_data,
    .out_valid  (mm_valid),
    .out_rb     (mm_rb),
    .out_y      (mm_y),
    .done       (mm_done),
    .swap_count (mm_swaps)
  );

  // ---------------------------------------------------------------- argmax
  argmax_unit #(.M(M), .P(P_OUT)) u_argmax (
    .clk, .rst_n,
    .in_valid  (mm_valid),
    .in_first  (mm_rb == '0),
    .in_last   (mm_done),
    .in_rb     (mm_rb),
    .in_y      (mm_y),
    .out_valid (done),
    .out_idx   (sample_idx),
    .out_max   (sample_score)
  );

  logic am_pend;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)       am_pend <= 1'b0;
    else if (mm_done) am_pend <= 1'b1;
    else if (done)    am_pend <= 1'b0;
  end
  assign busy = mm_busy || am_pend;

endmodule
