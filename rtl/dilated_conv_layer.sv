// dilated_conv_layer: one dilated causal convolution layer of filter width 2.
//
// With the layer's input x = O[n-1] and its queue Q[n] holding the inputs of
// the last QLEN steps (QLEN = dilation), one generation step computes
//     O1 = K[0] * Q[n][0]       (oldest queued input, popped)
//     O2 = K[1] * x
//     O  = tanh(O1 + O2)
// and pushes x into the queue. This is the paper's formulation: two
// matrix-vector products on one matrix multiplication engine followed by a
// vector addition and the tanh activation. The vector addition is done by
// the engine's bias input: the second product is started with b = O1.
// Sequence after start (one pulse, x_in stable until done):
//   POP   pop the oldest vector and push x_in into the same slot
//   MM1   O1 = K[0] * popped vector          (M/P_OUT + 1) * IC/P_IN + 2 cycles
//   MM2   O  = K[1] * x_in + O1              same
//   ACT   tanh on O, TANH_UNITS at a time    OC/TANH_UNITS * 48 cycles
//   done pulses; y_out holds O until the next step.
// The kernels K[2][OC][IC] live in this layer's weight memory, filled by
// the host through wr (requests whose layer field equals LAYER_ID; tap
// selects K[0] or K[1]). clear empties the queue before a new generation.
// The number of tanh units and the cycle-level sequence are this design's
// choices; the paper gives the equations, the queue and the engine.
module dilated_conv_layer
  import fastwave_pkg::*;
#(
  parameter int unsigned LAYER_ID   = 1,
  parameter int unsigned IC         = CHANNELS,
  parameter int unsigned OC         = CHANNELS,
  parameter int unsigned QLEN       = 8192,
  parameter int unsigned P_OUT      = NUM_PARALLEL_OUT,
  parameter int unsigned P_IN       = NUM_PARALLEL_IN,
  parameter int unsigned TANH_UNITS = 8,
  localparam int unsigned LANES     = P_OUT * P_IN,
  localparam int unsigned CH        = IC / P_IN,
  localparam int unsigned NRB       = OC / P_OUT,
  localparam int unsigned DEPTH     = 2 * NRB * CH,
  localparam int unsigned W_AW      = (DEPTH <= 1) ? 1 : $clog2(DEPTH),
  localparam int unsigned LW        = (LANES <= 1) ? 1 : $clog2(LANES),
  localparam int unsigned NG        = OC / TANH_UNITS,
  localparam int unsigned GW        = (NG <= 1) ? 1 : $clog2(NG)
) (
  input  logic    clk,
  input  logic    rst_n,
  input  logic    clear,
  input  logic    start,
  input  data_t   x_in  [IC],
  output logic    busy,
  output logic    done,
  output data_t   y_out [OC],
  input  wr_req_t wr
);

  // ---------------------------------------------------------- weight memory
  logic            w_rd_en;
  logic [W_AW-1:0] w_rd_addr;
  data_t           w_rd_data [LANES];
  logic            wm_en;
  logic [W_AW-1:0] wm_addr;
  logic [LW-1:0]   wm_lane;

  // K[tap][row][col] -> address (tap*NRB + row/P_OUT)*CH + col%CH,
  //                      lane    (row%P_OUT)*P_IN + col/CH
  always_comb begin
    int unsigned row, col;
    row     = 32'(wr.row);
    col     = 32'(wr.col);
    wm_en   = wr.valid && (32'(wr.layer) == LAYER_ID) && row < OC && col < IC;
    wm_addr = W_AW'((32'(wr.tap) * NRB + row / P_OUT) * CH + col % CH);
    wm_lane = LW'((row % P_OUT) * P_IN + col / CH);
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

  // ------------------------------------------------------------------ queue
  typedef enum logic [2:0] {S_IDLE, S_POP, S_MM1, S_MM2S, S_MM2, S_ACTS, S_ACT} state_t;
  state_t state;

  data_t q_out [IC];
  logic  q_op;
  logic  q_full;
  logic [31:0] q_wraps;
  assign q_op = (state == S_IDLE) && start;

  cyclic_queue #(.QLEN(QLEN), .WIDTH(IC)) u_queue (
    .clk, .rst_n, .clear,
    .pop       (q_op),
    .pop_data  (q_out),
    .push      (q_op),
    .push_data (x_in),
    .full      (q_full),
    .wraps     (q_wraps)
  );

  // ----------------------------------------------------------------- engine
  logic            mm_start, mm_busy, mm_valid, mm_done, second;
  logic [$clog2(NRB+1)-1:0] mm_rb;
  data_t           mm_x [IC];
  data_t           mm_b [OC];
  data_t           mm_y [P_OUT];
  data_t           o1   [OC];
  data_t           o    [OC];
  logic [31:0]     mm_swaps;

  assign second   = (state == S_MM2);
  assign mm_start = (state == S_POP) || (state == S_MM2S);
  always_comb begin
    for (int i = 0; i < int'(IC); i++) mm_x[i] = (state == S_MM2S || second) ? x_in[i] : q_out[i];
    for (int i = 0; i < int'(OC); i++) mm_b[i] = (state == S_MM2S || second) ? o1[i] : '0;
  end

  mat_mul_engine #(.M(OC), .N(IC), .P_OUT(P_OUT), .P_IN(P_IN), .W_AW(W_AW)) u_mme (
    .clk, .rst_n,
    .start      (mm_start),
    .w_base     ((state == S_MM2S) ? W_AW'(NRB * CH) : '0),
    .x          (mm_x),
    .b          (mm_b),
    .busy       (mm_busy),
    .w_rd_en, .w_rd_addr, .w_rd_data,
    .out_valid  (mm_valid),
    .out_rb     (mm_rb),
    .out_y      (mm_y),
    .done       (mm_done),
    .swap_count (mm_swaps)
  );

  always_ff @(posedge clk) begin
    if (mm_valid)
      for (int r = 0; r < int'(P_OUT); r++) begin
        if (second) o[int'(mm_rb)*P_OUT + r]  <= mm_y[r];
        else        o1[int'(mm_rb)*P_OUT + r] <= mm_y[r];
      end
  end

  // ------------------------------------------------------------- activation
  logic [GW-1:0] grp;
  logic          th_start;
  logic          th_busy [TANH_UNITS];
  logic          th_done [TANH_UNITS];
  logic          th_sat  [TANH_UNITS];
  data_t         th_y    [TANH_UNITS];
  logic          th_any_busy;
  logic [31:0]   sat_count;

  assign th_start = (state == S_ACTS);
  for (genvar u = 0; u < int'(TANH_UNITS); u++) begin : g_tanh
    tanh_cordic u_tanh (
      .clk, .rst_n,
      .start     (th_start),
      .x         (o[int'(grp)*TANH_UNITS + u]),
      .busy      (th_busy[u]),
      .done      (th_done[u]),
      .y         (th_y[u]),
      .saturated (th_sat[u])
    );
  end

  always_comb begin
    th_any_busy = 1'b0;
    for (int u = 0; u < int'(TANH_UNITS); u++) th_any_busy |= th_busy[u];
  end

  // ------------------------------------------------------------- sequencer
  assign busy = (state != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      grp       <= '0;
      done      <= 1'b0;
      sat_count <= '0;
      for (int i = 0; i < int'(OC); i++) y_out[i] <= '0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE:  if (start) state <= S_POP;
        S_POP:   state <= S_MM1;
        S_MM1:   if (mm_done) state <= S_MM2S;
        S_MM2S:  state <= S_MM2;
        S_MM2:   if (mm_done) begin
                   grp   <= '0;
                   state <= S_ACTS;
                 end
        S_ACTS:  state <= S_ACT;
        S_ACT:   if (!th_any_busy) begin
                   for (int u = 0; u < int'(TANH_UNITS); u++) begin
                     y_out[int'(grp)*TANH_UNITS + u] <= th_y[u];
                     if (th_sat[u]) sat_count <= sat_count + 1;
                   end
                   if (grp == GW'(NG - 1)) begin
                     done  <= 1'b1;
                     state <= S_IDLE;
                   end else begin
                     grp   <= grp + 1'b1;
                     state <= S_ACTS;
                   end
                 end
        default: state <= S_IDLE;
      endcase
    end
  end

  initial begin
    assert (OC % TANH_UNITS == 0) else $error("OC must be a multiple of TANH_UNITS");
  end

  a_no_start_busy: assert property (@(posedge clk) disable iff (!rst_n)
    start |-> !busy) else $error("start while busy");
  a_no_clear_busy: assert property (@(posedge clk) disable iff (!rst_n)
    clear |-> !busy) else $error("clear while busy");

endmodule
