// mat_mul_engine: Y = W X + b with two levels of parallelism.
//
// W is M x N, X has N elements, b has M. The paper's two parallelism knobs
// are P_OUT (num_parallel_out) and P_IN (num_parallel_in):
//  * First level: W is processed in chunks of P_OUT rows. Two weight
//    buffers alternate: while the dot products read one, the next chunk is
//    copied from the weight memory into the other ("mem copy").
//  * Second level: each of the P_OUT dot products splits its row into P_IN
//    chunks of CH = N / P_IN elements and runs P_IN MACs in parallel; the
//    partial sums meet in reduce_sum.
// Timing: one weight-memory word (P_OUT * P_IN weights, lane r*P_IN + c
// holding W[rb*P_OUT + r][c*CH + j] at address w_base + rb*CH + j) is
// copied per cycle, and the dot products consume one buffer column per
// cycle, so a chunk takes CH cycles. The copy of chunk rb overlaps the
// compute of chunk rb-1; a full product takes (M/P_OUT + 1) * CH + 2 cycles
// from start to done. Results leave as one beat of P_OUT values per chunk:
// out_y[r] = sat((W X)[rb*P_OUT + r] / 2^19 + b[rb*P_OUT + r]).
// When CH = 1 the column just copied is needed in the next cycle, before
// the buffer holds it; the engine then forwards the memory read data
// directly to the MACs (bypass).
// x and b must stay stable from start until done. start is ignored while
// busy. The double buffering and chunking follow the paper; the memory word
// layout, cycle timing and the bypass are this design's choices.
module mat_mul_engine
  import fastwave_pkg::*;
#(
  parameter int unsigned M      = CHANNELS,
  parameter int unsigned N      = CHANNELS,
  parameter int unsigned P_OUT  = NUM_PARALLEL_OUT,
  parameter int unsigned P_IN   = NUM_PARALLEL_IN,
  parameter int unsigned W_AW   = 10,   // weight memory address width
  localparam int unsigned LANES = P_OUT * P_IN,
  localparam int unsigned CH    = N / P_IN,
  localparam int unsigned NRB   = M / P_OUT,
  localparam int unsigned JW    = (CH  <= 1) ? 1 : $clog2(CH),
  localparam int unsigned RBW   = $clog2(NRB + 1)
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            start,
  input  logic [W_AW-1:0] w_base,
  input  data_t           x [N],
  input  data_t           b [M],
  output logic            busy,
  // weight memory read port (registered read, one cycle latency)
  output logic            w_rd_en,
  output logic [W_AW-1:0] w_rd_addr,
  input  data_t           w_rd_data [LANES],
  // results
  output logic            out_valid,
  output logic [RBW-1:0]  out_rb,
  output data_t           out_y [P_OUT],
  output logic            done,
  // event counter for tests: buffer swaps so far
  output logic [31:0]     swap_count
);

  // ---------------------------------------------------------------- control
  logic            running;
  logic [RBW-1:0]  phase;     // chunk being copied; chunk phase-1 computed
  logic [JW-1:0]   col;
  logic [W_AW-1:0] addr;
  logic            last_col;

  assign last_col = (col == JW'(CH - 1));

  // copy pipeline (memory read latency)
  logic            cp_v;
  logic [JW-1:0]   cp_col;
  logic            cp_bank;

  // emission
  logic            emit_pend;
  logic [RBW-1:0]  emit_rb;

  data_t wbuf [2][CH][LANES];

  logic copying, computing;
  logic cmp_bank;
  assign copying   = running && (phase < RBW'(NRB));
  assign computing = running && (phase != '0);
  assign cmp_bank  = ~phase[0];          // bank of chunk phase-1

  assign w_rd_en   = copying;
  assign w_rd_addr = addr;
  assign busy      = running || emit_pend;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      running    <= 1'b0;
      phase      <= '0;
      col        <= '0;
      addr       <= '0;
      cp_v       <= 1'b0;
      cp_col     <= '0;
      cp_bank    <= 1'b0;
      swap_count <= '0;
    end else begin
      cp_v    <= copying;
      cp_col  <= col;
      cp_bank <= phase[0];
      if (!busy && start) begin
        running <= 1'b1;
        phase   <= '0;
        col     <= '0;
        addr    <= w_base;
      end else if (running) begin
        if (copying) addr <= addr + 1'b1;
        if (last_col) begin
          col   <= '0;
          phase <= phase + 1'b1;
          if (phase != '0) swap_count <= swap_count + 1;
          if (phase == RBW'(NRB)) running <= 1'b0;
        end else begin
          col <= col + 1'b1;
        end
      end
    end
  end

  // weight buffers: filled from the memory read data
  always_ff @(posedge clk) begin
    if (cp_v) wbuf[cp_bank][cp_col] <= w_rd_data;
  end

  // --------------------------------------------------------- dot products
  data_t wcol [LANES];
  always_comb begin
    if (cp_v && cp_bank == cmp_bank && cp_col == col) wcol = w_rd_data;  // bypass
    else                                             wcol = wbuf[cmp_bank][col];
  end

  data_t xin [P_IN];
  always_comb begin
    for (int c = 0; c < int'(P_IN); c++) xin[c] = x[c*CH + int'(col)];
  end

  acc_t sums [P_OUT];
  for (genvar r = 0; r < int'(P_OUT); r++) begin : g_row
    data_t wrow [P_IN];
    for (genvar c = 0; c < int'(P_IN); c++) begin : g_lane
      assign wrow[c] = wcol[r*P_IN + c];
    end
    dot_product #(.P_IN(P_IN)) u_dot (
      .clk, .rst_n,
      .en  (computing),
      .clr (col == '0),
      .w   (wrow),
      .x   (xin),
      .sum (sums[r])
    );
  end

  // -------------------------------------------------------------- results
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      emit_pend <= 1'b0;
      emit_rb   <= '0;
      out_valid <= 1'b0;
      out_rb    <= '0;
      done      <= 1'b0;
    end else begin
      out_valid <= 1'b0;
      done      <= 1'b0;
      emit_pend <= computing && last_col;
      if (computing && last_col) emit_rb <= phase - 1'b1;
      if (emit_pend) begin
        out_valid <= 1'b1;
        out_rb    <= emit_rb;
        done      <= (emit_rb == RBW'(NRB - 1));
      end
    end
  end

  always_ff @(posedge clk) begin
    if (emit_pend)
      for (int r = 0; r < int'(P_OUT); r++)
        out_y[r] <= acc_to_data(sums[r], b[int'(emit_rb)*P_OUT + r]);
  end

  // ------------------------------------------------------------ assertions
  initial begin
    assert (N % P_IN == 0)  else $error("N must be a multiple of P_IN");
    assert (M % P_OUT == 0) else $error("M must be a multiple of P_OUT");
  end

  a_no_start_busy: assert property (@(posedge clk) disable iff (!rst_n)
    start |-> !busy) else $error("start while busy");

endmodule
