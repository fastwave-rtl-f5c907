// weight_memory: on-chip storage of one layer's weight matrix.
//
// A simple dual-port RAM, written as an array so that synthesis maps it to
// block RAM. Each address holds LANES weights side by side; a read returns
// the whole word, so one read feeds every MAC lane of the matrix
// multiplication engine (the paper's memory copy into a weight buffer moves
// one such word per cycle). The host writes one weight per cycle, selecting
// the address and the lane. Read data appear one clock after the address
// (registered read). The memory has no reset: its contents are defined only
// once the host has written them. The word layout is this design's choice;
// the paper only says the weights live in on-chip memory.
module weight_memory
  import fastwave_pkg::*;
#(
  parameter int unsigned LANES = NUM_PARALLEL_OUT * NUM_PARALLEL_IN,
  parameter int unsigned DEPTH = 1024,
  localparam int unsigned AW   = (DEPTH <= 1) ? 1 : $clog2(DEPTH),
  localparam int unsigned LW   = (LANES <= 1) ? 1 : $clog2(LANES)
) (
  input  logic          clk,
  // host write port
  input  logic          wr_en,
  input  logic [AW-1:0] wr_addr,
  input  logic [LW-1:0] wr_lane,
  input  data_t         wr_data,
  // engine read port
  input  logic          rd_en,
  input  logic [AW-1:0] rd_addr,
  output data_t         rd_data [LANES]
);

  data_t mem [DEPTH][LANES];

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_addr][wr_lane] <= wr_data;
  end

  always_ff @(posedge clk) begin
    if (rd_en) rd_data <= mem[rd_addr];
  end

endmodule
