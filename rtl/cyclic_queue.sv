// cyclic_queue: one layer's convolutional queue as a fixed-length circular array.
//
// Fast-WaveNet keeps, for each layer, the last QLEN input vectors of that
// layer (QLEN = the layer's dilation); the oldest one is the other operand
// of the width-2 dilated convolution. Instead of shifting the queue, the
// vectors sit in a circular array indexed by a pointer modulo QLEN, as in
// the paper: the pointer marks the oldest entry, a pop reads it and a push
// overwrites that same slot with the newest vector and advances the
// pointer. Every pop and push moves a whole vector of WIDTH elements.
// Interface: pop registers the oldest vector onto pop_data in the next
// cycle; push writes push_data. Pop and push may be given in the same cycle
// (the pop then returns the old contents). clear restarts the queue as if
// filled with zeros: until QLEN vectors have been pushed after a clear, a
// pop returns zeros, which is how Fast-WaveNet starts its queues. This
// avoids clearing the array itself (this design's choice). full is high
// once QLEN pushes have happened, wraps counts the times the pointer has
// returned to slot 0.
module cyclic_queue
  import fastwave_pkg::*;
#(
  parameter int unsigned QLEN  = 8192,
  parameter int unsigned WIDTH = CHANNELS,
  localparam int unsigned PW   = (QLEN <= 1) ? 1 : $clog2(QLEN)
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        clear,
  input  logic        pop,
  output data_t       pop_data [WIDTH],
  input  logic        push,
  input  data_t       push_data [WIDTH],
  output logic        full,
  output logic [31:0] wraps
);

  data_t         mem [QLEN][WIDTH];
  logic [PW-1:0] ptr;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ptr   <= '0;
      full  <= 1'b0;
      wraps <= '0;
    end else if (clear) begin
      ptr   <= '0;
      full  <= 1'b0;
    end else if (push) begin
      if (ptr == PW'(QLEN - 1)) begin
        ptr   <= '0;
        full  <= 1'b1;
        wraps <= wraps + 1;
      end else begin
        ptr <= ptr + 1'b1;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (push && !clear) mem[ptr] <= push_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < int'(WIDTH); i++) pop_data[i] <= '0;
    end else if (pop) begin
      if (full) pop_data <= mem[ptr];
      else      for (int i = 0; i < int'(WIDTH); i++) pop_data[i] <= '0;
    end
  end

  a_no_pop_on_clear: assert property (@(posedge clk) disable iff (!rst_n)
    clear |-> !(pop || push)) else $error("pop/push during clear");

endmodule
