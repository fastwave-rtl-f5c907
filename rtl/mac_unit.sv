// mac_unit: one multiply-accumulate lane of the matrix multiplication engine.
//
// Each enabled cycle multiplies a weight by an input element (both in the
// common 27-bit fixed-point format) and adds the full-precision product to
// a 64-bit accumulator. With clr high the accumulator restarts from the
// product instead of adding to its old value, so a new dot product begins
// without an idle cycle. The result is available one cycle after the last
// enabled cycle. The paper maps this operation onto DSP slices; the
// accumulator width and the clear-on-first-term convention are this
// design's choices.
module mac_unit
  import fastwave_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  logic  en,    // accumulate a * b this cycle
  input  logic  clr,   // with en: start a new sum from a * b
  input  data_t a,
  input  data_t b,
  output acc_t  acc
);

  acc_t prod;
  assign prod = acc_t'(a) * acc_t'(b);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)       acc <= '0;
    else if (en) begin
      if (clr)        acc <= prod;
      else            acc <= acc + prod;
    end
  end

endmodule
