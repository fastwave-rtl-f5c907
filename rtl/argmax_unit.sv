// argmax_unit: arg-max sampling over a vector that arrives in beats.
//
// The network ends with a fully connected layer of 256 outputs, one per
// quantization level of the audio sample. Instead of a softmax followed by
// sampling, the paper takes the index of the largest output, which makes
// generation deterministic. This unit consumes the FC results as the
// matrix multiplication engine produces them, P values per beat (beat rb
// holds elements rb*P .. rb*P+P-1), and keeps the running maximum. Ties go
// to the lowest index (this design's choice). Interface: in_valid with
// in_rb and in_y; in_first marks the first beat of a vector, in_last the
// last one. out_valid pulses one cycle after the last beat with out_idx
// and out_max, which then hold.
module argmax_unit
  import fastwave_pkg::*;
#(
  parameter int unsigned M    = FC_OUT,
  parameter int unsigned P    = NUM_PARALLEL_OUT,
  localparam int unsigned IW  = $clog2(M),
  localparam int unsigned RBW = $clog2(M / P + 1)
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           in_valid,
  input  logic           in_first,
  input  logic           in_last,
  input  logic [RBW-1:0] in_rb,
  input  data_t          in_y [P],
  output logic           out_valid,
  output logic [IW-1:0]  out_idx,
  output data_t          out_max
);

  // best of this beat, lowest index on ties
  data_t         beat_max;
  logic [IW-1:0] beat_idx;
  always_comb begin
    beat_max = in_y[0];
    beat_idx = IW'(int'(in_rb) * P);
    for (int i = 1; i < int'(P); i++)
      if (in_y[i] > beat_max) begin
        beat_max = in_y[i];
        beat_idx = IW'(int'(in_rb) * P + i);
      end
  end

  data_t         best;
  logic [IW-1:0] best_idx;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      best      <= '0;
      best_idx  <= '0;
      out_valid <= 1'b0;
      out_idx   <= '0;
      out_max   <= '0;
    end else begin
      out_valid <= 1'b0;
      if (in_valid) begin
        data_t         nb;
        logic [IW-1:0] ni;
        if (in_first || beat_max > best) begin
          nb = beat_max;
          ni = beat_idx;
        end else begin
          nb = best;
          ni = best_idx;
        end
        best     <= nb;
        best_idx <= ni;
        if (in_last) begin
          out_valid <= 1'b1;
          out_idx   <= ni;
          out_max   <= nb;
        end
      end
    end
  end

endmodule
