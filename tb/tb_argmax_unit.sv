// tb_argmax_unit: checks streaming arg-max over 32 values in beats of 4.
//
// Random vectors (some with many equal values to test the lowest-index
// tie rule, some all-negative) are fed beat by beat with gaps; the index
// and value at out_valid must match a plain search, out_valid must come
// exactly one cycle after the last beat, and a new vector (in_first) must
// forget the previous maximum.
module tb_argmax_unit;
  import fastwave_pkg::*;

  localparam int M = 32, P = 4;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic in_valid = 1'b0, in_first = 1'b0, in_last = 1'b0;
  logic [3:0] in_rb = '0;
  data_t in_y [P];
  logic out_valid;
  logic [4:0] out_idx;
  data_t out_max;

  argmax_unit #(.M(M), .P(P)) dut (.*);

  int checks = 0, failures = 0;

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < P; i++) in_y[i] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int t = 0; t < 60; t++) begin
      data_t v [M];
      int ei;
      for (int i = 0; i < M; i++)
        case (t % 3)
          0: v[i] = data_t'($urandom);
          1: v[i] = data_t'($urandom_range(0, 3));             // many ties
          default: v[i] = -data_t'($urandom_range(1, 1000));   // all negative
        endcase
      ei = 0;
      for (int i = 1; i < M; i++) if (v[i] > v[ei]) ei = i;
      for (int rb = 0; rb < M / P; rb++) begin
        @(negedge clk);
        in_valid = 1'b1; in_first = (rb == 0); in_last = (rb == M / P - 1);
        in_rb = 4'(rb);
        for (int i = 0; i < P; i++) in_y[i] = v[rb * P + i];
        if ($urandom_range(0, 2) == 0 && rb != M / P - 1) begin
          @(negedge clk);
          in_valid = 1'b0;
          checks++;
          if (out_valid) begin failures++; $display("FAIL: early out_valid"); end
        end
      end
      @(negedge clk);
      in_valid = 1'b0;
      checks += 2;
      if (!out_valid) begin failures++; $display("FAIL: no out_valid"); end
      if (int'(out_idx) != ei || out_max != v[ei]) begin
        failures++;
        $display("FAIL: idx %0d max %0d, expected %0d %0d", out_idx, out_max, ei, v[ei]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
