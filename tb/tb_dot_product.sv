// tb_dot_product: checks one dot-product row with P_IN = 4 MAC lanes.
//
// Random 4 x CH operand tiles (CH from 1 to 32) are streamed one column
// per cycle; the sum after the last column must equal the full-precision
// dot product of the 4*CH elements, and must hold while en is low.
module tb_dot_product;
  import fastwave_pkg::*;

  localparam int P = 4;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic en = 1'b0, clr = 1'b0;
  data_t w [P], x [P];
  acc_t sum;

  dot_product #(.P_IN(P)) dut (.clk, .rst_n, .en, .clr, .w, .x, .sum);

  int checks = 0, failures = 0;

  initial begin : watchdog
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int c = 0; c < P; c++) begin w[c] = '0; x[c] = '0; end
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int t = 0; t < 80; t++) begin
      int len;
      longint e;
      len = $urandom_range(1, 32);
      e = 0;
      for (int j = 0; j < len; j++) begin
        @(negedge clk);
        en = 1'b1; clr = (j == 0);
        for (int c = 0; c < P; c++) begin
          w[c] = data_t'($urandom);
          x[c] = data_t'($urandom);
          e += longint'(w[c]) * longint'(x[c]);
        end
      end
      @(negedge clk);
      en = 1'b0;
      repeat ($urandom_range(0, 2)) @(negedge clk);
      checks++;
      if (sum != e) begin failures++; $display("FAIL: sum %0d expected %0d", sum, e); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
