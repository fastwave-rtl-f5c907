// tb_weight_memory: checks the lane-addressed weight RAM.
//
// Fills every lane of every word (4 lanes x 64 words) with random values in
// random order, rewrites some, then reads all words back and compares each
// lane with a testbench copy; also checks the one-cycle read latency and
// that rd_en low holds the read data.
module tb_weight_memory;
  import fastwave_pkg::*;

  localparam int LN = 4, D = 64;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic wr_en = 1'b0, rd_en = 1'b0;
  logic [5:0] wr_addr = '0, rd_addr = '0;
  logic [1:0] wr_lane = '0;
  data_t wr_data = '0;
  data_t rd_data [LN];

  weight_memory #(.LANES(LN), .DEPTH(D)) dut (.*);

  int checks = 0, failures = 0;
  data_t shadow [D][LN];

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int k = 0; k < 3; k++)
      for (int a = 0; a < D; a++)
        for (int l = 0; l < LN; l++) begin
          @(negedge clk);
          wr_en = (k == 0) || ($urandom_range(0, 3) == 0);
          wr_addr = 6'(a); wr_lane = 2'(l); wr_data = data_t'($urandom);
          if (wr_en) shadow[a][l] = wr_data;
        end
    @(negedge clk);
    wr_en = 1'b0;
    for (int a = D - 1; a >= 0; a--) begin
      @(negedge clk);
      rd_en = 1'b1; rd_addr = 6'(a);
      @(negedge clk);
      rd_en = 1'b0; rd_addr = 6'(a ^ 1);
      for (int l = 0; l < LN; l++) begin
        checks++;
        if (rd_data[l] != shadow[a][l]) begin
          failures++;
          $display("FAIL: word %0d lane %0d: %0d vs %0d", a, l, rd_data[l], shadow[a][l]);
        end
      end
      @(negedge clk);
      checks++;
      if (rd_data[0] != shadow[a][0]) begin failures++; $display("FAIL: rd_en low changed data"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
