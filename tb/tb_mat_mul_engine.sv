// tb_mat_mul_engine: checks the matrix multiplication engine in three
// configurations: 16 x 12 with 4 x 3 parallelism (4-column chunks), the
// first convolution layer's shape 16 x 1 with 1 x 1 (single-column chunks,
// which need the weight bypass), and 8 x 100 with the paper's 8 x 4 (the
// FC layer's 25-column chunks). See mme_harness for what is compared.
module tb_mat_mul_engine;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic go = 1'b0;
  logic f0, f1, f2;
  int c0, c1, c2, e0, e1, e2;

  mme_harness #(.M(16), .N(12),  .PO(4), .PI(3)) h0 (.clk, .rst_n, .go, .finished(f0), .checks(c0), .failures(e0));
  mme_harness #(.M(16), .N(1),   .PO(1), .PI(1)) h1 (.clk, .rst_n, .go, .finished(f1), .checks(c1), .failures(e1));
  mme_harness #(.M(8),  .N(100), .PO(8), .PI(4)) h2 (.clk, .rst_n, .go, .finished(f2), .checks(c2), .failures(e2));

  initial begin : watchdog
    repeat (50000) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", c0 + c1 + c2, e0 + e1 + e2 + 1);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    go = 1'b1;
    wait (f0 && f1 && f2);
    $display("TB_RESULT checks=%0d failures=%0d", c0 + c1 + c2, e0 + e1 + e2);
    $finish;
  end
endmodule
