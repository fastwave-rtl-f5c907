// tb_cyclic_queue: checks the circular convolutional queue.
//
// Queue of length 5 (not a power of two, so the pointer wrap is explicit)
// with 3-element vectors, and a length-1 queue. Random vectors are pushed
// with a simultaneous pop, as a layer does; each pop must return the
// vector pushed QLEN steps earlier, or zeros while fewer than QLEN vectors
// have been pushed since the last clear. Also checks full, the wrap
// counter, pops without push and a clear in the middle.
module tb_cyclic_queue;
  import fastwave_pkg::*;

  localparam int QL = 5, WD = 3;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic clear = 1'b0, pop = 1'b0, push = 1'b0;
  data_t pd [WD], wd [WD], pd1 [1], wd1 [1];
  logic full, full1;
  logic [31:0] wraps, wraps1;

  cyclic_queue #(.QLEN(QL), .WIDTH(WD)) dut (.clk, .rst_n, .clear, .pop, .pop_data(pd),
    .push, .push_data(wd), .full, .wraps);
  cyclic_queue #(.QLEN(1), .WIDTH(1)) dut1 (.clk, .rst_n, .clear, .pop, .pop_data(pd1),
    .push, .push_data(wd1), .full(full1), .wraps(wraps1));

  int checks = 0, failures = 0;
  data_t hist [$][WD];
  data_t hist1 [$];

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic step(bit do_push);
    data_t v [WD];
    data_t e [WD];
    data_t e1;
    for (int i = 0; i < WD; i++) v[i] = data_t'($urandom);
    for (int i = 0; i < WD; i++) e[i] = (hist.size() >= QL) ? hist[hist.size() - QL][i] : '0;
    e1 = (hist1.size() >= 1) ? hist1[hist1.size() - 1] : '0;
    @(negedge clk);
    pop = 1'b1; push = do_push; wd = v; wd1[0] = v[0];
    @(negedge clk);
    pop = 1'b0; push = 1'b0;
    for (int i = 0; i < WD; i++)
      check(pd[i] == e[i], $sformatf("pop[%0d] after %0d pushes: %0d vs %0d", i, hist.size(), pd[i], e[i]));
    check(pd1[0] == e1, "length-1 queue pop");
    if (do_push) begin
      hist.push_back(v);
      hist1.push_back(v[0]);
    end
    check(full == (hist.size() >= QL), "full flag");
  endtask

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < WD; i++) wd[i] = '0;
    wd1[0] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int s = 0; s < 23; s++) step(1'b1);
    check(wraps == 32'(23 / QL), $sformatf("wraps %0d", wraps));
    check(wraps1 == 32'd23, "length-1 wraps");
    step(1'b0);                                    // pop only: pointer stays
    step(1'b0);
    @(negedge clk);
    clear = 1'b1;
    @(negedge clk);
    clear = 1'b0;
    hist.delete();
    hist1.delete();
    for (int s = 0; s < 12; s++) step(1'b1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
