// tb_dilated_conv_layer: checks one dilated convolution layer.
//
// Layer 5 of a small network: 8 input and 8 output channels, queue length
// 3, parallelism 4 x 2, 4 tanh units. Random kernels are written through
// the host port, together with writes addressed to another layer that
// must be ignored. Then 9 steps with random inputs are run; after each the
// output must equal tanh(K0 * x[t-3] + K1 * x[t]) computed by the
// reference model (x[t-3] = 0 for the first 3 steps, and again after a
// clear), and the step must take exactly the predicted number of cycles.
// Kernels are large enough that some tanh inputs saturate.
module tb_dilated_conv_layer;
  import fastwave_pkg::*;
  import fw_ref_pkg::*;

  localparam int IC = 8, OC = 8, QL = 3, PO = 4, PI = 2, TU = 4, ID = 5;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic clear = 1'b0, start = 1'b0, busy, done;
  data_t x_in [IC], y_out [OC];
  wr_req_t wr = '0;

  dilated_conv_layer #(.LAYER_ID(ID), .IC(IC), .OC(OC), .QLEN(QL), .P_OUT(PO),
                       .P_IN(PI), .TANH_UNITS(TU)) dut (.*);

  int checks = 0, failures = 0;
  int K [2][OC][IC];
  int hist [$][IC];

  function automatic int rnd(int lim);
    return $signed($urandom_range(0, 2 * lim)) - lim;
  endfunction

  task automatic wr_one(int layer, int tap, int r, int c, int v);
    @(negedge clk);
    wr.valid = 1'b1; wr.layer = WR_LAYER_W'(layer); wr.tap = tap[0];
    wr.row = WR_IDX_W'(r); wr.col = WR_IDX_W'(c); wr.data = data_t'(v);
  endtask

  task automatic run_step();
    int xv [IC], old [IC];
    int lat, exp_lat;
    for (int i = 0; i < IC; i++) xv[i] = rnd(1 << FRAC);
    for (int i = 0; i < IC; i++) old[i] = (hist.size() >= QL) ? hist[hist.size() - QL][i] : 0;
    @(negedge clk);
    for (int i = 0; i < IC; i++) x_in[i] = data_t'(xv[i]);
    start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    lat = 1;
    while (!done) begin @(negedge clk); lat++; end
    exp_lat = 3 + 2 * ((OC / PO + 1) * (IC / PI) + 2);
    for (int g = 0; g < OC / TU; g++) begin
      bit all_sat;
      all_sat = 1;
      for (int u = 0; u < TU; u++) begin
        int o, o1, y;
        longint acc;
        bit s;
        o = g * TU + u;
        acc = 0;
        for (int i = 0; i < IC; i++) acc += longint'(K[0][o][i]) * longint'(old[i]);
        o1 = fix(acc, 0);
        acc = 0;
        for (int i = 0; i < IC; i++) acc += longint'(K[1][o][i]) * longint'(xv[i]);
        y = tanh_ref(fix(acc, o1), s);
        all_sat &= s;
        checks++;
        if (int'(y_out[o]) != y) begin
          failures++;
          $display("FAIL: step %0d out %0d: %0d vs %0d", hist.size(), o, y_out[o], y);
        end
      end
      exp_lat += all_sat ? 3 : 49;
    end
    checks++;
    if (lat != exp_lat) begin failures++; $display("FAIL: latency %0d vs %0d", lat, exp_lat); end
    hist.push_back(xv);
  endtask

  initial begin : watchdog
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < IC; i++) x_in[i] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int t = 0; t < 2; t++)
      for (int r = 0; r < OC; r++)
        for (int c = 0; c < IC; c++) begin
          K[t][r][c] = rnd(3 << FRAC);
          wr_one(ID, t, r, c, K[t][r][c]);
          wr_one(ID + 1, t, r, c, rnd(1 << FRAC));   // another layer's weight
        end
    @(negedge clk);
    wr = '0;
    for (int s = 0; s < 9; s++) run_step();
    @(negedge clk);
    clear = 1'b1;
    @(negedge clk);
    clear = 1'b0;
    hist.delete();
    for (int s = 0; s < 4; s++) run_step();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
