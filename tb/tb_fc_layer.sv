// tb_fc_layer: checks the fully connected layer with arg-max sampling.
//
// 12 inputs, 16 outputs, parallelism 4 x 3. Random W and b are written
// through the host port (tap 0 and tap 1), with writes to other layers
// interleaved. For random input vectors the sampled index and its score
// must equal the arg-max (lowest index on ties) of sat(W x / 2^19 + b),
// and done must come (16/4 + 1) * 12/3 + 3 cycles after start.
module tb_fc_layer;
  import fastwave_pkg::*;
  import fw_ref_pkg::*;

  localparam int N = 12, M = 16, PO = 4, PI = 3, ID = 9;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic start = 1'b0, busy, done;
  data_t x_in [N];
  logic [3:0] sample_idx;
  data_t sample_score;
  wr_req_t wr = '0;

  fc_layer #(.LAYER_ID(ID), .N(N), .M(M), .P_OUT(PO), .P_IN(PI)) dut (.*);

  int checks = 0, failures = 0;
  int W [M][N];
  int B [M];

  function automatic int rnd(int lim);
    return $signed($urandom_range(0, 2 * lim)) - lim;
  endfunction

  task automatic wr_one(int layer, int tap, int r, int c, int v);
    @(negedge clk);
    wr.valid = 1'b1; wr.layer = WR_LAYER_W'(layer); wr.tap = tap[0];
    wr.row = WR_IDX_W'(r); wr.col = WR_IDX_W'(c); wr.data = data_t'(v);
  endtask

  initial begin : watchdog
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < N; i++) x_in[i] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int r = 0; r < M; r++) begin
      for (int c = 0; c < N; c++) begin
        W[r][c] = rnd(1 << FRAC);
        wr_one(ID, 0, r, c, W[r][c]);
        wr_one(ID - 1, 0, r, c, rnd(1 << FRAC));
      end
      B[r] = rnd(1 << FRAC);
      wr_one(ID, 1, r, 0, B[r]);
    end
    @(negedge clk);
    wr = '0;
    for (int t = 0; t < 20; t++) begin
      int xv [N];
      int best, besti, lat;
      for (int i = 0; i < N; i++) xv[i] = rnd(1 << FRAC);
      best = 0; besti = 0;
      for (int m = 0; m < M; m++) begin
        longint acc;
        int v;
        acc = 0;
        for (int i = 0; i < N; i++) acc += longint'(W[m][i]) * longint'(xv[i]);
        v = fix(acc, B[m]);
        if (m == 0 || v > best) begin best = v; besti = m; end
      end
      @(negedge clk);
      for (int i = 0; i < N; i++) x_in[i] = data_t'(xv[i]);
      start = 1'b1;
      @(negedge clk);
      start = 1'b0;
      lat = 1;
      while (!done) begin @(negedge clk); lat++; end
      checks += 3;
      if (int'(sample_idx) != besti) begin failures++; $display("FAIL: idx %0d vs %0d", sample_idx, besti); end
      if (int'(sample_score) != best) begin failures++; $display("FAIL: score %0d vs %0d", sample_score, best); end
      if (lat != (M / PO + 1) * (N / PI) + 3) begin failures++; $display("FAIL: latency %0d", lat); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
