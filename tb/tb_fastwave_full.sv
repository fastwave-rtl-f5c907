// tb_fastwave_full: the accelerator at the paper's size, end to end.
//
// fastwave_top with every parameter at its default: 2 blocks of 14 layers
// (queues up to 8192 x 128 values), 128 channels, FC 100 -> 256,
// parallelism 8 x 4 (1 x 1 in the first layer). All kernels, FC weights
// and biases (910,848 values) are written through the host port with
// random values, then a generation of three samples is run and each sample
// and its cycle count are compared with the reference model (fw_ref_pkg).
// The cycles per generated sample are printed.
module tb_fastwave_full;
  import fastwave_pkg::*;
  import fw_ref_pkg::*;

  localparam int NB = NUM_BLOCKS, LPB = LAYERS_PER_BLOCK, CHN = CHANNELS, FCN = FC_IN, FCM = FC_OUT;
  localparam int PO = NUM_PARALLEL_OUT, PI = NUM_PARALLEL_IN, TU = 8;
  localparam int NS1 = 3;
  localparam int NL = NB * LPB;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  wr_req_t     wr = '0;
  logic        start = 1'b0;
  data_t       seed = '0;
  logic [31:0] num_samples = '0;
  logic        busy, sample_valid;
  logic [$clog2(FCM)-1:0] sample_idx;
  data_t       sample_value;

  fastwave_top dut (.*);

  int checks = 0, failures = 0;
  fw_model model;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  task automatic write_w(int layer, int tap, int row, int col, int val);
    @(negedge clk);
    wr.valid = 1'b1;
    wr.layer = WR_LAYER_W'(layer);
    wr.tap   = tap[0];
    wr.row   = WR_IDX_W'(row);
    wr.col   = WR_IDX_W'(col);
    wr.data  = data_t'(val);
  endtask

  function automatic int rnd(int lim);
    return $signed($urandom_range(0, 2 * lim)) - lim;
  endfunction

  longint cycle = 0;
  always @(posedge clk) cycle++;

  task automatic generate_run(int seed_v, int ns);
    int exp_idx, score, x;
    longint t_last, cyc;
    x = seed_v;
    model.clear();
    @(negedge clk);
    seed = data_t'(seed_v); num_samples = ns; start = 1'b1;
    t_last = cycle + 2;            // edge that issues the first step
    @(negedge clk);
    start = 1'b0;
    for (int s = 0; s < ns; s++) begin
      exp_idx = model.step(x, score);
      while (!sample_valid) @(negedge clk);
      cyc = cycle - t_last;
      t_last = cycle;
      check(int'(sample_idx) == exp_idx,
            $sformatf("sample %0d: idx %0d, expected %0d", s, sample_idx, exp_idx));
      x = level_value(exp_idx, FCM);
      check(int'(sample_value) == x, $sformatf("sample %0d value %0d vs %0d", s, sample_value, x));
      // first sample also includes the clear cycle
      check(cyc == model.cycles,
            $sformatf("sample %0d took %0d cycles, expected %0d", s, cyc, model.cycles));
      @(negedge clk);
    end
    repeat (2) @(negedge clk);
    check(!busy, "busy after the last sample");
  endtask

  initial begin : watchdog
    repeat (1200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    model = new(NB, LPB, CHN, FCN, FCM, PO, PI, 1, 1, TU);
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    // weights: first layer large enough to drive tanh into saturation
    for (int l = 0; l < NL; l++)
      for (int t = 0; t < 2; t++)
        for (int r = 0; r < CHN; r++)
          for (int c = 0; c < model.ic(l); c++) begin
            int v;
            v = (l == 0) ? rnd(12 << FRAC) : rnd(1 << (FRAC - 4));
            model.kw[model.kidx(l, t, r, c)] = v;
            write_w(l, t, r, c, v);
          end
    for (int r = 0; r < FCM; r++) begin
      for (int c = 0; c < FCN; c++) begin
        int v;
        v = rnd(1 << FRAC);
        model.fw[r * FCN + c] = v;
        write_w(NL, 0, r, c, v);
      end
      model.fb[r] = rnd(1 << (FRAC - 2));
      write_w(NL, 1, r, 0, model.fb[r]);
    end
    @(negedge clk);
    wr = '0;

    generate_run(1 << (FRAC - 1), NS1);
    $display("cycles per sample at full size: %0d", model.cycles);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
