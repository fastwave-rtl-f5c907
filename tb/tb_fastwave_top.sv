// tb_fastwave_top: end-to-end test of the accelerator at reduced size.
//
// Network: 2 blocks of 3 layers (queue lengths 1, 2, 4), 8 channels, an
// FC layer 6 -> 16, parallelism 4 x 2 (1 x 1 in the first layer), 4 tanh
// units. Random weights are written through the host port into the
// hardware and into the reference model (fw_ref_pkg). Two generations are
// run (the second restarts from a new seed and must start from empty
// queues); every sample index and value is compared with the model, and
// the cycles per sample with the model's prediction. The test also counts
// how often each mechanism happened and fails if one never did: queue
// wrap-around, weight-buffer swaps, the weight bypass of the single-input
// first layer, tanh saturation, the autoregressive feedback and the
// restart.
module tb_fastwave_top;
  import fastwave_pkg::*;
  import fw_ref_pkg::*;

  localparam int NB = 2, LPB = 3, CHN = 8, FCN = 6, FCM = 16;
  localparam int PO = 4, PI = 2, TU = 4;
  localparam int NS1 = 14, NS2 = 6;
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

  fastwave_top #(
    .N_BLOCKS (NB), .LPB (LPB), .CH (CHN), .FC_N (FCN), .FC_M (FCM),
    .P_OUT (PO), .P_IN (PI), .P_OUT_1 (1), .P_IN_1 (1), .TANH_UNITS (TU)
  ) dut (.*);

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

  // mechanism counters
  int n_bypass = 0, n_feedback = 0, n_restart = 0;
  always @(posedge clk) begin
    if (dut.g_layer[0].g_first.u_layer.u_mme.computing &&
        dut.g_layer[0].g_first.u_layer.u_mme.cp_v &&
        dut.g_layer[0].g_first.u_layer.u_mme.cp_bank == dut.g_layer[0].g_first.u_layer.u_mme.cmp_bank &&
        dut.g_layer[0].g_first.u_layer.u_mme.cp_col == dut.g_layer[0].g_first.u_layer.u_mme.col)
      n_bypass++;
  end

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
      if (s > 0) n_feedback++;
      @(negedge clk);
    end
    repeat (2) @(negedge clk);
    check(!busy, "busy after the last sample");
  endtask

  initial begin : watchdog
    repeat (400000) @(posedge clk);
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
            v = (l == 0) ? rnd(12 << FRAC) : rnd(1 << (FRAC - 1));
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
    n_restart++;
    generate_run(-(3 << (FRAC - 2)), NS2);

    begin
      int wraps, swaps, sats;
      wraps = int'(dut.g_layer[2].g_rest.u_layer.u_queue.wraps);
      swaps = int'(dut.g_layer[1].g_rest.u_layer.u_mme.swap_count);
      sats  = int'(dut.g_layer[0].g_first.u_layer.sat_count);
      $display("mechanisms: queue wraps (layer 2) %0d, buffer swaps (layer 1) %0d, bypass %0d, tanh saturation groups %0d, feedback %0d, restart %0d",
               wraps, swaps, n_bypass, sats, n_feedback, n_restart);
      check(wraps > 0, "queue never wrapped");
      check(swaps > 0, "weight buffers never swapped");
      check(n_bypass > 0, "weight bypass never used");
      check(sats > 0, "tanh never saturated");
      check(n_feedback > 0, "no sample fed back");
      check(n_restart > 0, "no restart");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
