// tb_tanh_cordic: checks the CORDIC tanh unit against the real-valued tanh.
//
// Drives directed values (zero, small, around the range-reduction
// boundaries, the saturation limit, the format extremes) and random values
// of both signs, and requires each result to lie within 2 LSB of
// round(tanh(x) * 2^19), with the sign symmetry exact. Also checks the
// 48-cycle latency (2 for a saturated input) and that busy is high while
// working.
module tb_tanh_cordic;
  import fastwave_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic start = 1'b0;
  data_t x = '0, y;
  logic busy, done, saturated;

  tanh_cordic dut (.clk, .rst_n, .start, .x, .busy, .done, .y, .saturated);

  int checks = 0, failures = 0;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  task automatic run_one(data_t v, output data_t res, output int lat);
    @(negedge clk);
    x = v; start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    lat = 1;
    while (!done) begin
      check(busy, "busy low while computing");
      @(negedge clk);
      lat++;
    end
    res = y;
  endtask

  task automatic test(data_t v);
    data_t res; int lat; real ex; longint exp_i, err;
    run_one(v, res, lat);
    ex    = $tanh(real'(v) / real'(1 << FRAC_W));
    exp_i = longint'($rtoi(ex * real'(1 << FRAC_W) + (ex >= 0 ? 0.5 : -0.5)));
    err   = longint'(res) - exp_i;
    if (err < 0) err = -err;
    check(err <= 2, $sformatf("tanh(%0d) = %0d, expected %0d", v, res, exp_i));
    if (v >= data_t'(8 << FRAC_W) || v <= -data_t'(8 << FRAC_W))
      check(lat == 2 && saturated, $sformatf("saturated latency %0d", lat));
    else
      check(lat == 48 && !saturated, $sformatf("latency %0d for %0d", lat, v));
  endtask

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    data_t pos, negv; int lat;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    test('0);
    test(data_t'(1));
    test(-data_t'(1));
    test(data_t'(1 << FRAC_W));           // 1.0
    test(-data_t'(1 << FRAC_W));
    test(data_t'(181704));                // ~ ln2 / 2 (k boundary)
    test(data_t'(181705));
    test(data_t'((8 << FRAC_W) - 1));     // just below saturation
    test(data_t'(8 << FRAC_W));
    test(DATA_MAX);
    test(DATA_MIN);
    for (int i = 0; i < 150; i++) begin
      data_t v;
      v = data_t'($signed($urandom_range(0, 6 << FRAC_W)) - (3 << FRAC_W));
      test(v);
    end
    for (int i = 0; i < 20; i++) begin
      data_t v;
      v = data_t'($urandom_range(0, 10 << FRAC_W));
      run_one(v, pos, lat);
      run_one(-v, negv, lat);
      check(negv == -pos, $sformatf("odd symmetry at %0d", v));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
