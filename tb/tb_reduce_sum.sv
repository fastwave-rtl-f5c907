// tb_reduce_sum: checks the tree reduction for a power-of-two size (8),
// an odd size (5) and the trivial size 1, with random 64-bit values kept
// small enough not to overflow, against a plain sum.
module tb_reduce_sum;
  import fastwave_pkg::*;

  acc_t a8 [8], a5 [5], a1 [1];
  acc_t s8, s5, s1;

  reduce_sum #(.N(8)) dut8 (.a(a8), .sum(s8));
  reduce_sum #(.N(5)) dut5 (.a(a5), .sum(s5));
  reduce_sum #(.N(1)) dut1 (.a(a1), .sum(s1));

  int checks = 0, failures = 0;

  function automatic longint r60();
    return $signed({$urandom, $urandom}) >>> 4;
  endfunction

  initial begin : watchdog
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 300; t++) begin
      longint e8, e5;
      e8 = 0; e5 = 0;
      for (int i = 0; i < 8; i++) begin a8[i] = r60(); e8 += a8[i]; end
      for (int i = 0; i < 5; i++) begin a5[i] = r60(); e5 += a5[i]; end
      a1[0] = r60();
      #1;
      checks += 3;
      if (s8 != e8) begin failures++; $display("FAIL: N=8 %0d vs %0d", s8, e8); end
      if (s5 != e5) begin failures++; $display("FAIL: N=5 %0d vs %0d", s5, e5); end
      if (s1 != a1[0]) begin failures++; $display("FAIL: N=1"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
