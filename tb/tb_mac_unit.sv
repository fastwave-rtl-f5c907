// tb_mac_unit: checks the multiply-accumulate lane.
//
// Random signed operands over the whole 27-bit range are accumulated in
// runs of random length; each run starts with clr. After every cycle the
// accumulator is compared with a sum kept in the testbench, and a cycle
// with en low must leave it unchanged.
module tb_mac_unit;
  import fastwave_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic en = 1'b0, clr = 1'b0;
  data_t a = '0, b = '0;
  acc_t acc;

  mac_unit dut (.clk, .rst_n, .en, .clr, .a, .b, .acc);

  int checks = 0, failures = 0;
  longint ref_acc = 0;

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int run = 0; run < 60; run++) begin
      int len;
      len = $urandom_range(1, 40);
      for (int i = 0; i < len; i++) begin
        @(negedge clk);
        a   = data_t'($urandom);
        b   = data_t'($urandom);
        clr = (i == 0);
        en  = ($urandom_range(0, 4) != 0) || (i == 0);
        if (en) ref_acc = (clr ? 0 : ref_acc) + longint'(a) * longint'(b);
        @(posedge clk); #1;
        checks++;
        if (acc != ref_acc) begin
          failures++;
          $display("FAIL: acc %0d expected %0d", acc, ref_acc);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
