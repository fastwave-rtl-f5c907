// mme_harness: drives one mat_mul_engine configuration for tb_mat_mul_engine.
//
// Holds a behavioural weight RAM with a registered read in the engine's
// word layout, loads a random M x N matrix, a random x and b, starts the
// engine, and compares every output beat with W x / 2^19 + b (saturated)
// computed here at full precision. Inputs near the format limits are used
// in some trials so that saturation is exercised. It also checks the order
// of the beats, the start-to-done latency of (M/P_OUT + 1) * N/P_IN + 2
// cycles and the number of weight-buffer swaps (M/P_OUT per product).
module mme_harness
  import fastwave_pkg::*;
#(
  parameter int M = 16, N = 12, PO = 4, PI = 3, TRIALS = 6
) (
  input  logic clk,
  input  logic rst_n,
  input  logic go,
  output logic finished,
  output int   checks,
  output int   failures
);
  localparam int CH = N / PI, NRB = M / PO, DEPTH = NRB * CH, AW = 8;

  logic start = 1'b0;
  logic busy, w_rd_en, out_valid, done;
  logic [AW-1:0] w_rd_addr;
  data_t w_rd_data [PO*PI];
  logic [$clog2(NRB+1)-1:0] out_rb;
  data_t out_y [PO];
  data_t x [N], b [M];
  logic [31:0] swap_count;

  data_t mem [DEPTH][PO*PI];
  data_t W [M][N];

  always_ff @(posedge clk) if (w_rd_en) w_rd_data <= mem[w_rd_addr];

  mat_mul_engine #(.M(M), .N(N), .P_OUT(PO), .P_IN(PI), .W_AW(AW)) dut (
    .clk, .rst_n, .start, .w_base('0), .x, .b, .busy,
    .w_rd_en, .w_rd_addr, .w_rd_data,
    .out_valid, .out_rb, .out_y, .done, .swap_count
  );

  function automatic data_t sat_ref(longint acc, data_t off);
    longint s;
    s = (acc >>> 19) + longint'(off);
    if (s > (longint'(1) << 26) - 1) s = (longint'(1) << 26) - 1;
    if (s < -(longint'(1) << 26)) s = -(longint'(1) << 26);
    return data_t'(s);
  endfunction

  initial begin
    finished = 1'b0; checks = 0; failures = 0;
    for (int i = 0; i < N; i++) x[i] = '0;
    for (int i = 0; i < M; i++) b[i] = '0;
    wait (go);
    for (int t = 0; t < TRIALS; t++) begin
      int beats, lat;
      logic [31:0] swaps0;
      bit big;
      big = (t % 3 == 2);
      for (int r = 0; r < M; r++)
        for (int c = 0; c < N; c++) begin
          W[r][c] = big ? data_t'($urandom) : data_t'($signed($urandom_range(0, 1 << 21)) - (1 << 20));
          mem[(r / PO) * CH + c % CH][(r % PO) * PI + c / CH] = W[r][c];
        end
      for (int i = 0; i < N; i++) x[i] = big ? data_t'($urandom) : data_t'($signed($urandom_range(0, 1 << 21)) - (1 << 20));
      for (int i = 0; i < M; i++) b[i] = data_t'($signed($urandom_range(0, 1 << 21)) - (1 << 20));
      swaps0 = swap_count;
      @(negedge clk);
      start = 1'b1;
      @(negedge clk);
      start = 1'b0;
      beats = 0; lat = 1;
      while (!done) begin
        if (out_valid) begin
          checks++;
          if (int'(out_rb) != beats) begin failures++; $display("FAIL: beat order %0d vs %0d", out_rb, beats); end
          for (int r = 0; r < PO; r++) begin
            longint acc;
            int row;
            row = int'(out_rb) * PO + r;
            acc = 0;
            for (int c = 0; c < N; c++) acc += longint'(W[row][c]) * longint'(x[c]);
            checks++;
            if (out_y[r] != sat_ref(acc, b[row])) begin
              failures++;
              $display("FAIL: M=%0d N=%0d row %0d: %0d vs %0d", M, N, row, out_y[r], sat_ref(acc, b[row]));
            end
          end
          beats++;
        end
        @(negedge clk);
        lat++;
      end
      // the last beat comes with done
      begin
        longint acc;
        for (int r = 0; r < PO; r++) begin
          acc = 0;
          for (int c = 0; c < N; c++) acc += longint'(W[(NRB-1)*PO + r][c]) * longint'(x[c]);
          checks++;
          if (!out_valid || out_y[r] != sat_ref(acc, b[(NRB-1)*PO + r])) begin
            failures++; $display("FAIL: last beat row %0d", (NRB-1)*PO + r);
          end
        end
      end
      checks += 3;
      if (beats != NRB - 1) begin failures++; $display("FAIL: %0d beats before done", beats); end
      if (lat != (NRB + 1) * CH + 2) begin failures++; $display("FAIL: latency %0d, expected %0d", lat, (NRB + 1) * CH + 2); end
      if (swap_count - swaps0 != NRB) begin failures++; $display("FAIL: %0d swaps", swap_count - swaps0); end
      @(negedge clk);
    end
    finished = 1'b1;
  end
endmodule
