// tanh_cordic: tanh activation for one value, computed with hyperbolic CORDIC.
//
// The paper applies tanh after every convolution layer using a CORDIC
// routine; this unit is a sequential CORDIC of its own design:
//   1. a = |x|. If a >= 8 the result saturates to +-1 (tanh(8) differs from
//      1 by less than half an output LSB).
//   2. Range reduction of t = 2a: t = k ln2 + r, k = floor(t / ln2) from a
//      constant multiply, r = t - k ln2, so r lies in [0, ln2).
//   3. Hyperbolic CORDIC in rotation mode with z0 = -r and x0 = y0 = 1/A
//      (A = 0.8281593609602 is the CORDIC gain for iterations 1..24 with
//      4 and 13 repeated): after 26 steps x = e^-r. Then E = e^-2a =
//      e^-r >> k.
//   4. tanh a = (1 - E) / (1 + E) by a 19-step restoring division, and the
//      sign of x is restored.
// Internal values carry 24 fraction bits. Interface: pulse start with x
// while busy is low; done pulses with y valid (y holds until the next
// start). Latency: 48 cycles from start to done (2 for a saturated input).
// Accuracy: within 1 LSB of the exact tanh at 19 fraction bits on the
// values tested.
module tanh_cordic
  import fastwave_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  logic  start,
  input  data_t x,
  output logic  busy,
  output logic  done,
  output data_t y,
  output logic  saturated   // last result came from the |x| >= 8 shortcut
);

  localparam int unsigned IF     = 24;                 // internal fraction bits
  localparam int unsigned STEPS  = 26;
  localparam int unsigned QBITS  = FRAC_W;             // quotient bits
  localparam logic signed [33:0] ONE_I     = 34'sd1 <<< IF;
  localparam logic signed [33:0] INV_GAIN  = 34'sd20258439;  // 2^24 / A
  localparam logic signed [33:0] LN2_I     = 34'sd11629080;  // 2^24 ln2
  localparam logic        [31:0] INV_LN2_I = 32'd24204406;   // 2^24 / ln2
  localparam logic        [26:0] SAT_LIM   = 27'd8 << FRAC_W;

  // atanh(2^-i) * 2^24, rounded. For i >= 8 it equals 2^(24-i).
  function automatic logic signed [33:0] atanh_tab(int unsigned i);
    case (i)
      1: return 34'sd9215828;
      2: return 34'sd4285116;
      3: return 34'sd2108178;
      4: return 34'sd1049945;
      5: return 34'sd524459;
      6: return 34'sd262165;
      7: return 34'sd131075;
      default: return 34'sd1 <<< (IF - i);
    endcase
  endfunction

  // CORDIC iteration index of step s: 1,2,3,4,4,5,...,13,13,14,...,24
  function automatic int unsigned step_shift(int unsigned s);
    if (s < 4)   return s + 1;
    if (s <= 13) return s;
    return s - 1;
  endfunction

  typedef enum logic [2:0] {S_IDLE, S_REDUCE, S_CORDIC, S_DIV, S_OUT} state_t;
  state_t state;

  logic                neg;
  logic [26:0]         mag;
  logic [4:0]          k;
  logic [4:0]          step;
  logic signed [33:0]  cx, cy, cz;
  logic signed [33:0]  rem, den;
  logic [QBITS-1:0]    quo;

  // range reduction (combinational from mag)
  logic [33:0] t_i;
  logic [63:0] kprod;
  logic [4:0]  k_c;
  logic signed [33:0] r_c;
  always_comb begin
    t_i   = 34'(mag) << (IF - FRAC_W + 1);          // 2a at 24 fraction bits
    kprod = 64'(t_i) * 64'(INV_LN2_I);
    k_c   = kprod[2*IF +: 5];
    r_c   = $signed(t_i) - $signed(34'(k_c)) * LN2_I;
  end

  // one CORDIC step
  logic signed [33:0] nx, ny, nz, ang;
  int unsigned sh;
  always_comb begin
    sh  = step_shift(32'(step));
    ang = atanh_tab(sh);
    if (cz >= 0) begin
      nx = cx + (cy >>> sh);
      ny = cy + (cx >>> sh);
      nz = cz - ang;
    end else begin
      nx = cx - (cy >>> sh);
      ny = cy - (cx >>> sh);
      nz = cz + ang;
    end
  end

  logic signed [33:0] rem2;
  assign rem2 = rem <<< 1;

  assign busy = (state != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      done      <= 1'b0;
      y         <= '0;
      saturated <= 1'b0;
      neg       <= 1'b0;
      mag       <= '0;
      k         <= '0;
      step      <= '0;
      cx        <= '0;
      cy        <= '0;
      cz        <= '0;
      rem       <= '0;
      den       <= '0;
      quo       <= '0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          neg   <= x[DATA_W-1];
          mag   <= x[DATA_W-1] ? 27'(-x) : 27'(x);
          state <= S_REDUCE;
        end
        S_REDUCE: begin
          if (mag >= SAT_LIM) begin
            y         <= neg ? -ONE : ONE;
            saturated <= 1'b1;
            done      <= 1'b1;
            state     <= S_IDLE;
          end else begin
            k     <= k_c;
            cx    <= INV_GAIN;
            cy    <= INV_GAIN;
            cz    <= -r_c;
            step  <= '0;
            state <= S_CORDIC;
          end
        end
        S_CORDIC: begin
          cx   <= nx;
          cy   <= ny;
          cz   <= nz;
          step <= step + 1'b1;
          if (step == 5'(STEPS - 1)) begin
            // E = e^-r >> k (computed from the values of this last step)
            rem   <= ONE_I - (nx >>> k);
            den   <= ONE_I + (nx >>> k);
            step  <= '0;
            state <= S_DIV;
          end
        end
        S_DIV: begin
          step <= step + 1'b1;
          if (rem2 >= den) begin
            rem <= rem2 - den;
            quo <= {quo[QBITS-2:0], 1'b1};
          end else begin
            rem <= rem2;
            quo <= {quo[QBITS-2:0], 1'b0};
          end
          if (step == 5'(QBITS - 1)) state <= S_OUT;
        end
        S_OUT: begin
          y         <= neg ? -data_t'(quo) : data_t'(quo);
          saturated <= 1'b0;
          done      <= 1'b1;
          state     <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule
