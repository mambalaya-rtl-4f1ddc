// nlfu: non-linear function unit of a processing element.
//
// Computes one of exp(x), sigmoid(x) or SiLU(x) = x * sigmoid(x) of a Q8.8
// operand, combinationally; the PE functional unit registers around it.
//
// The paper reuses an existing accelerator's non-linear unit for SiLU and the
// exponential and does not describe its insides, so the approximations here
// are this design's own:
//   * exp(x) = 2^(x * log2 e). The integer part of the exponent becomes a
//     shift, the fraction f in [0,1) a quadratic 2^f ~ 1 + 0.6565 f + 0.3435 f^2
//     (relative error below 0.2 %), all in Q.12. Results above the Q8.8 range
//     saturate to the largest value.
//   * sigmoid(x) is the four-segment piecewise-linear "PLAN" fit
//     (slopes 1/4, 1/8, 1/32, 0 with breaks at |x| = 1, 2.375, 5; absolute
//     error below 0.02), mirrored for negative x.
//   * SiLU multiplies x by that sigmoid.
// Interface: sel picks the function (OP_EXP, OP_SIGMOID, OP_SILU; any other
// value gives SiLU), x is the operand, y the result. No clock.
module nlfu
  import mambalaya_pkg::*;
(
  input  fu_op_e sel,
  input  data_t  x,
  output data_t  y
);

  localparam logic signed [31:0] LOG2E_Q12 = 32'sd5909;  // 1.442695 * 4096
  localparam logic [31:0]        C1_Q12    = 32'd2689;   // 0.6565 * 4096
  localparam logic [31:0]        C2_Q12    = 32'd1407;   // 0.3435 * 4096

  // ---- exp -----------------------------------------------------------------
  logic signed [31:0] t;          // x * log2e, 20 fraction bits
  logic signed [31:0] n;          // floor of the exponent
  logic        [31:0] f;          // fraction of the exponent, Q.12
  logic        [31:0] m;          // 2^f, Q.12 (4096 .. 8192)
  logic signed [31:0] sh;         // shift from Q.12 mantissa to Q8.8 result
  data_t              exp_y;

  always_comb begin
    t  = 32'(x) * LOG2E_Q12;
    n  = t >>> 20;
    f  = 32'(t[19:8]);
    m  = 32'd4096 + ((C1_Q12 * f) >> 12) + ((C2_Q12 * ((f * f) >> 12)) >> 12);
    sh = n - 32'sd4;
    if (sh >= 32'sd4)        exp_y = DATA_MAX;           // 2^n >= 256 > range
    else if (sh >= 0) begin
      if ((m << sh) > 32'd32767) exp_y = DATA_MAX;
      else                       exp_y = data_t'(m << sh);
    end
    else if (sh <= -32'sd14) exp_y = '0;
    else                     exp_y = data_t'(m >> (-sh));
  end

  // ---- sigmoid (PLAN) ----------------------------------------------------------
  logic [16:0] ax;                // |x| in Q8.8, 17 bits so that |-32768| fits
  logic [16:0] s_pos;             // sigmoid(|x|) in Q8.8
  data_t       sig_y;
  data_t       silu_y;

  always_comb begin
    ax = x[DATA_W-1] ? 17'(-32'(x)) : 17'(x);
    if (ax >= 17'd1280)     s_pos = 17'd256;                 // |x| >= 5
    else if (ax >= 17'd608) s_pos = (ax >> 5) + 17'd216;     // 2.375 <= |x| < 5
    else if (ax >= 17'd256) s_pos = (ax >> 3) + 17'd160;     // 1 <= |x| < 2.375
    else                    s_pos = (ax >> 2) + 17'd128;     // |x| < 1
    sig_y  = x[DATA_W-1] ? data_t'(17'd256 - s_pos) : data_t'(s_pos);
    // |x * sigmoid(x)| <= |x|: the product always fits after the shift
    silu_y = data_t'((32'(x) * 32'(sig_y)) >>> FRAC_W);
  end

  always_comb begin
    unique case (sel)
      OP_EXP:     y = exp_y;
      OP_SIGMOID: y = sig_y;
      default:    y = silu_y;
    endcase
  end

endmodule
