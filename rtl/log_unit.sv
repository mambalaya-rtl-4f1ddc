// log_unit: natural logarithm of a Q8.8 operand.
//
// The paper takes its logarithm from earlier published work without giving
// the circuit, so this unit is this design's own, in the same style:
//   * find the position p of the leading one of the positive operand u,
//   * normalise to a mantissa m = u / 2^p - 1 in [0,1), Q.12,
//   * log2(u) = p - 8 + m + 0.3466 m (1 - m)   (Mitchell's linear estimate
//     plus a quadratic correction; error below 0.01),
//   * ln(x) = log2(x) * ln 2, rounded toward minus infinity to Q8.8.
// Operands <= 0 have no logarithm; they give the most negative Q8.8 value,
// which behaves as -infinity in the cascade (e.g. exp of it is 0).
// Interface: x in, y out, combinational.
module log_unit
  import mambalaya_pkg::*;
(
  input  data_t x,
  output data_t y
);

  localparam logic [31:0]        CORR_Q12 = 32'd1420;  // 0.3466 * 4096
  localparam logic signed [31:0] LN2_Q12  = 32'sd2839; // 0.693147 * 4096

  logic [4:0]         p;
  logic [31:0]        norm;       // u * 2^12 / 2^p, 4096 .. 8191
  logic [31:0]        mant;       // m, Q.12
  logic [31:0]        corr;
  logic signed [31:0] l2;         // log2(x), Q.12
  logic signed [31:0] ln_q20;

  always_comb begin
    p = '0;
    for (int i = 0; i < DATA_W - 1; i++)
      if (x[i]) p = 5'(i);
    norm   = (32'(x[DATA_W-2:0]) << 12) >> p;
    mant   = norm - 32'd4096;
    corr   = (CORR_Q12 * ((mant * (32'd4096 - mant)) >> 12)) >> 12;
    l2     = ((32'(p) - 32'sd8) <<< 12) + 32'(mant) + 32'(corr);
    ln_q20 = l2 * LN2_Q12;                       // Q.24
    if (x <= 0) y = DATA_MIN;
    else        y = data_t'(ln_q20 >>> 16);      // Q.24 -> Q8.8
  end

endmodule
