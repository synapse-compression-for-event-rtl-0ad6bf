// Floating-point state accumulation for the neuron-update unit: s' = fp16(s + p).
//
// s is a neuron state in IEEE 754 half precision (1 sign, 5 exponent, 10 fraction
// bits), p the signed integer product w*v of one synapse. The sum is formed exactly
// in signed fixed point with 24 fractional bits: every finite half-precision number
// (smallest step 2^-24, largest 65504) and every 16-bit product fits into 43 bits
// without loss. The exact sum is then rounded once to half precision, round to
// nearest, ties to even, so the result equals the correctly rounded s + p. Sums beyond
// the largest finite value become infinity and raise overflow. Results below 2^-14
// become subnormal numbers. An infinite or NaN state is returned unchanged. An
// exact zero sum gives +0.
//
// 16-bit floating-point states are taken from the source architecture. The
// fixed-point method, the integer product and the handling of special values are this
// design's choices. The source architecture gives no rounding rule.
//
// Purely combinational: the result is valid in the same cycle as the inputs.
module fp16_acc
  import scp_pkg::*;
(
  input  logic [ST_W-1:0]        s,         // state, half-precision bits
  input  logic signed [ST_W-1:0] p,         // integer product w*v
  output logic [ST_W-1:0]        r,         // rounded sum, half-precision bits
  output logic                   overflow   // finite inputs, infinite result
);

  localparam int unsigned FX_W = 43;        // sign + 18 integer + 24 fraction bits

  logic              s_sign;
  logic [4:0]        s_exp;
  logic [9:0]        s_frac;
  logic signed [FX_W-1:0] s_fx, p_fx, sum;
  logic [FX_W-1:0]   mag;
  logic [5:0]        lead;                  // position of the leading one of mag
  logic [5:0]        sh;                    // right shift that leaves 11 significant bits
  logic [FX_W-1:0]   rem, half;
  logic [11:0]       q;                     // significand before rounding (11 bits)
  logic [11:0]       qr;                    // rounded significand, may reach 2048
  logic [5:0]        e;                     // biased exponent before the overflow test

  always_comb begin
    s_sign = s[15];
    s_exp  = s[14:10];
    s_frac = s[9:0];

    // state to fixed point (value * 2^24)
    if (s_exp == 5'd0) s_fx = FX_W'(s_frac);
    else               s_fx = FX_W'({1'b1, s_frac}) << (s_exp - 5'd1);
    if (s_sign) s_fx = -s_fx;
    p_fx = FX_W'(p) <<< 24;
    sum  = s_fx + p_fx;
    mag  = sum[FX_W-1] ? FX_W'(-sum) : FX_W'(sum);

    lead = '0;
    for (int i = 0; i < FX_W; i++)
      if (mag[i]) lead = 6'(i);

    r        = '0;
    overflow = 1'b0;
    sh       = '0;
    q        = '0;
    rem      = '0;
    half     = '0;
    qr       = '0;
    e        = '0;
    if (s_exp == 5'h1f) begin
      r = s;                                // infinity or NaN stays
    end else if (mag == '0) begin
      r = '0;
    end else if (lead < 6'd10) begin
      r = {sum[FX_W-1], 5'd0, mag[9:0]};    // subnormal, exact
    end else begin
      sh   = lead - 6'd10;
      q    = 12'(mag >> sh);
      rem  = mag & ((FX_W'(1) << sh) - FX_W'(1));
      half = (sh == '0) ? '0 : (FX_W'(1) << (sh - 6'd1));
      qr   = 12'(q);
      if (sh != '0 && (rem > half || (rem == half && q[0]))) qr = qr + 12'd1;
      e    = lead - 6'd9;                   // leading bit 2^(lead-24), bias 15
      if (qr[11]) begin                     // rounding carried into a new binade
        qr = qr >> 1;
        e  = e + 6'd1;
      end
      if (e >= 6'd31) begin
        r        = {sum[FX_W-1], 5'h1f, 10'd0};
        overflow = 1'b1;
      end else begin
        r = {sum[FX_W-1], e[4:0], qr[9:0]};
      end
    end
  end

endmodule
