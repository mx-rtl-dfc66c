// fx_to_fp32 -- normalizes a block-pair dot product and converts it to FP32.
//
// Input is the signed fixed-point sum of one block pair (adder tree plus BCU
// output, LSB 2^-PROD_FRAC) and esum = X_A + X_B, the sum of the two biased
// E8M0 shared exponents. The represented value is
//
//   s * 2^(esum - 2*127 - PROD_FRAC).
//
// A leading-one detector finds the top bit, the significand is shifted into
// place and rounded to nearest, ties to even. Results below the FP32 normal
// range are flushed to signed zero and results above it become infinity;
// FP32 subnormals are not produced (a choice of this design, the paper only
// says the result is normalized and converted to FP32). Purely combinational.
module fx_to_fp32
  import mxp_pkg::*;
(
  input  logic signed [ACC_W-1:0] s,
  input  logic [8:0]              esum,
  output logic [31:0]             f
);

  logic             sign;
  logic [ACC_W-1:0] mag, norm;
  logic [5:0]       p;
  logic signed [11:0] be;
  logic [22:0]      frac;
  logic [24:0]      rnd;
  logic             guard, sticky;

  always_comb begin
    sign = s[ACC_W-1];
    mag  = sign ? ACC_W'(-s) : ACC_W'(s);
    p    = '0;
    for (int i = 0; i < ACC_W; i++)
      if (mag[i]) p = 6'(i);
    norm   = mag << (6'(ACC_W - 1) - p);
    frac   = norm[ACC_W-2 -: 23];
    guard  = norm[ACC_W-25];
    sticky = |norm[ACC_W-26:0];
    rnd    = {2'b01, frac} + 25'(guard && (sticky || frac[0]));
    // biased exponent = p + esum - 2*127 - PROD_FRAC + 127
    be     = 12'(p) + 12'(esum) - 12'(E8M0_BIAS + PROD_FRAC) + 12'(rnd[24]);
    if (mag == '0 || be <= 0)
      f = {sign, 31'b0};
    else if (be >= 255)
      f = {sign, 8'hFF, 23'b0};
    else
      f = {sign, be[7:0], rnd[24] ? rnd[23:1] : rnd[22:0]};
  end

endmodule
