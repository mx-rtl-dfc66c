// fp32_add -- single-precision adder used to accumulate block-pair results
// onto the C operand (D = A*B + C).
//
// Operands are ordered by magnitude, the smaller significand is aligned with
// three extra bits (guard, round, sticky), added or subtracted, normalized
// with a leading-zero count, and rounded to nearest, ties to even. Subnormal
// inputs are read as zero and subnormal results flushed to zero; infinities
// and NaNs follow IEEE-754 (inf - inf and any NaN give the canonical quiet
// NaN 0x7FC00000). An exact zero from opposite signs is +0. Purely
// combinational. The paper names only FP32 accumulation; the adder itself is
// this design's.
module fp32_add (
  input  logic [31:0] a,
  input  logic [31:0] b,
  output logic [31:0] y
);

  localparam logic [31:0] QNAN = 32'h7FC0_0000;

  logic        sa, sb, sx, sy;
  logic [7:0]  ea, eb, ex, ey;
  logic [23:0] ma, mb, mx, my;
  logic [8:0]  d;
  logic [26:0] ax, ay_sh;
  logic [27:0] sum;
  logic [4:0]  lz;
  logic signed [10:0] e;
  logic [24:0] rnd;
  logic        nan_a, nan_b, inf_a, inf_b;

  always_comb begin
    sa = a[31]; ea = a[30:23];
    sb = b[31]; eb = b[30:23];
    nan_a = (ea == 8'hFF) && (a[22:0] != '0);
    nan_b = (eb == 8'hFF) && (b[22:0] != '0);
    inf_a = (ea == 8'hFF) && (a[22:0] == '0);
    inf_b = (eb == 8'hFF) && (b[22:0] == '0);
    ma = (ea == 8'h00) ? 24'b0 : {1'b1, a[22:0]};
    mb = (eb == 8'h00) ? 24'b0 : {1'b1, b[22:0]};
    // Larger magnitude first.
    if ({ea, a[22:0]} >= {eb, b[22:0]}) begin
      sx = sa; ex = ea; mx = ma; sy = sb; ey = eb; my = mb;
    end else begin
      sx = sb; ex = eb; mx = mb; sy = sa; ey = ea; my = ma;
    end
    d  = 9'(ex) - 9'(ey);
    ax = {mx, 3'b000};
    if (my == '0)
      ay_sh = '0;
    else if (d >= 9'd27)
      ay_sh = 27'd1;                                // sticky only
    else
      ay_sh = ({my, 3'b000} >> d) |
              27'(|(({my, 3'b000}) & ((27'd1 << d) - 27'd1)));
    sum = (sx == sy) ? 28'(ax) + 28'(ay_sh) : 28'(ax) - 28'(ay_sh);
    e   = 11'(ex);
    lz  = '0;
    if (sum[27]) begin
      sum = {1'b0, sum[27:2], sum[1] | sum[0]};
      e   = e + 11'sd1;
    end else begin
      for (int i = 0; i <= 26; i++)
        if (sum[i]) lz = 5'(26 - i);
      sum = sum << lz;
      e   = e - 11'(lz);
    end
    rnd = {1'b0, sum[26:3]} + 25'(sum[2] && (sum[1] || sum[0] || sum[3]));
    if (rnd[24]) begin
      rnd = rnd >> 1;
      e   = e + 11'sd1;
    end

    if (nan_a || nan_b || (inf_a && inf_b && (sa != sb)))
      y = QNAN;
    else if (inf_a)
      y = a;
    else if (inf_b)
      y = b;
    else if (mx == '0)
      y = {sa & sb, 31'b0};                         // both zero
    else if (sum == '0)
      y = 32'b0;                                    // exact cancellation
    else if (e <= 0)
      y = {sx, 31'b0};
    else if (e >= 255)
      y = {sx, 8'hFF, 23'b0};
    else
      y = {sx, e[7:0], rnd[22:0]};
  end

endmodule
