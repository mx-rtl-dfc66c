// bcu -- BM Compute Unit of an MX+ DPE.
//
// Computes, in the DPE's fixed-point product grid (LSB 2^-18),
//
//   out = (A_BM * B_NBM) << delta_A  +  (B_BM * A_NBM) << delta_B
//
// where A_BM / B_BM are the block maxima pulled out of the dot product by the
// FSUs and B_NBM / A_NBM their matching operands. Each term is a significand
// multiply followed by a left shift by the sum of the two element exponents
// (for a BM, the fixed e_max of its type) and the MX++ delta; the two terms
// are then added. When the BM indices of A and B are equal, both BMs sit in
// the same lane: B_BM is swapped into the first product (so both operands are
// decoded with their extended mantissas, shift delta_A + delta_B) and the
// second product is zeroed, so the pair is counted once.
//
// The operands arrive on two 4-bit datapaths, one shared by the even FSUs and
// one by the odd FSUs. For FP4 only one of them carries the value (the other
// is zero) and they are ORed; for FP6/FP8 the even path is the low nibble and
// the odd path the high nibble of the 8-bit element. a_hit / b_hit say whether
// each BM is present this cycle (a BM decode of an empty bus is not zero).
// Purely combinational; the DPE registers its output together with the adder
// tree output.
module bcu
  import mxp_pkg::*;
(
  input  fmt_e                     fmt,
  input  bcu_bus_t                 bus_even,
  input  bcu_bus_t                 bus_odd,
  input  logic                     a_hit,
  input  logic                     b_hit,
  input  logic                     idx_eq,
  input  logic [2:0]               delta_a,
  input  logic [2:0]               delta_b,
  output logic signed [ACC_W-1:0]  out
);

  function automatic logic [7:0] join_code(fmt_e f, logic [NIB_W-1:0] ev,
                                           logic [NIB_W-1:0] od);
    return is_wide(f) ? {od, ev} : {4'b0, ev | od};
  endfunction

  // Significand product shifted by the exponent sum, with sign.
  function automatic logic signed [ACC_W-1:0] term(elem_t x, elem_t y,
                                                   logic [4:0] extra);
    logic [ACC_W-1:0] mag;
    logic [5:0]       shamt;
    shamt  = 6'(x.shamt) + 6'(y.shamt) + 6'(extra);
    mag = ACC_W'(16'(x.mant) * 16'(y.mant)) << shamt;
    return (x.sign ^ y.sign) ? -$signed(mag) : $signed(mag);
  endfunction

  elem_t a_bm, b_nbm, a_nbm, b_bm, mul1, mul2;
  logic signed [ACC_W-1:0] t1, t2;

  always_comb begin
    a_bm  = dec_bm (fmt, join_code(fmt, bus_even.a_bm,  bus_odd.a_bm));
    b_nbm = dec_nbm(fmt, join_code(fmt, bus_even.b_nbm, bus_odd.b_nbm));
    a_nbm = dec_nbm(fmt, join_code(fmt, bus_even.a_nbm, bus_odd.a_nbm));
    b_bm  = dec_bm (fmt, join_code(fmt, bus_even.b_bm,  bus_odd.b_bm));
    // Swap multiplexers: with equal indices the first product becomes
    // A_BM * B_BM and the second multiplicand is forced to zero.
    mul1 = idx_eq ? b_bm : b_nbm;
    mul2 = idx_eq ? '0   : b_bm;
    t1 = a_hit ? term(a_bm, mul1, idx_eq ? 5'(delta_a) + 5'(delta_b)
                                         : 5'(delta_a)) : '0;
    t2 = (b_hit && !idx_eq) ? term(mul2, a_nbm, 5'(delta_b)) : '0;
    out = t1 + t2;
  end

endmodule
