// bm_detector -- BM Detector of one MX+ dot product engine (DPE).
//
// Each cycle the DPE sees one slice of a block pair on its 16 4-bit lanes.
// The detector compares the BM indices of the A and B blocks with the element
// window of that slice and raises the 1-bit BM_A / BM_B select of the Forward
// and Swap Unit (FSU) that holds each BM, so the FSU can pull that operand out
// of the dot product and send it to the BM Compute Unit (BCU).
//
//   FP4       : 16 elements per cycle, a block pair in 2 cycles; element e of
//               the block sits in lane e[3:0] during phase e[4].
//   FP6 / FP8 : 8 elements per cycle, a block pair in 4 cycles; element e
//               occupies lanes 2*e[2:0] (low nibble) and 2*e[2:0]+1 (high
//               nibble) during phase e[4:3], so both FSUs of the pair fire.
//
// It also tells the BCU whether each BM is present this cycle, whether the two
// indices are equal (swap case) and passes on the MX++ shifts held in the
// reserved bits [7:5] of the index bytes. With bm_en low (plain MX operands)
// every output is zero and the DPE behaves as an unmodified MX engine.
// Purely combinational. The lane mapping is this design's choice; the paper
// fixes only the rates (a block pair per 2 or 4 cycles) and the even/odd
// pairing of FSUs for FP6 and FP8.
module bm_detector
  import mxp_pkg::*;
(
  input  logic              bm_en,
  input  fmt_e              fmt,
  input  logic [1:0]        phase,
  input  bmidx_t            a_bmidx,
  input  bmidx_t            b_bmidx,
  output logic [LANES-1:0]  bm_a,
  output logic [LANES-1:0]  bm_b,
  output logic              a_hit,
  output logic              b_hit,
  output logic              idx_eq,
  output logic [2:0]        delta_a,
  output logic [2:0]        delta_b
);

  // One-hot lane select of the BM at index idx for the current phase.
  function automatic logic [LANES-1:0] lane_sel(fmt_e f, logic [1:0] ph,
                                                logic [4:0] idx);
    logic [LANES-1:0] s;
    s = '0;
    if (is_wide(f)) begin
      if (idx[4:3] == ph) begin
        s[{idx[2:0], 1'b0}] = 1'b1;
        s[{idx[2:0], 1'b1}] = 1'b1;
      end
    end else if (idx[4] == ph[0]) begin
      s[idx[3:0]] = 1'b1;
    end
    return s;
  endfunction

  always_comb begin
    bm_a    = bm_en ? lane_sel(fmt, phase, a_bmidx.idx) : '0;
    bm_b    = bm_en ? lane_sel(fmt, phase, b_bmidx.idx) : '0;
    a_hit   = |bm_a;
    b_hit   = |bm_b;
    idx_eq  = bm_en && (a_bmidx.idx == b_bmidx.idx);
    delta_a = bm_en ? a_bmidx.delta : 3'd0;
    delta_b = bm_en ? b_bmidx.delta : 3'd0;
  end

endmodule
