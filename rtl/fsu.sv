// fsu -- Forward and Swap Unit: one per 4-bit lane of an MX+ DPE.
//
// In the normal case the lane's A and B nibbles pass straight to the vector
// multiplier. When the BM Detector marks this lane as holding the BM of A
// (bm_a), the A input to the multiplier is replaced by zero so the BM product
// drops out of the dot product, and the BM (A_BM) and its matching operand
// (B_NBM) are driven onto the shared datapath to the BM Compute Unit. bm_b
// does the same for B's BM (B_BM, with matching operand A_NBM). Both can be
// set at once when the two BM indices coincide.
//
// The paper builds the shared datapath from tri-state buffers. Because at
// most one FSU of a parity drives a given wire in a cycle, this design gives
// each FSU an output that is zero unless it drives, and the DPE ORs the
// outputs of all FSUs of the same parity together: the same function without
// on-chip tri-states. Purely combinational.
module fsu
  import mxp_pkg::*;
(
  input  logic [NIB_W-1:0] a_in,
  input  logic [NIB_W-1:0] b_in,
  input  logic             bm_a,
  input  logic             bm_b,
  output logic [NIB_W-1:0] a_out,
  output logic [NIB_W-1:0] b_out,
  output bcu_bus_t         drv
);

  always_comb begin
    a_out     = bm_a ? '0 : a_in;
    b_out     = bm_b ? '0 : b_in;
    drv.a_bm  = bm_a ? a_in : '0;
    drv.b_nbm = bm_a ? b_in : '0;
    drv.a_nbm = bm_b ? a_in : '0;
    drv.b_bm  = bm_b ? b_in : '0;
  end

endmodule
