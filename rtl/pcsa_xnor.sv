// pcsa_xnor: BEHAVIOURAL MODEL of the precharge sense amplifier augmented with
// XNOR (an analog latch-type circuit, modelled here at the level of its
// decision, not its transistors).
//
// The amplifier compares the resistances of the two devices of a 2T2R synapse
// on BL and BLb. Four extra transistors driven by the input X and its
// complement connect BL and BLb to the two branches either straight (X=1) or
// crossed (X=0), so the decision is the stored weight when X=1 and its
// inverse when X=0: xnor_out = XNOR(w, x), with w=1 meaning BL in LRS and BLb
// in HRS. xnor_out_b is the complementary output.
//
// Timing: while sen is low the amplifier precharges and both outputs read 1
// (assumed levels). At the rising edge of sen it resolves, and it holds that
// decision while sen stays high; r_bl, r_blb and x must be stable before the
// edge. Equal resistances (both devices in the same state, an error case)
// resolve to xnor_out = 0, a choice of this model.
module pcsa_xnor
  import bnn_pkg::*;
(
  input  logic sen,
  input  logic x,
  input  res_t r_bl,
  input  res_t r_blb,
  output logic xnor_out,
  output logic xnor_out_b
);

  logic decision;

  // X steers BL/BLb straight (x=1) or crossed (x=0) into the comparator.
  always @(posedge sen) begin
    if (x) decision <= (r_bl  < r_blb);
    else   decision <= (r_blb < r_bl);
  end

  always_comb begin
    xnor_out   = sen ? decision  : 1'b1;
    xnor_out_b = sen ? !decision : 1'b1;
  end

endmodule
