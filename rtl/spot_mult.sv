// spot_mult -- multiplier-free product of an activation and a SPoT weight.
//
// A sum-of-power-of-two weight is sign * (2^a + 2^b) * alpha.  The product with
// an activation is therefore two shifted copies of the activation added
// together and negated when the sign says so: two barrel shifters, one adder
// and a negation, all of which map to FPGA LUTs instead of DSP slices.  This is
// the operation the paper proposes SPoT for.
//
// Code layout: w = {sign, e1[M1_W-1:0], e2[M2_W-1:0]}; a term is 0 when its code
// is 0 and act << (code-1) otherwise (see msp_pkg for where that comes from).
// With the 4-bit default (M1_W=2, M2_W=1) the weight magnitude is 0..5.
//
// Interface: act (unsigned, ACT_W bits), w (1+M1_W+M2_W bits) -> prod (signed,
// P_W = ACT_W + 2^M1_W bits, always wide enough).  Purely combinational: the
// enclosing PE registers the sum of its lanes.
module spot_mult
  import msp_pkg::*;
#(
  parameter int ACT_W = msp_pkg::MSP_ACT_W,
  parameter int M1_W  = msp_pkg::MSP_SPOT_M1_W,
  parameter int M2_W  = msp_pkg::MSP_SPOT_M2_W,
  parameter int W_W   = 1 + M1_W + M2_W,
  parameter int P_W   = ACT_W + (1 << M1_W)
) (
  input  logic [ACT_W-1:0]       act,
  input  logic [W_W-1:0]         w,
  output logic signed [P_W-1:0]  prod
);

  logic            sgn;
  logic [M1_W-1:0] e1;
  logic [M2_W-1:0] e2;
  logic [P_W-1:0]  ext, t1, t2, mag;

  always_comb begin
    sgn = w[W_W-1];
    e1  = w[M1_W+M2_W-1 -: M1_W];
    e2  = w[M2_W-1:0];
    ext = P_W'(act);
    // Larger-range term: act << (e1 - 1), or 0.
    t1  = (e1 == '0) ? '0 : (ext << (e1 - 1'b1));
    // Smaller-range term: act << (e2 - 1), or 0.
    t2  = (e2 == '0) ? '0 : (ext << (e2 - 1'b1));
    mag = t1 + t2;
    prod = (sgn == SPOT_SIGN_NEG) ? -$signed(mag) : $signed(mag);
  end

endmodule
