// msp_pkg -- shared types and constants of the mixed-scheme, multi-precision
// (MSP) GEMM accelerator.
//
// Weight rows of every layer are split between three number systems:
//   * SPoT  (sum of two powers of two, 4 bits): computed with shifts and adds
//            in FPGA LUTs,
//   * FIXED4 (4-bit fixed point): computed on DSP multipliers,
//   * FIXED8 (8-bit fixed point, the ~5 % most sensitive rows): DSP multipliers.
//
// SPoT code layout (4-bit default), most significant bit first:
//   { sign, e1[M1_W-1:0] (larger-range term), e2[M2_W-1:0] (smaller-range term) }
// Each exponent code e selects the term 0 when e == 0 and 2^(e-1) otherwise,
// so the 4-bit magnitudes are {0,1,2,4} + {0,1} = 0..5 (times the row scale
// alpha, which is applied outside this design).  The field order and the
// "code minus one" exponent follow the worked examples of the MSP paper's
// encoding figure (e.g. 0_11_1 -> -(2^2 + 2^0)); that figure also prints a sign
// bit of 1 as "+" and 0 as "-", which is followed here (SPOT_SIGN_NEG = 0).
// The integer (left-shift) form differs from the paper's right-shift wording
// only by a constant factor folded into alpha.
//
// Fixed-point weights are two's complement (an assumption; the paper writes the
// levels as +/- alpha * {0, 1/(2^(m-1)-1), ..., 1}).  Activations are unsigned
// ACT_W-bit values (4 bits in the paper's 4/4 configuration).
package msp_pkg;

  // Activation width (paper: 4-bit activations).
  parameter int MSP_ACT_W     = 4;
  // Default SPoT field widths for the 4-bit SPoT weight (paper's encoding figure).
  parameter int MSP_SPOT_M1_W = 2;
  parameter int MSP_SPOT_M2_W = 1;
  // Value of the SPoT sign bit that means "negative" (encoding figure).
  parameter logic SPOT_SIGN_NEG = 1'b0;

  typedef enum logic [1:0] {
    SCH_SPOT   = 2'd0,   // GEMM_SPoT core (LUT shift-add)
    SCH_FIXED4 = 2'd1,   // GEMM_fixed core (DSP, 4-bit)
    SCH_FIXED8 = 2'd2    // GEMM_8-bit core (DSP, 8-bit)
  } scheme_e;

  // Widths of the layer configuration fields.
  parameter int KSTEP_W = 10;  // number of BLK_IN-wide steps along K
  parameter int NCOL_W  = 15;  // number of output columns (GEMM N)
  parameter int ROWS_W  = 11;  // rows of one scheme in one layer (GEMM M part)

  // Layer (GEMM tile) configuration, sampled on start.
  typedef struct packed {
    logic [KSTEP_W-1:0] ksteps;     // K / BLK_IN, >= 1
    logic [NCOL_W-1:0]  ncols;      // N, >= 1
    logic [ROWS_W-1:0]  rows_spot;  // rows held by the SPoT core
    logic [ROWS_W-1:0]  rows_fix4;  // rows held by the 4-bit fixed core
    logic [ROWS_W-1:0]  rows_fix8;  // rows held by the 8-bit core
  } layer_cfg_t;

  // Magnitude of one SPoT exponent term: 0 for code 0, else 2^(code-1).
  function automatic int unsigned spot_term(input int unsigned code);
    return (code == 0) ? 0 : (32'd1 << (code - 1));
  endfunction

endpackage
