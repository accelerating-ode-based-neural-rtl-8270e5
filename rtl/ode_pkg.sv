// ode_pkg: shared types, constants and arithmetic helpers of the ODEBlock
// accelerator.
//
// All data is 32-bit signed fixed point with 20 fractional bits (Q20), as in
// the published design. Products of two Q20 numbers are Q40 and are kept in
// 64-bit accumulators; a result is brought back to Q20 with an arithmetic
// right shift by 20 and then saturated to the 32-bit range. Saturation
// (instead of wrap-around) and the rounding by truncation are choices of this
// implementation.
package ode_pkg;

  localparam int unsigned DATA_W = 32;  // word width
  localparam int unsigned FRAC_W = 20;  // Q20
  localparam int unsigned ACC_W  = 64;  // accumulator width

  typedef logic signed [DATA_W-1:0] q20_t;
  typedef logic signed [ACC_W-1:0]  acc_t;

  localparam q20_t Q20_ONE = q20_t'(1 <<< FRAC_W);
  localparam q20_t Q20_MAX = q20_t'(32'h7fff_ffff);
  localparam q20_t Q20_MIN = q20_t'(32'h8000_0000);

  // Batch-normalisation epsilon, 1e-5 in Q20 (10.49, truncated to 10).
  localparam q20_t BN_EPS = q20_t'(10);

  // Phases of one ODEBlock iteration (Fig. "ODEBlock design on FPGA").
  typedef enum logic [2:0] {
    PH_IDLE  = 3'd0,
    PH_CONV1 = 3'd1,  // conv  z  -> T
    PH_BN1   = 3'd2,  // BN + ReLU, T in place
    PH_CONV2 = 3'd3,  // conv  T  -> R
    PH_BN2   = 3'd4,  // BN + Euler update, R := z + h*BN(R)
    PH_COPY  = 3'd5   // R -> z for the next iteration
  } phase_e;

  // Host address regions (upper two bits of the host word address).
  typedef enum logic [1:0] {
    RG_Z      = 2'd0,  // input feature map z  (c*H*W + pixel)
    RG_WEIGHT = 2'd1,  // conv weights (conv*C*C*9 + oc*C*9 + ic*9 + k)
    RG_BN     = 2'd2,  // BN gamma/beta (bn*2C + {0:gamma,1:beta}*C + c)
    RG_RESULT = 2'd3   // result feature map (read only)
  } region_e;

  // Saturate a wide value to the signed 32-bit range.
  function automatic q20_t sat32(input acc_t v);
    if (v > acc_t'(Q20_MAX)) return Q20_MAX;
    if (v < acc_t'(Q20_MIN)) return Q20_MIN;
    return q20_t'(v);
  endfunction

  // Q40 -> Q20 with truncation towards minus infinity and saturation.
  function automatic q20_t q40_to_q20(input acc_t v);
    return sat32(v >>> FRAC_W);
  endfunction

endpackage
