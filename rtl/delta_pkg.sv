// delta_pkg -- shared constants, types and the delta code of the delta-compressed
// MAC operator.
//
// Number format: activations and weights are 8-bit signed fixed point Q2.5
// (sign bit, 2 integer bits, 5 fraction bits; bit 7 is the sign, bits 4..0 weigh
// 2^-1..2^-5). A weight vector of one MAC operator is stored as one full 8-bit
// reference value followed by 4-bit deltas.
//
// Delta code (m = DELTA_W, n = DATA_W): an n-bit delta d is stored in m bits.
// If it fits into the m-1 low bits plus sign, i.e. -(2^(m-1)-1) <= d <= 2^(m-1)-1,
// the stored code is {d[n-1], d[m-2:0]} (bits 7,2,1,0 for m=4, n=8). Otherwise the
// code saturates to the largest (0111) or smallest (1001) value. The range is
// therefore symmetric, +-7 for m = 4. Decoding sign-extends the code back to n bits.
// The numbers 8, 4 and Q2.5, the bit selection and the saturation values follow the
// paper; DATA_W/DELTA_W/FRAC_W are parameters of every module.
//
// compress_delta() is the weight encoder. It is not hardware of the operator
// (compression is done when the weights are generated); it lives here so that a
// weight generator or a testbench can produce stored codes from plain weights.
package delta_pkg;

  localparam int unsigned DATA_W    = 8;   // data and weight width (Q2.5)
  localparam int unsigned FRAC_W    = 5;   // fraction bits of DATA_W
  localparam int unsigned DELTA_W   = 4;   // stored delta width
  localparam int unsigned N_WEIGHTS = 84;  // weights (and inputs) per MAC operation
  localparam int unsigned N_MULT    = 4;   // parallel multipliers

  // How a weight is rebuilt from its delta.
  //   DELTA_FIXED:       w[i] = w[0]   - delta[i]   (fixed reference, the main scheme)
  //   DELTA_CONSECUTIVE: w[i] = w[i-1] - delta[i]   (chain through the weight vector)
  typedef enum logic {
    DELTA_FIXED       = 1'b0,
    DELTA_CONSECUTIVE = 1'b1
  } delta_mode_e;

  // Saturating n-bit -> m-bit delta compression (see header).
  function automatic logic [DELTA_W-1:0] compress_delta(input logic signed [DATA_W-1:0] d);
    logic signed [DATA_W-1:0] dmax;
    dmax = DATA_W'((1 << (DELTA_W - 1)) - 1);
    if (d > dmax)       return {1'b0, {(DELTA_W-1){1'b1}}};        // 0111
    else if (d < -dmax) return {1'b1, {(DELTA_W-2){1'b0}}, 1'b1};  // 1001
    else                return {d[DATA_W-1], d[DELTA_W-2:0]};
  endfunction

endpackage
