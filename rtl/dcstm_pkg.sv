// dcstm_pkg: types, constants and elaboration-time helper functions shared by
// the streaming DCSTM derivative and the zero-crossing peak finder.
//
// The coefficient tables of the design (window tapers, transform matrices,
// frequency weights, reciprocals) are all computed here from their closed
// forms while the design elaborates, so no table file is needed. Every
// coefficient is quantised the same way: round-half-up of value * 2^frac.
//
// The closed forms are the paper's (sin^2 and cos^2 tapers, the DCT, DST,
// IDCT and IDST equations); the rounding rule and the frequency weight
// constant are this design's.
package dcstm_pkg;

  // Which of the four streaming transforms an SDCTM engine performs.
  typedef enum logic [1:0] {
    TR_DCT  = 2'd0,
    TR_DST  = 2'd1,
    TR_IDCT = 2'd2,
    TR_IDST = 2'd3
  } transform_e;

  // Which taper a window stage applies: sin^2 feeds the undelayed (top)
  // path, cos^2 the delayed (bottom) path.
  typedef enum logic {
    WIN_SIN2 = 1'b0,
    WIN_COS2 = 1'b1
  } window_e;

  // Zero-crossing qualifier states.
  typedef enum logic [1:0] {
    ZC_IDLE  = 2'd0,  // waiting for the first threshold
    ZC_ARMED = 2'd1,  // first threshold passed, waiting for the sign change
    ZC_CHECK = 2'd2   // pair stored, waiting for the opposite threshold
  } zc_state_e;

  localparam real PI = 3.14159265358979323846;

  // Round-half-up quantisation of a real value to a fixed-point integer.
  function automatic int quant(real v, int frac);
    return $rtoi($floor(v * (2.0 ** frac) + 0.5));
  endfunction

  // Window taper value at window-local index n of an m-sample window.
  function automatic real window_value(window_e kind, int n, int m);
    real s;
    s = $sin(PI * n / m);
    return (kind == WIN_SIN2) ? s * s : 1.0 - s * s;
  endfunction

endpackage
