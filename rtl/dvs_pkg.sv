// dvs_pkg: types, constants and arithmetic helpers shared by the shift-add
// CNN accelerator for distributed fiber vibration sensing.
//
// A trained weight w is stored as a sign bit s and NSHIFT signed 6-bit shift
// counts p_k, with w = s * sum_k 2^p_k (the 6-bit signed variables and the
// sign follow the paper). The code p = -32 is reserved here as "no term", so a
// weight can use fewer terms than there are shift layers, or be zero; that
// reservation is this design's own choice.
//
// Numbers inside a layer are fixed point: a 16-bit signed activation x is
// widened to ACC_W bits and scaled by 2^FRAC before shifting, so right shifts
// keep FRAC fractional bits. Layer outputs are requantised with
// sat16(acc >>> FRAC). Widths and FRAC are this design's choices.
package dvs_pkg;

  localparam int unsigned DATA_W = 16;   // activation width
  localparam int unsigned ADC_W  = 14;   // sensing data width (paper)
  localparam int unsigned P_W    = 6;    // shift-count width (paper)
  localparam int unsigned ACC_W  = 64;   // accumulator width
  localparam int unsigned FRAC   = 16;   // fractional bits in the datapath

  // Paper's network input: 256 traces (256 ms at 1 kHz) x 11 points
  localparam int unsigned IN_H   = 256;
  localparam int unsigned IN_W   = 11;
  localparam int unsigned NAVG   = 4;    // samples averaged per point
  // 64 channels and 3x3 kernels: conv_3 holds 36864 = 64*64*3*3 weights
  localparam int unsigned CH     = 64;
  localparam int unsigned KSZ    = 3;
  localparam int unsigned CLASSES = 3;   // excavator, hammer, air pick

  typedef logic signed [P_W-1:0]    shift_t;
  typedef logic signed [DATA_W-1:0] act_t;
  typedef logic signed [ACC_W-1:0]  acc_t;

  localparam shift_t P_NONE = shift_t'(-(2 ** (P_W - 1)));  // "no term"

  // One term x * 2^p of the shift layer, in the FRAC fixed-point scale.
  function automatic acc_t shift_term(input act_t x, input shift_t p);
    acc_t v;
    v = acc_t'(x) <<< FRAC;
    if (p == P_NONE)  return '0;
    else if (p >= 0)  return v <<< p;
    else              return v >>> (-p);
  endfunction

  // Requantise an accumulator back to an activation, with saturation.
  function automatic act_t requant(input acc_t a);
    acc_t q;
    q = a >>> FRAC;
    if (q > acc_t'(2 ** (DATA_W - 1) - 1))  return act_t'(2 ** (DATA_W - 1) - 1);
    if (q < -acc_t'(2 ** (DATA_W - 1)))     return act_t'(-(2 ** (DATA_W - 1)));
    return act_t'(q);
  endfunction

  // Saturating 16-bit addition (residual path).
  function automatic act_t sat_add(input act_t a, input act_t b);
    logic signed [DATA_W:0] s;
    s = {a[DATA_W-1], a} + {b[DATA_W-1], b};
    if (s[DATA_W] != s[DATA_W-1]) return s[DATA_W] ? act_t'(-(2 ** (DATA_W - 1))) : act_t'(2 ** (DATA_W - 1) - 1);
    return act_t'(s);
  endfunction

endpackage
