// smpc_pkg: number format, constants and shared helpers of the standoff
// tracking controller core.
//
// Every value that crosses a port is a 32-bit two's-complement fixed-point
// number with 16 fraction bits (Q16.16): 1.0 is 32'h0001_0000. The 32-bit port
// width follows the IP core port list of the hardware-in-the-loop setup; the
// fixed-point encoding is this design's choice, since no number format is
// stated for the core. Products are formed at 64 bits and rounded back by an
// arithmetic shift, with saturation to the 32-bit range.
//
// Defaults of the controller (prediction horizon 20, sampling period 0.1 s,
// 2 hidden layers of 100 neurons, leaky-ReLU slope 0.01, 3 projection passes,
// c1 = 0.2, c1 = 1.1 c2, input bound 12) are the
// published ones; the vertical speed v_z = 1.0 m/s is assumed.
package smpc_pkg;

  localparam int unsigned FX_W    = 32;
  localparam int unsigned FX_FRAC = 16;

  typedef logic signed [FX_W-1:0] fx_t;
  typedef logic signed [63:0]     fx_wide_t;   // Q48.16 intermediate

  localparam fx_t FX_ONE  = 32'sh0001_0000;
  localparam fx_t FX_MAX  = 32'sh7FFF_FFFF;
  localparam fx_t FX_MIN  = -32'sh7FFF_FFFF - 32'sh1;

  // Controller constants in Q16.16.
  localparam fx_t FX_TAU      = 32'sd6554;     // 0.1 s sampling period
  localparam fx_t FX_LRELU    = 32'sd655;      // leaky-ReLU slope 0.01
  localparam fx_t FX_C1       = 32'sd13107;    // c1 = 0.2
  localparam fx_t FX_INV_C2   = 32'sd360448;   // 1/c2 = 1.1/0.2 = 5.5
  localparam fx_t FX_UBAR     = 32'sd786432;   // u_bar = 12
  localparam fx_t FX_VZ       = 32'sd65536;    // v_z = 1.0 m/s (assumed)
  localparam fx_t FX_LOG2E    = 32'sd94548;    // log2(e)

  // State vector layout x = col(xi, eta, xi_dot, eta_dot).
  localparam int unsigned N_STATE = 12;
  localparam int unsigned N_INPUT = 4;

  // One planned reference point: position and velocity (Euler angles and
  // rates of the reference are zero by construction and are not stored).
  typedef struct packed {
    fx_t pos_x, pos_y, pos_z;
    fx_t vx, vy, vz;
  } ref_point_t;

  // Saturate a Q48.16 value to Q16.16.
  function automatic fx_t fx_sat(input fx_wide_t v);
    if (v > fx_wide_t'(FX_MAX))      return FX_MAX;
    else if (v < fx_wide_t'(FX_MIN)) return FX_MIN;
    else                             return fx_t'(v);
  endfunction

  // Q16.16 x Q16.16 -> Q16.16 with saturation.
  function automatic fx_t fx_mul(input fx_t a, input fx_t b);
    fx_wide_t p;
    p = (fx_wide_t'(a) * fx_wide_t'(b)) >>> FX_FRAC;
    return fx_sat(p);
  endfunction

  // Wide Q48.16 x Q48.16 -> Q48.16 (caller keeps operands small enough).
  function automatic fx_wide_t fxw_mul(input fx_wide_t a, input fx_wide_t b);
    return (a * b) >>> FX_FRAC;
  endfunction

  function automatic fx_t fx_clamp(input fx_t v, input fx_t lo, input fx_t hi);
    if (v < lo)      return lo;
    else if (v > hi) return hi;
    else             return v;
  endfunction

  // Leaky ReLU with slope 0.01 on the negative side.
  function automatic fx_t fx_lrelu(input fx_t v);
    if (v[FX_W-1]) return fx_mul(v, FX_LRELU);
    else           return v;
  endfunction

  // 2^(-2^(-i)) for i = 1..16 in Q2.30, used to build 2^(-f) bit by bit:
  // 2^(-f) = prod over set fraction bits b_i of f of 2^(-2^(-i)).
  function automatic logic [31:0] exp2_frac_const(input int unsigned i);
    case (i)
      1:  return 32'h2d413ccd;
      2:  return 32'h35d13f33;
      3:  return 32'h3ab031ba;
      4:  return 32'h3d495f45;
      5:  return 32'h3ea0ecb7;
      6:  return 32'h3f4f8303;
      7:  return 32'h3fa78457;
      8:  return 32'h3fd3b2d6;
      9:  return 32'h3fe9d595;
      10: return 32'h3ff4e9d4;
      11: return 32'h3ffa74ad;
      12: return 32'h3ffd3a47;
      13: return 32'h3ffe9d20;
      14: return 32'h3fff4e8f;
      15: return 32'h3fffa747;
      16: return 32'h3fffd3a4;
      default: return 32'h4000_0000;
    endcase
  endfunction

  // Offsets of the DNN parameter memory. Layer l occupies, neuron by neuron,
  // one bias followed by the neuron's fan-in weights.
  function automatic int unsigned dnn_layer_words(input int unsigned fan_in,
                                                  input int unsigned fan_out);
    return fan_out * (fan_in + 1);
  endfunction

endpackage
