// pwl_pkg: number format, model selector and constants shared by the
// piecewise-linear (PWL) spiking neuron array.
//
// All neuron quantities (v, u, I, weights) are 20-bit two's complement
// fixed-point numbers with 8 integer and 12 fractional bits (8.12), the
// format the design is built around. The constants below are the model
// coefficients scaled by 2^12. Values taken from the PWL models: the 62.5 mV
// offset of the nonlinearity, the 2PWL/3PWL/4PWL k coefficients of the
// tonic-spiking row, the recovery constants a = 1/8+1/16+1/64 and
// b = 1/4+1/16, the 30 mV spike apex and dt = 2^-14. Our own choices: the
// tonic-spiking reset values c = -65 mV and d = 6 (the usual Izhikevich
// tonic-spiking pair), the start state u = b*c, and rounding of k values that
// are not exact in 8.12 (5.8 and 23.2) to the nearest code.
package pwl_pkg;

  localparam int VB   = 20;             // word length of v, u, I
  localparam int FRAC = 12;             // fractional bits (8.12)

  typedef logic signed [VB-1:0] fx_t;

  // Nonlinearity used by the V pipeline.
  typedef enum logic [1:0] {
    PWL2 = 2'd0,                        // two crossed lines, eq. (3)
    PWL3 = 2'd1,                        // three lines, eq. (4)
    PWL4 = 2'd2                         // four lines, eq. (5)
  } pwl_model_e;

  // Pipeline depth of the V equation for each model (5 / 6 / 7 stages).
  function automatic int v_stages(pwl_model_e m);
    case (m)
      PWL2:    return 5;
      PWL3:    return 6;
      default: return 7;
    endcase
  endfunction

  // Model constants, value * 4096.
  localparam fx_t FX_OFFSET  = fx_t'(256000);   // 62.5
  localparam fx_t FX_P2_K2   = fx_t'(81920);    // 2PWL k2 = 20
  localparam fx_t FX_P3_K2   = fx_t'(23757);    // 3PWL k2 = 5.8
  localparam fx_t FX_P3_K321 = fx_t'(95027);    // 3PWL k3*k2*k1 = 6.4*5.8*0.625 = 23.2
  localparam fx_t FX_P4_K3   = fx_t'(45056);    // 4PWL k3 = 11
  localparam fx_t FX_P4_4K23 = fx_t'(135168);   // 4PWL 4*k2*k3 = 33

  localparam fx_t FX_VTH     = fx_t'(122880);   // spike apex 30 mV
  localparam fx_t FX_C       = fx_t'(-266240);  // reset potential c = -65 mV
  localparam fx_t FX_D       = fx_t'(24576);    // recovery jump d = 6
  localparam fx_t FX_U0      = fx_t'(-83200);   // start value u = b*c = -20.3125

  localparam int  DT_SHIFT_DEFAULT = 14;        // dt = 1/(16*1024)

  // Saturate a wide signed value to VB bits.
  localparam int SW = VB + 8;
  localparam logic signed [SW-1:0] SAT_MAX = SW'((1 <<< (VB-1)) - 1);
  localparam logic signed [SW-1:0] SAT_MIN = -SW'(1 <<< (VB-1));

  function automatic fx_t sat_fx(input logic signed [SW-1:0] x);
    if (x > SAT_MAX)      return fx_t'(SAT_MAX);
    else if (x < SAT_MIN) return fx_t'(SAT_MIN);
    else                  return fx_t'(x);
  endfunction

endpackage
