// ebp_pkg -- constants and fixed-point formats shared by the error
// backpropagation (EBP) TI-ADC calibration datapath.
//
// The receiver handles four real signal components (H/I, H/Q, V/I, V/Q of a
// dual-polarisation coherent receiver), sampled at twice the symbol rate
// (T/Ts = 2) by an M-way time-interleaved ADC. All datapath values are two's
// complement fixed point, expressed in ADC LSBs with a number of fractional
// bits given below. The structural numbers (4 components, M = 16, L_g = 7,
// T/Ts = 2, 8-bit ADC, N = 8192 sample blocks) follow the paper's simulation
// set-up; every word width and fractional split is this design's own choice.
package ebp_pkg;

  // Signal components: 1 = H/I, 2 = H/Q, 3 = V/I, 4 = V/Q (index 0..3 here).
  localparam int unsigned NCH = 4;
  // The receiver DSP runs at T/Ts = 2 samples per symbol (see rx_dsp_mimo).

  // ADC resolution.
  localparam int unsigned ADC_W = 8;

  // CE input w = y - o_hat: 2 fractional bits (quarter LSB).
  localparam int unsigned W_W    = 12;
  localparam int unsigned W_FRAC = 2;
  // CE coefficients, Q2.14 (1.0 = 16384).
  localparam int unsigned G_W    = 16;
  localparam int unsigned G_FRAC = 14;
  // LMS accumulators keep 16 more fractional bits than the coefficients.
  localparam int unsigned ACC_W    = 32;
  localparam int unsigned ACC_XTRA = 16;
  // CE output x, same scale as w.
  localparam int unsigned X_W = 14;
  // Receiver DSP coefficients Gamma, Q2.10.
  localparam int unsigned GM_W    = 12;
  localparam int unsigned GM_FRAC = 10;
  // DSP output u and slicer error e, same scale as w.
  localparam int unsigned U_W = 16;
  // Backpropagated error e_hat.
  localparam int unsigned EH_W = 18;
  // Digital offset estimate, same scale as w.
  localparam int unsigned OFS_W = 12;
  // Sample index carried with every sample through the pipeline.
  localparam int unsigned IDX_W = 24;

  // Mixed-signal codes. Delay cell: 260 fs step, +-50 ps range
  // -> +-192 steps, 9-bit signed code.
  localparam int unsigned TAU_CODE_W   = 9;
  localparam int          TAU_CODE_MAX = 192;
  // Gain code: gain = 1 + code / 2^GAIN_CODE_FRAC.
  localparam int unsigned GAIN_CODE_W    = 8;
  localparam int unsigned GAIN_CODE_FRAC = 9;

  typedef logic signed [ADC_W-1:0] adc_t;
  typedef logic signed [W_W-1:0]   w_t;
  typedef logic signed [G_W-1:0]   g_t;
  typedef logic signed [X_W-1:0]   x_t;
  typedef logic signed [GM_W-1:0]  gm_t;
  typedef logic signed [U_W-1:0]   u_t;
  typedef logic signed [EH_W-1:0]  eh_t;
  typedef logic signed [OFS_W-1:0] ofs_t;
  typedef logic [IDX_W-1:0]        idx_t;

  // Calibration variant.
  typedef enum logic {
    CAL_DIGITAL = 1'b0,   // CE active, CE coefficients and offsets adapted
    CAL_MIXED   = 1'b1    // CE bypassed, analog gain/phase/offset adapted
  } cal_mode_e;

  // Saturate a wide signed value to a narrower width.
  function automatic logic signed [63:0] sat(input logic signed [63:0] v,
                                             input int unsigned w);
    logic signed [63:0] hi, lo;
    hi = (64'sd1 <<< (w - 1)) - 64'sd1;
    lo = -(64'sd1 <<< (w - 1));
    if (v > hi)      return hi;
    else if (v < lo) return lo;
    else             return v;
  endfunction

  // Arithmetic right shift with round-half-up.
  function automatic logic signed [63:0] rshift_rnd(input logic signed [63:0] v,
                                                    input logic [5:0] s);
    if (s == 0) return v;
    return (v + (64'sd1 <<< (s - 1))) >>> s;
  endfunction

endpackage
