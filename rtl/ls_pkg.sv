// ls_pkg: word lengths, fixed-point formats, data types and helper functions shared by the
// heterogeneous least-squares (LS) calibration accelerator.
//
// The accelerator computes StEFCal antenna gains, g_p = (V^H_{:,p} . Z_{:,p}) / (Z^H_{:,p} . Z_{:,p})
// with Z_{:,p} = M_{:,p} (element-wise) g, one column p at a time, from a stream of (g_k, m_kp, v_kp)
// elements. Every signal is a two's-complement fixed-point number whose least significant bit
// weighs 2^-FR_x.
//
// From the published design: the word lengths of h, t (real/imag of v, 18 bits), e_sac (21),
// f_sac (20), e_mac (23) and f_mac (24), the 28-bit ceiling on every signal of the accurate core,
// and the approximate core's truncation counts (0, 0, 8, 8, 8, 12 bits).
// This implementation's own choices: the word lengths of g and m (18 bits), the position of every
// binary point (FR_*), the 28-bit accumulators, rounding to nearest (halves up) where a
// product is requantised, truncation (floor) where LSBs are dropped from z, and
// saturation where a quantised value leaves its word length.
package ls_pkg;

  // ---- word lengths given for the accurate core ----
  localparam int W_H     = 18;  // h = real(v)
  localparam int W_T     = 18;  // t = imag(v)
  localparam int W_E_SAC = 21;  // e_sac = real(z) into the squarer
  localparam int W_F_SAC = 20;  // f_sac = imag(z) into the squarer
  localparam int W_E_MAC = 23;  // e_mac = real(z) into the MAC multipliers
  localparam int W_F_MAC = 24;  // f_mac = imag(z) into the MAC multipliers
  localparam int W_MAX   = 28;  // no signal of the accurate core is wider

  // ---- bits truncated in the approximate core ----
  localparam int TR_AX_H     = 0;
  localparam int TR_AX_T     = 0;
  localparam int TR_AX_E_SAC = 8;
  localparam int TR_AX_F_SAC = 8;
  localparam int TR_AX_E_MAC = 8;
  localparam int TR_AX_F_MAC = 12;

  // ---- this implementation's choices ----
  localparam int W_G   = 18;           // a, b = real/imag of a gain
  localparam int FR_G  = 14;           // gains in [-8, 8)
  localparam int W_M   = 18;           // c, d = real/imag of a model visibility
  localparam int FR_M  = 16;           // model visibilities in [-2, 2)
  localparam int FR_V  = 12;           // h, t: measured visibilities in [-32, 32)
  localparam int FR_E_MAC = 18;        // real(z) in [-16, 16)
  localparam int FR_F_MAC = 19;        // imag(z) in [-16, 16)
  localparam int FR_E_SAC = FR_E_MAC - (W_E_MAC - W_E_SAC);  // 16: same range, fewer LSBs
  localparam int FR_F_SAC = FR_F_MAC - (W_F_MAC - W_F_SAC);  // 15
  localparam int W_ACC  = W_MAX;       // mac_real, mac_imag, sac and every product
  localparam int FR_MAC = 15;          // mac_real, mac_imag in [-4096, 4096)
  localparam int FR_SAC = 16;          // sac in [0, 2048)
  // The quotient mac/sac carries FR_MAC - FR_SAC fraction bits; the divider pre-shifts the
  // numerator so that the gain comes out with FR_G fraction bits.
  localparam int DIV_SHIFT = FR_G + FR_SAC - FR_MAC;

  typedef logic signed [W_ACC-1:0] acc_t;

  typedef struct packed {
    logic signed [W_G-1:0] re;  // a
    logic signed [W_G-1:0] im;  // b
  } gain_t;

  typedef struct packed {
    logic signed [W_M-1:0] re;  // c
    logic signed [W_M-1:0] im;  // d
  } model_t;

  typedef struct packed {
    logic signed [W_H-1:0] re;  // h
    logic signed [W_T-1:0] im;  // t
  } vis_t;

  // One element of a column: g_k, m_kp and v_kp (v taken from V^H_{:,p}, see ls_mac).
  typedef struct packed {
    gain_t  g;
    model_t m;
    vis_t   v;
  } beat_t;

  typedef enum logic {
    CORE_ACC = 1'b0,   // accurate core
    CORE_APX = 1'b1    // approximate core
  } core_sel_e;

  // Requantise a product: drop n fraction bits rounding to nearest (halves round up), or shift
  // left by -n when n is negative.
  function automatic longint shr(input longint x, input int n);
    return (n > 0) ? ((x + (64'sd1 <<< (n - 1))) >>> n) : (x <<< (-n));
  endfunction

  // Clamp x to the range of a w-bit two's-complement number.
  function automatic longint sat(input longint x, input int w);
    longint hi, lo;
    hi = (64'sd1 <<< (w - 1)) - 64'sd1;
    lo = -(64'sd1 <<< (w - 1));
    if (x > hi) return hi;
    if (x < lo) return lo;
    return x;
  endfunction

endpackage
