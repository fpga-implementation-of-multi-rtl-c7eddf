// eq_pkg: word lengths, fixed-point formats, data types and pipeline
// latencies shared by every block of the machine-learning equalizer.
//
// The equalizer streams one symbol per clock, i.e. two samples per clock
// (the signal is at 2 samples/symbol). A sample is the dual-polarization
// Jones vector (x and y polarization, each complex) = four signed words.
//
// Word lengths follow the five word lengths {14,16,12,14,12} of the
// reference design: signal and back-propagation words 14 bits, gamma_bar
// 16 bits, Kerr angle 12 bits, linear taps and gradients 14 bits, matched
// filter taps 12 bits. The number of fractional bits in each word is this
// design's choice (the reference only fixes the lengths):
//   forward signal      Q2.11  (range +-4)
//   backward gradient   Q-2.15 (range +-0.25, same 14 bits, finer LSB)
//   gamma_bar           unsigned Q0.16
//   Kerr angle phi      unsigned Q2.10 (0 .. 4 rad, saturating)
//   linear taps         Q1.12  (range +-2)
//   gradient words      Q-2.16
//   matched filter taps Q0.11
// The latencies below are the register stages of each block; the top
// derives every shift-register depth from them.
package eq_pkg;

  // ---- word lengths ----
  localparam int WL_SIG   = 14;  // samples/symbols and BP signals
  localparam int WL_GAMMA = 16;  // gamma_bar = 8/9 * gamma * L
  localparam int WL_PHI   = 12;  // Kerr angle
  localparam int WL_TAP   = 14;  // linear taps and gradients
  localparam int WL_MF    = 12;  // matched-filter taps

  // ---- fractional bits ----
  localparam int FRAC_SIG   = 11;
  localparam int FRAC_BP    = 15;
  localparam int FRAC_GAMMA = 16;
  localparam int FRAC_PHI   = 10;
  localparam int FRAC_TAP   = 12;
  localparam int FRAC_GRAD  = 16;
  localparam int FRAC_MF    = 11;
  localparam int FRAC_TRIG  = 12;  // cos/sin words inside the Kerr blocks

  // ---- structure ----
  localparam int SPC       = 2;   // samples per clock (one symbol)
  localparam int NTAPS     = 5;   // taps of each MIMO-FIR
  localparam int NPOL      = 2;   // polarizations
  localparam int MF_TAPS   = 33;  // matched-filter taps
  localparam int BATCH     = 21;  // batch size B

  // ---- pipeline latencies (clocks) ----
  localparam int LAT_KERR_FP = 2;
  localparam int LAT_LIN_FP  = 1;
  localparam int LAT_MF_FP   = 1;
  localparam int LAT_LOSS_BP = 1;
  localparam int LAT_MF_BP   = 1;
  localparam int LAT_LIN_BP  = 1;
  localparam int LAT_KERR_BP = 3;
  // look-ahead of the transposed filters, in frames
  localparam int LA_MF_BP    = (MF_TAPS - 1) / 2;          // 16
  localparam int LA_LIN_BP   = (NTAPS - 1 + SPC - 1) / SPC; // 2
  // filter group delays in frames (symbols): 3 linear steps + MF
  localparam int GD_FRAMES   = 3 * ((NTAPS - 1) / 2) / SPC + (MF_TAPS - 1) / 2 / SPC;

  // ---- types ----
  typedef logic signed [WL_SIG-1:0] sig_t;
  typedef logic signed [WL_TAP-1:0] tap_t;
  typedef logic signed [WL_MF-1:0]  mftap_t;
  typedef logic [WL_GAMMA-1:0]      gamma_t;
  typedef logic [WL_PHI-1:0]        phi_t;

  // one dual-polarization complex sample (or symbol)
  typedef struct packed {
    sig_t xr;
    sig_t xi;
    sig_t yr;
    sig_t yi;
  } samp_t;

  // the same sample as four words: [3]=xr [2]=xi [1]=yr [0]=yi
  typedef sig_t [3:0] vec4_t;

  // word index of the real / imaginary part of polarization p in a vec4_t
  function automatic int re_idx(input int p); return 3 - 2 * p; endfunction
  function automatic int im_idx(input int p); return 2 - 2 * p; endfunction

  // one clock's worth of samples: [0] is the earlier sample
  typedef samp_t [SPC-1:0] frame_t;

  // taps of a 2x2 MIMO-FIR: [out pol p][in pol q][tap k]
  typedef tap_t [NPOL-1:0][NPOL-1:0][NTAPS-1:0] taps_t;

  typedef mftap_t [MF_TAPS-1:0] mftaps_t;

  // truncated root-raised-cosine, roll-off 0.1, 2 samples/symbol, 33 taps,
  // unit energy, rounded to Q0.11:  f[m] = round(2048 * r((m-16)/2) / ||r||)
  // with r(t) = [sin(pi t (1-a)) + 4 a t cos(pi t (1+a))] / [pi t (1-(4 a t)^2)],
  // a = 0.1, r(0) = 1 - a + 4a/pi.
  localparam mftaps_t MF_RRC = {
    12'sd20, -12'sd22, -12'sd24, 12'sd34, 12'sd27, -12'sd51, -12'sd31, 12'sd74,
    12'sd34, -12'sd109, -12'sd36, 12'sd168, 12'sd38, -12'sd297, -12'sd39, 12'sd919,
    12'sd1488,
    12'sd919, -12'sd39, -12'sd297, 12'sd38, 12'sd168, -12'sd36, -12'sd109, 12'sd34,
    12'sd74, -12'sd31, -12'sd51, 12'sd27, 12'sd34, -12'sd24, -12'sd22, 12'sd20};

  // saturate a wide signed value to a 14-bit word
  function automatic sig_t sat_sig(input logic signed [63:0] v);
    localparam logic signed [63:0] MAXV = (64'sd1 <<< (WL_SIG - 1)) - 1;
    localparam logic signed [63:0] MINV = -(64'sd1 <<< (WL_SIG - 1));
    if (v > MAXV)      return sig_t'(MAXV);
    else if (v < MINV) return sig_t'(MINV);
    else               return sig_t'(v);
  endfunction

  // arithmetic shift right with rounding (round half up), sh >= 1
  function automatic logic signed [63:0] rshift_rnd(input logic signed [63:0] v,
                                                    input int sh);
    if (sh <= 0) return v <<< (-sh);
    return (v + (64'sd1 <<< (sh - 1))) >>> sh;
  endfunction

  // identity MIMO filter: h[p][p][centre] = 1.0
  function automatic taps_t identity_taps();
    taps_t t;
    t = '0;
    for (int p = 0; p < NPOL; p++)
      t[p][p][(NTAPS-1)/2] = tap_t'(1 <<< FRAC_TAP);
    return t;
  endfunction

endpackage
