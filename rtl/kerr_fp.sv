// kerr_fp: forward Kerr (nonlinear) step of the equalizer.
//
// Each sample's Jones vector u = (ux, uy) is rotated by the nonlinear phase
//   v = u * exp(j * phi),  phi = gamma_bar * (|ux|^2 + |uy|^2),
// the fixed, non-trainable step of the split-step model. gamma_bar stands for
// 8/9 * gamma * L and is a run-time input so one bitstream serves several
// launch powers.
//
// How it works: stage 1 forms the power |u|^2 of each sample, multiplies by
// gamma_bar and rounds the product to a 12-bit angle (unsigned Q2.10,
// saturating at just below 4 rad). Stage 2 reads cos(phi) and sin(phi) from a
// 4096-entry table (Q1.12) and performs the complex rotation on both
// polarizations, rounding and saturating to 14-bit words. The table is filled
// at elaboration by an exact-to-the-LSB integer rotation recurrence (a ROM on
// an FPGA).
//
// Interface: din/dout carry one frame (two samples) per clock; every
// register advances only when en is high. Latency: LAT_KERR_FP = 2 enabled
// clocks.
//
// From the reference design: the Kerr step itself, the 12-bit angle and
// 16-bit gamma_bar word lengths, two samples per clock (inferred from its DSP
// count). This design's own choices: the table-based rotation (the reference
// only calls its Kerr layer "hardware friendly"), the fractional formats and
// the pipeline depth.
module kerr_fp
  import eq_pkg::*;
(
  input  logic   clk,
  input  logic   rst_n,
  input  logic   en,
  input  gamma_t gamma_bar,
  input  frame_t din,
  output frame_t dout
);

  localparam int NROM = 1 << WL_PHI;

  // ---- cos/sin table ----
  // cos_rom[i] = round(2^12 cos(i / 2^10)), sin_rom[i] likewise. The table is
  // generated by the rotation recurrence
  //   c[i+1] = c[i] C - s[i] S,  s[i+1] = s[i] C + c[i] S
  // with C = cos(2^-10), S = sin(2^-10) held in Q2.30; to Q2.30 precision
  // C = 1 - 2^-21 and S = 2^-10 (the next Taylor terms are below 2^-31).
  // The accumulated error over 4096 steps stays below 10^-5, far under the
  // table's LSB of 2.4 * 10^-4.
  localparam longint ONE30 = 64'sd1 <<< 30;
  localparam longint COSD  = ONE30 - (64'sd1 <<< (30 - 2 * FRAC_PHI - 1));
  localparam longint SIND  = 64'sd1 <<< (30 - FRAC_PHI);

  sig_t cos_rom [NROM];
  sig_t sin_rom [NROM];

  initial begin
    longint c, s, cn;
    c = ONE30;
    s = 0;
    for (int i = 0; i < NROM; i++) begin
      cos_rom[i] = sat_sig(rshift_rnd(c, 30 - FRAC_TRIG));
      sin_rom[i] = sat_sig(rshift_rnd(s, 30 - FRAC_TRIG));
      cn = rshift_rnd(c * COSD - s * SIND, 30);
      s  = rshift_rnd(s * COSD + c * SIND, 30);
      c  = cn;
    end
  end

  // ---- stage 1: angle ----
  phi_t   phi_r [SPC];
  frame_t u_r;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      u_r <= '0;
      for (int i = 0; i < SPC; i++) phi_r[i] <= '0;
    end else if (en) begin
      u_r <= din;
      for (int i = 0; i < SPC; i++) begin
        logic signed [63:0] pw, ph;
        vec4_t w;
        w  = vec4_t'(din[i]);
        pw = 0;
        for (int c = 0; c < 4; c++) pw = pw + 64'(w[c]) * 64'(w[c]);    // Q.22
        ph = rshift_rnd(pw * $signed({1'b0, gamma_bar}),
                        2 * FRAC_SIG + FRAC_GAMMA - FRAC_PHI);        // Q.10
        phi_r[i] <= (ph > 64'(NROM - 1)) ? phi_t'(NROM - 1) : phi_t'(ph);
      end
    end
  end

  // ---- stage 2: rotation ----
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      dout <= '0;
    end else if (en) begin
      for (int i = 0; i < SPC; i++) begin
        vec4_t w, o;
        logic signed [63:0] cs, sn, re, im;
        w  = vec4_t'(u_r[i]);
        cs = 64'(cos_rom[phi_r[i]]);
        sn = 64'(sin_rom[phi_r[i]]);
        for (int p = 0; p < NPOL; p++) begin
          re = 64'(w[re_idx(p)]) * cs - 64'(w[im_idx(p)]) * sn;
          im = 64'(w[re_idx(p)]) * sn + 64'(w[im_idx(p)]) * cs;
          o[re_idx(p)] = sat_sig(rshift_rnd(re, FRAC_TRIG));
          o[im_idx(p)] = sat_sig(rshift_rnd(im, FRAC_TRIG));
        end
        dout[i] <= samp_t'(o);
      end
    end
  end

endmodule
