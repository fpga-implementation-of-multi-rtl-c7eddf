// kerr_bp: backward step of a Kerr (nonlinear) layer.
//
// Forward, the layer maps u to v = u exp(j phi), phi = gamma_bar ||u||^2.
// Writing gradients of the real loss as complex numbers
// (g = dL/dRe v + j dL/dIm v), the chain rule gives the gradient with respect
// to the layer input u:
//   w_p = g_p exp(-j phi)                          (p = x, y)
//   s   = sum_p ( Im(w_p) Re(u_p) - Re(w_p) Im(u_p) )
//   d_p = w_p + 2 gamma_bar s u_p
// The first term undoes the rotation, the second carries the dependence of
// the angle on the signal power.
//
// How it works: the angle is recomputed from u (taken from the Kerr shift
// register, i.e. the forward input of this layer delayed to meet g) exactly
// as in the forward layer, then exp(-j phi) is approximated by the Taylor
// polynomials cos ~ 1 - phi^2/2 + phi^4/24 and sin ~ phi - phi^3/6 +
// phi^5/120 (Q1.12, clamped to [-1, 1]), so no table is needed. The
// polynomials are within 0.02 of cos and sin up to 1.5 rad; beyond that the
// backward rotation is only approximate, while the forward layer stays exact.
// Stage 1: angle. Stage 2: w (kept with 4 guard bits). Stage 3: s, the power
// term and the sum, rounded to Q-2.15 and saturated.
//
// Interface and timing: g (backward) and u (forward) frames of the same
// samples enter together, one frame per clock; dout follows LAT_KERR_BP = 3
// enabled clocks later.
//
// From the reference design: the use of a Taylor expansion in this layer and
// the 12-bit angle. This design's choices: the expansion order, the formats
// and the pipeline.
module kerr_bp
  import eq_pkg::*;
(
  input  logic   clk,
  input  logic   rst_n,
  input  logic   en,
  input  gamma_t gamma_bar,
  input  frame_t g,
  input  frame_t u,
  output frame_t dout
);

  localparam int GB     = 4;                 // guard bits of w
  localparam int FRAC_W = FRAC_BP + GB;      // Q.19
  typedef logic signed [WL_SIG+GB+1:0] w_t;  // 20 bits
  typedef w_t [3:0] wvec_t;

  localparam int INV6   = ((1 << 16) + 3) / 6;      // 1/6 in Q.16
  localparam int INV24  = ((1 << 16) + 12) / 24;    // 1/24 in Q.16
  localparam int INV120 = ((1 << 16) + 60) / 120;   // 1/120 in Q.16
  localparam longint ONE_T = 64'sd1 <<< FRAC_TRIG;

  function automatic logic signed [63:0] clamp1(input logic signed [63:0] v);
    if (v > ONE_T)       return ONE_T;
    else if (v < -ONE_T) return -ONE_T;
    else                 return v;
  endfunction

  // ---- stage 1: angle ----
  phi_t   phi1 [SPC];
  frame_t u1, g1;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      u1 <= '0;
      g1 <= '0;
      for (int i = 0; i < SPC; i++) phi1[i] <= '0;
    end else if (en) begin
      u1 <= u;
      g1 <= g;
      for (int i = 0; i < SPC; i++) begin
        logic signed [63:0] pw, ph;
        vec4_t w;
        w  = vec4_t'(u[i]);
        pw = 0;
        for (int c = 0; c < 4; c++) pw = pw + 64'(w[c]) * 64'(w[c]);
        ph = rshift_rnd(pw * $signed({1'b0, gamma_bar}),
                        2 * FRAC_SIG + FRAC_GAMMA - FRAC_PHI);
        phi1[i] <= (ph > (1 << WL_PHI) - 1) ? phi_t'((1 << WL_PHI) - 1) : phi_t'(ph);
      end
    end
  end

  // ---- stage 2: w = g * exp(-j phi), Taylor expansion ----
  wvec_t  w2 [SPC];
  frame_t u2;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      u2 <= '0;
      for (int i = 0; i < SPC; i++) w2[i] <= '0;
    end else if (en) begin
      u2 <= u1;
      for (int i = 0; i < SPC; i++) begin
        logic signed [63:0] ph, ph2, ph3, ph4, ph5, cs, sn, re, im;
        vec4_t gv;
        wvec_t wo;
        gv  = vec4_t'(g1[i]);
        ph  = 64'($signed({1'b0, phi1[i]}));                          // Q.10
        ph2 = ph * ph;                                                // Q.20
        ph3 = ph2 * ph;                                               // Q.30
        ph4 = rshift_rnd(ph2 * ph2, 2 * FRAC_PHI);                    // Q.20
        ph5 = rshift_rnd(ph4 * ph, FRAC_PHI);                         // Q.20
        cs  = clamp1(ONE_T - rshift_rnd(ph2, 2 * FRAC_PHI - FRAC_TRIG + 1)
                     + rshift_rnd(ph4 * INV24, 2 * FRAC_PHI + 16 - FRAC_TRIG));
        sn  = clamp1((ph <<< (FRAC_TRIG - FRAC_PHI))
                     - rshift_rnd(ph3 * INV6, 3 * FRAC_PHI + 16 - FRAC_TRIG)
                     + rshift_rnd(ph5 * INV120, 2 * FRAC_PHI + 16 - FRAC_TRIG));
        for (int p = 0; p < NPOL; p++) begin
          re = 64'(gv[re_idx(p)]) * cs + 64'(gv[im_idx(p)]) * sn;     // Q.27
          im = 64'(gv[im_idx(p)]) * cs - 64'(gv[re_idx(p)]) * sn;
          wo[re_idx(p)] = w_t'(rshift_rnd(re, FRAC_BP + FRAC_TRIG - FRAC_W));
          wo[im_idx(p)] = w_t'(rshift_rnd(im, FRAC_BP + FRAC_TRIG - FRAC_W));
        end
        w2[i] <= wo;
      end
    end
  end

  // ---- stage 3: d = w + 2 gamma_bar s u ----
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      dout <= '0;
    end else if (en) begin
      for (int i = 0; i < SPC; i++) begin
        logic signed [63:0] s, sg, t;
        vec4_t uv, o;
        uv = vec4_t'(u2[i]);
        s  = 0;
        for (int p = 0; p < NPOL; p++)
          s = s + 64'(w2[i][im_idx(p)]) * 64'(uv[re_idx(p)])
                - 64'(w2[i][re_idx(p)]) * 64'(uv[im_idx(p)]);          // Q.30
        sg = rshift_rnd(s * $signed({1'b0, gamma_bar}), FRAC_GAMMA);    // Q.30
        for (int c = 0; c < 4; c++) begin
          // Q.30 x Q.11 = Q.41 -> Q.19
          t    = rshift_rnd(2 * sg * 64'(uv[c]), 30 + FRAC_SIG - FRAC_W);
          o[c] = sat_sig(rshift_rnd(64'(w2[i][c]) + t, GB));
        end
        dout[i] <= samp_t'(o);
      end
    end
  end

endmodule
