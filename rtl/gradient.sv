// gradient: gradient layer and parameter store of one linear (MIMO-FIR)
// layer; trains the layer's 20 taps by mini-batch stochastic gradient
// descent.
//
// For the forward layer out_p[n] = sum_q sum_k h[p][q][k] in_q[n-k] (real and
// imaginary parts filtered alike) the loss gradient of a tap is
//   dL/dh[p][q][k] = sum_n ( Re d_p[n] Re in_q[n-k] + Im d_p[n] Im in_q[n-k] )
// where d is the gradient arriving from the backward path at the layer's
// output and in is the layer's forward input, delayed by a shift register so
// that in[n] and d[n] arrive in the same clock.
//
// How it works: each clock adds the contributions of the frame's two samples
// to 20 accumulators (40 bits, exact). After B frames (one batch) the sums are
// rounded to 14-bit gradient words (Q-2.16) and, when train_en is high, every
// tap is updated as
//   h <- h - round(grad * 2^-(4 + lr_shift))
// i.e. the learning rate is xi = 2^-lr_shift in tap units; the accumulators
// then restart. Taps reset to the identity filter (centre tap 1.0 on the
// diagonal) and can be overwritten at any time through cfg_we/cfg_idx/
// cfg_data, e.g. to start from a precomputed channel inverse.
//
// Interface and timing: u and d are frames of the same samples; taps is the
// packed [p][q][k] array fed to the forward layer and its backward layer.
// upd pulses for one clock in the clock after the taps changed by training;
// grad holds the last batch's gradient words. cfg_idx = 10 p + 5 q + k.
//
// From the reference design: SGD with batch size B = 21, 20 coefficients per
// step, 14-bit taps and gradient words, the tap updates sent to the forward
// layer. This design's choices: power-of-two learning rate, the reset value,
// the configuration port and the batch framing at this layer.
module gradient
  import eq_pkg::*;
#(
  parameter int B = BATCH
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                en,
  input  logic                train_en,
  input  logic [3:0]          lr_shift,
  input  frame_t              u,
  input  frame_t              d,
  input  logic                cfg_we,
  input  logic [4:0]          cfg_idx,
  input  tap_t                cfg_data,
  output taps_t               taps,
  output taps_t               grad,
  output logic                upd
);

  localparam int NH   = (NTAPS - 1 + SPC - 1) / SPC;   // 2 history frames
  localparam int NW   = (NH + 1) * SPC;
  localparam int ACCW = 40;
  localparam int CW   = $clog2(B + 1);

  typedef logic signed [ACCW-1:0] acc_t;

  frame_t         hist [NH];
  acc_t           acc [NPOL][NPOL][NTAPS];
  logic [CW-1:0]  cnt;

  function automatic tap_t sat_tap(input logic signed [63:0] v);
    localparam logic signed [63:0] MAXV = (64'sd1 <<< (WL_TAP - 1)) - 1;
    if (v > MAXV)       return tap_t'(MAXV);
    else if (v < -MAXV - 1) return tap_t'(-MAXV - 1);
    else                return tap_t'(v);
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int h = 0; h < NH; h++) hist[h] <= '0;
      for (int p = 0; p < NPOL; p++)
        for (int q = 0; q < NPOL; q++)
          for (int k = 0; k < NTAPS; k++) acc[p][q][k] <= '0;
      cnt  <= '0;
      taps <= identity_taps();
      grad <= '0;
      upd  <= 1'b0;
    end else begin
      upd <= 1'b0;
      if (en) begin
        vec4_t win [NW];
        vec4_t dv [SPC];
        for (int h = 0; h < NH; h++)
          for (int i = 0; i < SPC; i++)
            win[(NH - 1 - h) * SPC + i] = vec4_t'(hist[h][i]);
        for (int i = 0; i < SPC; i++) begin
          win[NH * SPC + i] = vec4_t'(u[i]);
          dv[i]             = vec4_t'(d[i]);
        end

        for (int p = 0; p < NPOL; p++)
          for (int q = 0; q < NPOL; q++)
            for (int k = 0; k < NTAPS; k++) begin
              logic signed [63:0] sum, g14, step;
              sum = 64'(acc[p][q][k]);
              for (int i = 0; i < SPC; i++)
                sum = sum
                    + 64'(dv[i][re_idx(p)]) * 64'(win[NH * SPC + i - k][re_idx(q)])
                    + 64'(dv[i][im_idx(p)]) * 64'(win[NH * SPC + i - k][im_idx(q)]);
              if (cnt == CW'(B - 1)) begin
                // end of batch: gradient word and tap update
                g14  = 64'(sat_tap(rshift_rnd(sum, FRAC_BP + FRAC_SIG - FRAC_GRAD)));
                step = rshift_rnd(g14, FRAC_GRAD - FRAC_TAP + int'(lr_shift));
                grad[p][q][k] <= tap_t'(g14);
                if (train_en) taps[p][q][k] <= sat_tap(64'(taps[p][q][k]) - step);
                acc[p][q][k] <= '0;
              end else begin
                acc[p][q][k] <= acc_t'(sum);
              end
            end

        if (cnt == CW'(B - 1)) begin
          cnt <= '0;
          upd <= train_en;
        end else begin
          cnt <= cnt + 1'b1;
        end

        hist[0] <= u;
        for (int h = 1; h < NH; h++) hist[h] <= hist[h - 1];
      end
      // configuration write (wins over a training update in the same clock)
      if (cfg_we)
        taps[cfg_idx / (NPOL * NTAPS)][(cfg_idx / NTAPS) % NPOL][cfg_idx % NTAPS] <= cfg_data;
    end
  end

endmodule
