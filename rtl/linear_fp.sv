// linear_fp: trainable linear step of the equalizer, a real-valued 2x2
// MIMO-FIR filter with NTAPS (= 5) taps.
//
// The same real filter is applied to the real parts and, separately, to the
// imaginary parts of the two polarizations:
//   out_p[n] = sum_q sum_k h[p][q][k] * in_q[n-k],   p, q in {x, y}
// which is 2 x 2 x 5 = 20 real coefficients per step. The taps come from the
// gradient block that trains them and may change between any two clocks.
//
// How it works: the block keeps the last two input frames, lays them out with
// the current frame as a six-sample window and forms both output samples of
// the frame from it in one clock; products are Q1.12 x Q2.11, the sum is
// rounded back to Q2.11 and saturated to 14 bits.
//
// Interface and timing: one frame (2 samples) per clock on din/dout, taps as
// a packed [p][q][k] array; registers advance when en is high; latency
// LAT_LIN_FP = 1 enabled clock. The output is causal: the centre tap k = 2
// gives a group delay of 2 samples (one frame).
//
// From the reference design: the 2x2 structure, 5 taps and the 14-bit tap
// and signal words. This design's choices: the causal tap indexing, the
// rounding/saturation and the single-stage pipeline.
module linear_fp
  import eq_pkg::*;
(
  input  logic   clk,
  input  logic   rst_n,
  input  logic   en,
  input  taps_t  taps,
  input  frame_t din,
  output frame_t dout
);

  localparam int NH  = (NTAPS - 1 + SPC - 1) / SPC;  // history frames
  localparam int NW  = (NH + 1) * SPC;               // window samples

  frame_t hist [NH];   // hist[0] = previous frame

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int h = 0; h < NH; h++) hist[h] <= '0;
      dout <= '0;
    end else if (en) begin
      vec4_t win [NW];
      // window sample j is sample number (t - NH) * SPC + j
      for (int h = 0; h < NH; h++)
        for (int i = 0; i < SPC; i++)
          win[(NH - 1 - h) * SPC + i] = vec4_t'(hist[h][i]);
      for (int i = 0; i < SPC; i++) win[NH * SPC + i] = vec4_t'(din[i]);

      for (int i = 0; i < SPC; i++) begin
        vec4_t o;
        for (int p = 0; p < NPOL; p++) begin
          logic signed [63:0] are, aim;
          are = 0;
          aim = 0;
          for (int q = 0; q < NPOL; q++)
            for (int k = 0; k < NTAPS; k++) begin
              are = are + 64'(taps[p][q][k]) * 64'(win[NH * SPC + i - k][re_idx(q)]);
              aim = aim + 64'(taps[p][q][k]) * 64'(win[NH * SPC + i - k][im_idx(q)]);
            end
          o[re_idx(p)] = sat_sig(rshift_rnd(are, FRAC_TAP));
          o[im_idx(p)] = sat_sig(rshift_rnd(aim, FRAC_TAP));
        end
        dout[i] <= samp_t'(o);
      end

      hist[0] <= din;
      for (int h = 1; h < NH; h++) hist[h] <= hist[h - 1];
    end
  end

endmodule
