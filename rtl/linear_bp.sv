// linear_bp: backward step of a linear (2x2 MIMO-FIR) layer.
//
// The forward layer computes out_p[n] = sum_q sum_k h[p][q][k] in_q[n-k] on
// the real and the imaginary parts separately. The gradient with respect to
// its input is the transposed, time-reversed filter
//   d_in_q[n] = sum_p sum_k h[p][q][k] * d_out_p[n+k],   k = 0 .. 4,
// again for real and imaginary parts separately, using the same (current)
// taps as the forward layer.
//
// How it works: the filter looks 4 samples (2 frames) ahead. The block keeps
// the last two gradient frames; when frame tau + 2 arrives it lays the three
// frames out as a six-sample window starting at sample 2 tau and forms both
// samples of frame tau. Products Q1.12 x Q-2.15 are rounded back to Q-2.15
// and saturated to 14 bits.
//
// Interface and timing: one frame per clock in and out; frame tau appears
// LAT_LIN_BP = 1 enabled clock after input frame tau + LA_LIN_BP (= 2) was
// presented, a frame delay of 3 clocks.
//
// The reference design names this block and states that it shares
// computing units over time; its function follows from the forward layer by
// the chain rule. This version is fully parallel (one frame per clock), which
// is this design's choice.
module linear_bp
  import eq_pkg::*;
(
  input  logic   clk,
  input  logic   rst_n,
  input  logic   en,
  input  taps_t  taps,
  input  frame_t din,
  output frame_t dout
);

  localparam int NH = LA_LIN_BP;          // 2 stored frames
  localparam int NW = (NH + 1) * SPC;     // 6-sample window

  frame_t hist [NH];   // hist[0] = previous frame

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int h = 0; h < NH; h++) hist[h] <= '0;
      dout <= '0;
    end else if (en) begin
      vec4_t win [NW];
      for (int h = 0; h < NH; h++)
        for (int i = 0; i < SPC; i++)
          win[(NH - 1 - h) * SPC + i] = vec4_t'(hist[h][i]);
      for (int i = 0; i < SPC; i++) win[NH * SPC + i] = vec4_t'(din[i]);

      // window index 0 is sample 2*tau of the output frame
      for (int i = 0; i < SPC; i++) begin
        vec4_t o;
        for (int q = 0; q < NPOL; q++) begin
          logic signed [63:0] are, aim;
          are = 0;
          aim = 0;
          for (int p = 0; p < NPOL; p++)
            for (int k = 0; k < NTAPS; k++) begin
              are = are + 64'(taps[p][q][k]) * 64'(win[i + k][re_idx(p)]);
              aim = aim + 64'(taps[p][q][k]) * 64'(win[i + k][im_idx(p)]);
            end
          o[re_idx(q)] = sat_sig(rshift_rnd(are, FRAC_TAP));
          o[im_idx(q)] = sat_sig(rshift_rnd(aim, FRAC_TAP));
        end
        dout[i] <= samp_t'(o);
      end

      hist[0] <= din;
      for (int h = 1; h < NH; h++) hist[h] <= hist[h - 1];
    end
  end

endmodule
