// mf_fp: fixed matched filter at the end of the forward path.
//
// A real-tap FIR filter with MF_TAPS (= 33) taps is applied to each
// polarization (real and imaginary parts alike) and the result is taken at
// one sample per symbol:
//   y[t] = sum_m f[m] * s[2t - m],   m = 0 .. 32
// so the output is one symbol per clock. y[t] is centred on sample 2t - 16,
// i.e. the filter adds a group delay of 8 symbols.
//
// How it works: the last 16 input frames are kept as a 34-sample window;
// the taps are a constant parameter, so every product is a constant
// multiplication that synthesis turns into shifts and adds (no multipliers).
// The sum of Q0.11 x Q2.11 products is rounded to Q2.11 and saturated.
//
// Interface and timing: din is one frame per clock, y one symbol per clock,
// latency LAT_MF_FP = 1 enabled clock after the frame holding sample 2t.
//
// From the reference design: a non-trainable matched filter per
// polarization, 12-bit taps, root-raised-cosine shaping with roll-off 0.1 at
// the transmitter. This design's choices: 33 taps (which matches the
// reference's multiplier count of its matched-filter backward layer), the
// truncated RRC tap values and the even sample phase.
module mf_fp
  import eq_pkg::*;
#(
  parameter mftaps_t TAPS = MF_RRC
) (
  input  logic   clk,
  input  logic   rst_n,
  input  logic   en,
  input  frame_t din,
  output samp_t  y
);

  localparam int NH = (MF_TAPS - 1) / SPC;   // 16 history frames
  localparam int NW = (NH + 1) * SPC;        // 34-sample window

  frame_t hist [NH];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int h = 0; h < NH; h++) hist[h] <= '0;
      y <= '0;
    end else if (en) begin
      vec4_t win [NW];
      vec4_t o;
      for (int h = 0; h < NH; h++)
        for (int i = 0; i < SPC; i++)
          win[(NH - 1 - h) * SPC + i] = vec4_t'(hist[h][i]);
      for (int i = 0; i < SPC; i++) win[NH * SPC + i] = vec4_t'(din[i]);

      // sample 2t sits at window index NH*SPC
      for (int c = 0; c < 4; c++) begin
        logic signed [63:0] acc;
        acc = 0;
        for (int m = 0; m < MF_TAPS; m++)
          acc = acc + 64'(TAPS[m]) * 64'(win[NH * SPC - m][c]);
        o[c] = sat_sig(rshift_rnd(acc, FRAC_MF));
      end
      y <= samp_t'(o);

      hist[0] <= din;
      for (int h = 1; h < NH; h++) hist[h] <= hist[h - 1];
    end
  end

endmodule
