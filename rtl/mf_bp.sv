// mf_bp: backward step of the matched filter.
//
// The forward matched filter computes y[t] = sum_m f[m] s[2t - m]. By the
// chain rule the loss gradient with respect to its input sample s[n] is
//   d[n] = sum_t f[2t - n] * e[t],   0 <= 2t - n <= MF_TAPS-1,
// i.e. the error is put back on the 2-samples/symbol grid (zero stuffing)
// and passed through the time-reversed filter. For the even sample of frame
// tau this needs 17 error symbols, for the odd one 16, so the two outputs of
// a frame take 33 products per word (132 for the four words of a sample).
//
// How it works: the block keeps the last LA_MF_BP (= 16) error symbols. When
// error e[tau + 16] arrives, every error that influences frame tau is
// present, and the frame is formed as
//   d[2 tau + i] = sum_j f[32 - 2j - i] * E[j],  E[j] = e[tau + 16 - j].
// Products Q0.11 x Q-2.15 are rounded back to Q-2.15 and saturated.
//
// Interface and timing: e is one error symbol per clock; dout is one frame
// of two gradient samples per clock. Frame tau appears LAT_MF_BP = 1 enabled
// clock after e[tau + 16] was presented, so the block's frame delay is
// LA_MF_BP + LAT_MF_BP = 17 clocks.
//
// The reference design names this block only; its function follows from the
// forward filter, and the structure here is this design's own.
module mf_bp
  import eq_pkg::*;
#(
  parameter mftaps_t TAPS = MF_RRC
) (
  input  logic   clk,
  input  logic   rst_n,
  input  logic   en,
  input  samp_t  e,
  output frame_t dout
);

  localparam int NH = LA_MF_BP;   // 16 stored errors

  samp_t hist [NH];   // hist[0] = previous error symbol

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int h = 0; h < NH; h++) hist[h] <= '0;
      dout <= '0;
    end else if (en) begin
      vec4_t ev [NH + 1];
      ev[0] = vec4_t'(e);
      for (int h = 0; h < NH; h++) ev[h + 1] = vec4_t'(hist[h]);
      for (int i = 0; i < SPC; i++) begin
        vec4_t o;
        for (int c = 0; c < 4; c++) begin
          logic signed [63:0] acc;
          acc = 0;
          for (int j = 0; j <= NH; j++) begin
            int m;
            m = MF_TAPS - 1 - SPC * j - i;
            if (m >= 0) acc = acc + 64'(TAPS[m]) * 64'(ev[j][c]);
          end
          o[c] = sat_sig(rshift_rnd(acc, FRAC_MF));
        end
        dout[i] <= samp_t'(o);
      end
      hist[0] <= e;
      for (int h = 1; h < NH; h++) hist[h] <= hist[h - 1];
    end
  end

endmodule
