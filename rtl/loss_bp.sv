// loss_bp: backward step of the mean-squared-error loss.
//
// The loss over a batch of B symbols is (1/B) * sum_k ||y_k - x_k||^2, where
// y_k is the equalized symbol and x_k the known pilot. Its derivative with
// respect to y_k, up to the constant factor 2 (which is absorbed in the
// learning rate), is
//   e_k = (y_k - x_k) / B.
// Division by B is a multiplication by the constant R = round(2^16 / B),
// done as a sum of fixed right shifts of the difference, one shift per set
// bit of R (for B = 21: R = 3121 = 2^11 + 2^10 + 2^5 + 2^4 + 2^0, i.e.
// 1/B ~ 2^-5 + 2^-6 + 2^-11 + 2^-12 + 2^-16, error 0.003 %). No multiplier
// is used.
//
// Interface and timing: y and x are Q2.11 symbols, e is the backward word
// format Q-2.15 (14 bits, rounded and saturated). One symbol per clock,
// latency LAT_LOSS_BP = 1 enabled clock.
//
// From the reference design: the MSE loss against pilots, the batch size
// B = 21, and division by B through fixed right shifts. This design's
// choices: the shift set (the set bits of round(2^16/B)) and the formats.
module loss_bp
  import eq_pkg::*;
#(
  parameter int B = BATCH
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  en,
  input  samp_t y,
  input  samp_t x,
  output samp_t e
);

  localparam int RBITS = 16;
  localparam int R     = ((1 << RBITS) + B / 2) / B;
  // e = d * 2^(FRAC_BP-FRAC_SIG) * R / 2^RBITS
  localparam int SH    = RBITS - (FRAC_BP - FRAC_SIG);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      e <= '0;
    end else if (en) begin
      vec4_t vy, vx, o;
      vy = vec4_t'(y);
      vx = vec4_t'(x);
      for (int c = 0; c < 4; c++) begin
        logic signed [63:0] d, acc;
        d   = 64'(vy[c]) - 64'(vx[c]);
        acc = 0;
        for (int b = 0; b < RBITS + 1; b++)
          if (R[b]) acc = acc + (d <<< b);
        o[c] = sat_sig(rshift_rnd(acc, SH));
      end
      e <= samp_t'(o);
    end
  end

endmodule
