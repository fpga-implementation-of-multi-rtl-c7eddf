// tb_gradient: self-checking test of the gradient layer and tap store.
// Random forward (u) and backward (d) streams are applied with random stall
// clocks (en low). A model in this testbench sums
//   sum_n Re d_p[n] Re u_q[n-k] + Im d_p[n] Im u_q[n-k]
// exactly over each batch of B = 21 enabled frames, rounds it to the 14-bit
// gradient word and applies h <- h - round(grad / 2^(4 + lr_shift)). Every
// clock the tap outputs are compared with the model; at every batch end the
// gradient words and the update pulse are checked. Batches with train_en low
// must leave the taps alone, and a configuration write must land in the
// addressed tap.
module tb_gradient;
  import eq_pkg::*;

  localparam int NB  = 10;          // batches
  localparam int B   = BATCH;
  localparam int NF  = NB * B;      // enabled frames

  logic       clk = 1'b0, rst_n = 1'b0, en = 1'b0;
  logic       train_en, cfg_we, upd;
  logic [3:0] lr_shift;
  logic [4:0] cfg_idx;
  tap_t       cfg_data;
  frame_t     u, d;
  taps_t      taps, grad;
  int         checks = 0, failures = 0;
  int         n_upd = 0;

  vec4_t su [SPC * NF], sd [SPC * NF];

  gradient dut (.clk, .rst_n, .en, .train_en, .lr_shift, .u, .d, .cfg_we,
                .cfg_idx, .cfg_data, .taps, .grad, .upd);

  always #5 clk = ~clk;

  initial begin
    repeat (10 * NF) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic longint rnd(input longint v, input int sh);
    return (v + (64'sd1 <<< (sh - 1))) >>> sh;
  endfunction

  function automatic longint sat14(input longint v);
    if (v > 8191) return 8191;
    if (v < -8192) return -8192;
    return v;
  endfunction

  initial begin
    taps_t  mt, mg;
    longint acc [2][2][5];
    int     f, b;
    for (int n = 0; n < SPC * NF; n++)
      for (int k = 0; k < 4; k++) begin
        su[n][k] = sig_t'($signed($urandom_range(0, 4000)) - 2000);
        sd[n][k] = sig_t'($signed($urandom_range(0, 600)) - 300);
      end
    mt = identity_taps();
    mg = '0;
    for (int p = 0; p < 2; p++) for (int q = 0; q < 2; q++) for (int k = 0; k < 5; k++)
      acc[p][q][k] = 0;
    u = '0; d = '0; train_en = 1'b1; lr_shift = 4'd1; cfg_we = 1'b0;
    cfg_idx = '0; cfg_data = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    // reset value
    checks++;
    if (taps !== identity_taps()) begin
      failures++;
      $display("reset taps are not the identity filter");
    end
    f = 0;
    while (f < NF) begin
      b = f / B;
      // drive one clock
      en       = ($urandom_range(0, 9) != 0);
      train_en = (b != 4);
      lr_shift = (b < 6) ? 4'd1 : 4'd3;
      cfg_we   = (f == 5 * B + 3) && en;
      cfg_idx  = 5'd7;                       // p=0 q=1 k=2
      cfg_data = tap_t'(-1234);
      for (int i = 0; i < SPC; i++) begin
        u[i] = samp_t'(su[SPC * f + i]);
        d[i] = samp_t'(sd[SPC * f + i]);
      end
      @(posedge clk);
      // model of that clock
      if (en) begin
        for (int p = 0; p < 2; p++) for (int q = 0; q < 2; q++) for (int k = 0; k < 5; k++)
          for (int i = 0; i < SPC; i++) begin
            int n;
            n = SPC * f + i;
            if (n - k >= 0)
              acc[p][q][k] += longint'(sd[n][re_idx(p)]) * longint'(su[n - k][re_idx(q)])
                            + longint'(sd[n][im_idx(p)]) * longint'(su[n - k][im_idx(q)]);
          end
        if (f % B == B - 1) begin
          for (int p = 0; p < 2; p++) for (int q = 0; q < 2; q++) for (int k = 0; k < 5; k++) begin
            longint g14;
            g14 = sat14(rnd(acc[p][q][k], FRAC_BP + FRAC_SIG - FRAC_GRAD));
            mg[p][q][k] = tap_t'(g14);
            if (train_en) mt[p][q][k] = tap_t'(sat14(longint'(mt[p][q][k]) - rnd(g14, 4 + lr_shift)));
            acc[p][q][k] = 0;
          end
        end
        if (cfg_we) mt[0][1][2] = tap_t'(-1234);
        f++;
      end
      @(negedge clk);
      checks++;
      if (taps !== mt) begin
        failures++;
        if (failures < 10) $display("frame %0d: taps differ from model", f);
      end
      if (en && (f % B == 0)) begin
        checks += 2;
        if (grad !== mg) begin
          failures++;
          $display("batch %0d: gradient words differ", f / B);
        end
        if (upd !== train_en) begin
          failures++;
          $display("batch %0d: update pulse %0d, expected %0d", f / B, upd, train_en);
        end
        if (upd) n_upd++;
      end else begin
        checks++;
        if (upd) begin
          failures++;
          $display("unexpected update pulse at frame %0d", f);
        end
      end
    end
    checks++;
    if (n_upd != NB - 1) begin
      failures++;
      $display("saw %0d updates, expected %0d", n_upd, NB - 1);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
