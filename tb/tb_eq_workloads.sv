// tb_eq_workloads: the equalizer on time-varying polarization channels and
// with several batch sizes.
//
// Three equalizers with batch sizes B = 13, 17 and 21 receive the same
// stream. The link is 32 Gbaud dual-polarization QPSK with root-raised-cosine
// pulses (roll-off 0.1) at 2 samples/symbol; the channel has three spans,
// each a polarization rotation, a differential group delay of 2.17 ps
// between the polarizations and a Kerr phase, then a final rotation and
// white Gaussian noise. As in the adaptivity study this design
// is meant for, all four rotation angles turn at the same speed; the speeds
// 0, 1e5, 3e5 and 9e5 rad/s are run one after the other, each from reset
// with identity taps, for NSYM symbols, with a mean Kerr phase of 0.13 rad
// per span. A fifth run, on a static channel, raises the mean Kerr phase to
// 1.06 rad per span, which is what 8/9 gamma L P gives for gamma =
// 1.2 rad/W/km, L = 100 km and P = 10 dBm; the learning rate is lowered by
// 2^-3 for it, since the gradients grow with the signal power.
//
// For each run and batch size the effective SNR (signal power over mean
// squared error) is printed for consecutive windows of 4096 symbols, which
// shows the convergence, and the mean over the last quarter of the run is
// checked:
//   - every equalizer converges (final SNR above 15 dB, at least 5 dB above
//     the first window);
//   - 1e5 rad/s costs the B = 21 equalizer less than 1 dB against a static
//     channel;
//   - on the static channel all batch sizes end within 1 dB of each other
//     (the batch size is a working parameter, not only the default 21);
//   - 9e5 rad/s is worse than a static channel for B = 21 (tracking lag).
module tb_eq_workloads;
  import eq_pkg::*;

  localparam int  NSYM  = 40960;
  localparam int  NRUN  = 5;
  localparam int  NB    = 3;
  localparam int  WIN   = 4096;
  localparam real TS    = 1.0 / 64.0e9;      // sample period at 2 x 32 Gbaud
  localparam int  YLAT  = 10;
  // differential group delay per span: tau sqrt(3 pi L / 8) with
  // tau = 0.2 ps/sqrt(km), L = 100 km, i.e. 2.17 ps; each polarization is
  // shifted by half of it, in samples of 15.625 ps
  localparam real DGD_S = 0.2e-12 * $sqrt(3.0 * 3.14159265358979 * 100.0 / 8.0) / 2.0 / TS;
  localparam int  BS [NB] = '{13, 17, 21};
  // learning rate 2^-LR per batch size; smaller batches update more often
  // and need a smaller step
  localparam int  LR [NB] = '{3, 3, 2};
  // per run: rotation speed, symbol amplitude, Kerr coefficient gamma_bar of
  // one span (also given to the equalizer)
  localparam real SPEED [NRUN] = '{0.0, 1.0e5, 3.0e5, 9.0e5, 0.0};
  localparam real AMP   [NRUN] = '{0.5, 0.5, 0.5, 0.5, 0.73};
  localparam real GAMR  [NRUN] = '{0.25, 0.25, 0.25, 0.25, 0.99};
  // extra learning-rate shift per run (the rate is tuned to the power)
  localparam int  LRADD [NRUN] = '{0, 0, 0, 0, 3};

  logic        clk = 1'b0, rst_n = 1'b0, en = 1'b0;
  logic        train_en = 1'b1;
  gamma_t      gamma_bar = '0;
  real         A = 0.5, GAM = 0.25, pmean;
  frame_t      din = '0;
  samp_t       pilot = '0;
  samp_t       y [NB];
  logic [3:0]  lr [NB];

  int checks = 0, failures = 0;

  for (genvar b = 0; b < NB; b++) begin : g_eq
    samp_t       e_mon;
    taps_t [2:0] taps_o, grad_o;
    logic  [2:0] upd_o;
    ml_equalizer #(.B(BS[b])) dut (
      .clk, .rst_n, .en, .train_en, .lr_shift(lr[b]), .gamma_bar, .din, .pilot,
      .y(y[b]), .e_mon, .cfg_we(1'b0), .cfg_layer(2'd0), .cfg_idx(5'd0),
      .cfg_data('0), .taps_o, .upd_o, .grad_o);
  end

  always #5 clk = ~clk;

  initial begin
    repeat (NRUN * (NSYM + 100) + 1000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  real xs [NSYM][4];
  real rx [2 * NSYM][4];

  function automatic real gauss();
    real u1, u2;
    u1 = ($urandom_range(1, 1000000)) / 1000000.0;
    u2 = ($urandom_range(0, 999999)) / 1000000.0;
    return $sqrt(-2.0 * $ln(u1)) * $cos(2.0 * 3.14159265358979 * u2);
  endfunction

  // rotation [[c s][-s c]] of the real and imaginary parts
  function automatic void rotate(inout real v [4], input real a);
    real c, s, t0, t1, t2, t3;
    c = $cos(a);
    s = $sin(a);
    t0 =  c * v[0] + s * v[2];
    t1 =  c * v[1] + s * v[3];
    t2 = -s * v[0] + c * v[2];
    t3 = -s * v[1] + c * v[3];
    v[0] = t0; v[1] = t1; v[2] = t2; v[3] = t3;
  endfunction

  real tmp [2 * NSYM][4];

  // first-order fractional delay of the x components by +DGD_S and the y
  // components by -DGD_S samples: v(n - d) ~ v(n) - d (v(n+1) - v(n-1)) / 2
  task automatic apply_dgd();
    for (int n = 0; n < 2 * NSYM; n++) tmp[n] = rx[n];
    for (int n = 1; n < 2 * NSYM - 1; n++)
      for (int c = 0; c < 4; c++)
        rx[n][c] = tmp[n][c] - ((c < 2) ? DGD_S : -DGD_S) * (tmp[n + 1][c] - tmp[n - 1][c]) / 2.0;
  endtask

  task automatic make_link(input real speed);
    real a0 [4];
    a0 = '{0.5, -0.3, 0.4, 0.2};
    pmean = 0.0;
    for (int k = 0; k < NSYM; k++)
      for (int c = 0; c < 4; c++) xs[k][c] = ($urandom_range(0, 1) != 0) ? A : -A;
    for (int n = 0; n < 2 * NSYM; n++) begin
      for (int c = 0; c < 4; c++) rx[n][c] = 0.0;
      for (int m = 0; m < MF_TAPS; m++) begin
        int k2;
        k2 = n - (m - (MF_TAPS - 1) / 2);
        if (k2 >= 0 && k2 % 2 == 0 && k2 / 2 < NSYM)
          for (int c = 0; c < 4; c++) rx[n][c] += $itor(MF_RRC[m]) / 2048.0 * xs[k2 / 2][c];
      end
    end
    for (int s = 0; s < 3; s++) begin
      for (int n = 0; n < 2 * NSYM; n++) begin
        real v [4];
        v = rx[n];
        rotate(v, a0[s] + speed * TS * n);
        rx[n] = v;
      end
      apply_dgd();
      for (int n = 0; n < 2 * NSYM; n++) begin
        real p, ph, cp, sp, t0, t1, t2, t3;
        real v [4];
        v  = rx[n];
        p  = v[0] * v[0] + v[1] * v[1] + v[2] * v[2] + v[3] * v[3];
        ph = -GAM * p;
        cp = $cos(ph);
        sp = $sin(ph);
        t0 = v[0] * cp - v[1] * sp;
        t1 = v[0] * sp + v[1] * cp;
        t2 = v[2] * cp - v[3] * sp;
        t3 = v[2] * sp + v[3] * cp;
        rx[n] = '{t0, t1, t2, t3};
      end
    end
    for (int n = 0; n < 2 * NSYM; n++) begin
      real v [4];
      v = rx[n];
      rotate(v, a0[3] + speed * TS * n);
      pmean += (v[0] * v[0] + v[1] * v[1] + v[2] * v[2] + v[3] * v[3]) / (2 * NSYM);
      for (int c = 0; c < 4; c++) rx[n][c] = v[c] + 0.01 * gauss();
    end
  endtask

  function automatic sig_t q11(input real v);
    real r;
    r = $floor(v * 2048.0 + 0.5);
    if (r > 8191.0) r = 8191.0;
    if (r < -8192.0) r = -8192.0;
    return sig_t'($rtoi(r));
  endfunction

  function automatic real snr_db(input real err, input int n);
    return 10.0 * $log10(4.0 * A * A / (err / n));
  endfunction

  initial begin
    real final_snr [NRUN][NB];
    for (int r = 0; r < NRUN; r++) begin
      real werr [NB], ferr [NB], first [NB];
      int  wn, fn;
      for (int b = 0; b < NB; b++) lr[b] = 4'(LR[b] + LRADD[r]);
      A   = AMP[r];
      GAM = GAMR[r];
      gamma_bar = gamma_t'($rtoi(GAM * 65536.0));
      make_link(SPEED[r]);
      en = 1'b0;
      rst_n = 1'b0;
      repeat (3) @(negedge clk);
      rst_n = 1'b1;
      for (int b = 0; b < NB; b++) begin
        werr[b] = 0.0;
        ferr[b] = 0.0;
        first[b] = -1.0;
      end
      wn = 0;
      fn = 0;
      $display("---- rotation speed %0.0e rad/s, mean Kerr phase per span %0.2f rad ----",
               SPEED[r], GAM * pmean);
      for (int k = 0; k < NSYM; k++) begin
        int ks;
        for (int i = 0; i < SPC; i++) begin
          vec4_t w;
          for (int c = 0; c < 4; c++) w[c] = q11(rx[2 * k + i][3 - c]);
          din[i] = samp_t'(w);
        end
        begin
          vec4_t w;
          for (int c = 0; c < 4; c++) w[c] = q11(xs[k][3 - c]);
          pilot = samp_t'(w);
        end
        en = 1'b1;
        @(negedge clk);
        ks = k - (YLAT - 1) - GD_FRAMES;
        if (ks >= 0) begin
          for (int b = 0; b < NB; b++) begin
            vec4_t w;
            real e2;
            w  = vec4_t'(y[b]);
            e2 = 0.0;
            for (int c = 0; c < 4; c++) e2 += ($itor(w[3 - c]) / 2048.0 - xs[ks][c]) ** 2;
            werr[b] += e2;
            if (ks >= NSYM * 3 / 4) ferr[b] += e2;
          end
          wn++;
          if (ks >= NSYM * 3 / 4) fn++;
          if (wn == WIN) begin
            $display("symbols %6d: SNR B=13 %6.2f dB  B=17 %6.2f dB  B=21 %6.2f dB", ks + 1,
                     snr_db(werr[0], wn), snr_db(werr[1], wn), snr_db(werr[2], wn));
            for (int b = 0; b < NB; b++) begin
              if (first[b] < 0.0) first[b] = snr_db(werr[b], wn);
              werr[b] = 0.0;
            end
            wn = 0;
          end
        end
      end
      for (int b = 0; b < NB; b++) begin
        final_snr[r][b] = snr_db(ferr[b], fn);
        $display("speed %0.0e rad/s, B=%0d: final SNR %0.2f dB (first window %0.2f dB)",
                 SPEED[r], BS[b], final_snr[r][b], first[b]);
        checks++;
        if (final_snr[r][b] < 15.0 || final_snr[r][b] - first[b] < 5.0) begin
          failures++;
          $display("  did not converge");
        end
      end
    end
    checks += 2 + NB - 1;
    if (final_snr[3][2] >= final_snr[0][2]) begin
      failures++;
      $display("9e5 rad/s shows no tracking penalty");
    end
    if (final_snr[1][2] < final_snr[0][2] - 1.0) begin
      failures++;
      $display("1e5 rad/s costs more than 1 dB");
    end
    for (int b = 1; b < NB; b++)
      if (final_snr[0][b] - final_snr[0][0] > 1.0 || final_snr[0][0] - final_snr[0][b] > 1.0) begin
        failures++;
        $display("batch sizes differ by more than 1 dB on the static channel");
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
