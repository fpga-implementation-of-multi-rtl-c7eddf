// tb_ml_equalizer: end-to-end test of the adaptive equalizer at its default
// parameters.
//
// The testbench generates its own link: random QPSK symbols on two
// polarizations, root-raised-cosine pulses at 2 samples/symbol, and a channel
// of three spans, each a real polarization rotation followed by a Kerr phase
// u exp(-j gamma ||u||^2), plus white Gaussian noise. With gamma_bar set to
// the channel's gamma the equalizer has the exact structure of the channel
// inverse, but its taps start as identity filters, so it must learn the
// three inverse rotations.
//
// Run 1 (clean channel, training off) checks the alignment: y must equal the
// transmitted symbol k - 11, Y_LATENCY clocks after it entered, and e_mon must
// be (y - pilot) / 21 for every symbol. A configuration write that swaps the
// polarizations in the last linear layer must swap them at the output.
// Run 2 (rotating, nonlinear, noisy channel) trains with random stall clocks
// (en low), then freezes the taps (train_en low) for an inference-only
// phase. Checks: the error power falls by more than 10 dB and ends below
// -15 dB of the signal; all three gradient layers update; the taps do not
// move while training is off; stalls, updates, inference-only batches and
// configuration writes each happened at least once.
module tb_ml_equalizer;
  import eq_pkg::*;

  localparam int NSYM1 = 400;
  localparam int NSYM2 = 6000;
  localparam int NTRAIN = 5000;     // symbols with training on in run 2
  localparam int YLAT  = 10;        // forward latency (clocks) of the top
  localparam real A    = 0.5;       // QPSK amplitude per component

  logic        clk = 1'b0, rst_n = 1'b0, en = 1'b0;
  logic        train_en = 1'b0;
  logic [3:0]  lr_shift = 4'd2;
  gamma_t      gamma_bar = '0;
  frame_t      din = '0;
  samp_t       pilot = '0, y, e_mon;
  logic        cfg_we = 1'b0;
  logic [1:0]  cfg_layer = '0;
  logic [4:0]  cfg_idx = '0;
  tap_t        cfg_data = '0;
  taps_t [2:0] taps_o, grad_o;
  logic  [2:0] upd_o;

  int checks = 0, failures = 0;
  int n_stall = 0, n_cfg = 0, n_infer_batches = 0;
  int n_upd [3] = '{0, 0, 0};

  ml_equalizer dut (.clk, .rst_n, .en, .train_en, .lr_shift, .gamma_bar, .din,
                    .pilot, .y, .e_mon, .cfg_we, .cfg_layer, .cfg_idx, .cfg_data,
                    .taps_o, .upd_o, .grad_o);

  always #5 clk = ~clk;

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk)
    for (int l = 0; l < 3; l++) if (upd_o[l]) n_upd[l]++;

  // ---------------- link model ----------------
  real xs [NSYM2][4];          // symbols, [xr xi yr yi]
  real rx [2 * NSYM2][4];      // received samples

  function automatic real gauss();
    real u1, u2;
    u1 = ($urandom_range(1, 1000000)) / 1000000.0;
    u2 = ($urandom_range(0, 999999)) / 1000000.0;
    return $sqrt(-2.0 * $ln(u1)) * $cos(2.0 * 3.14159265358979 * u2);
  endfunction

  // alpha[s]: rotation of span s; gam: Kerr coefficient; sigma: noise std
  task automatic make_link(input int nsym, input real alpha [3], input real gam,
                           input real sigma);
    for (int k = 0; k < nsym; k++)
      for (int c = 0; c < 4; c++) xs[k][c] = ($urandom_range(0, 1) != 0) ? A : -A;
    for (int n = 0; n < 2 * nsym; n++) begin
      real v [4];
      for (int c = 0; c < 4; c++) v[c] = 0.0;
      // pulse shaping: symbol k centred on sample 2k
      for (int m = 0; m < MF_TAPS; m++) begin
        int k2;
        k2 = n - (m - (MF_TAPS - 1) / 2);
        if (k2 >= 0 && k2 % 2 == 0 && k2 / 2 < nsym)
          for (int c = 0; c < 4; c++) v[c] += $itor(MF_RRC[m]) / 2048.0 * xs[k2 / 2][c];
      end
      for (int s = 0; s < 3; s++) begin
        real ca, sa, t [4], p, ph, cp, sp;
        ca = $cos(alpha[s]);
        sa = $sin(alpha[s]);
        // rotation [[c s][-s c]] on real and imaginary parts
        t[0] =  ca * v[0] + sa * v[2];
        t[1] =  ca * v[1] + sa * v[3];
        t[2] = -sa * v[0] + ca * v[2];
        t[3] = -sa * v[1] + ca * v[3];
        p  = t[0] * t[0] + t[1] * t[1] + t[2] * t[2] + t[3] * t[3];
        ph = -gam * p;
        cp = $cos(ph);
        sp = $sin(ph);
        v[0] = t[0] * cp - t[1] * sp;
        v[1] = t[0] * sp + t[1] * cp;
        v[2] = t[2] * cp - t[3] * sp;
        v[3] = t[2] * sp + t[3] * cp;
      end
      for (int c = 0; c < 4; c++) rx[n][c] = v[c] + sigma * gauss();
    end
  endtask

  function automatic sig_t q11(input real v);
    real r;
    r = $floor(v * 2048.0 + 0.5);
    if (r > 8191.0) r = 8191.0;
    if (r < -8192.0) r = -8192.0;
    return sig_t'($rtoi(r));
  endfunction

  function automatic real fabs(input real v);
    return (v < 0.0) ? -v : v;
  endfunction

  // drive frame k (pilot = symbol k) for one enabled clock
  task automatic drive(input int k, input int nsym);
    for (int i = 0; i < SPC; i++) begin
      vec4_t w;
      for (int c = 0; c < 4; c++) w[c] = (k < nsym) ? q11(rx[2 * k + i][3 - c]) : '0;
      din[i] = samp_t'(w);
    end
    begin
      vec4_t w;
      for (int c = 0; c < 4; c++) w[c] = (k < nsym) ? q11(xs[k][3 - c]) : '0;
      pilot = samp_t'(w);
    end
  endtask

  // symbol component c (0=xr .. 3=yi) of output word vector index 3-c
  function automatic real yv(input samp_t s, input int c);
    vec4_t w;
    w = vec4_t'(s);
    return $itor(w[3 - c]) / 2048.0;
  endfunction

  task automatic do_reset();
    en = 1'b0;
    rst_n = 1'b0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);
  endtask

  initial begin
    real alpha [3];
    real err_first, err_last, pw;
    int  n_first, n_last;
    taps_t [2:0] frozen;

    // ================= run 1: alignment and configuration =================
    alpha = '{0.0, 0.0, 0.0};
    make_link(NSYM1, alpha, 0.0, 0.0);
    do_reset();
    train_en = 1'b0;
    gamma_bar = '0;
    for (int k = 0; k < NSYM1; k++) begin
      samp_t y_prev;
      int    ks;
      // polarization swap in Linear FP 5 from symbol 250 on
      if (k == 250) begin
        cfg_we = 1'b1;
        cfg_layer = 2'd2;
        for (int j = 0; j < 4; j++) begin
          cfg_idx  = 5'((j == 0) ? 2 : (j == 1) ? 7 : (j == 2) ? 12 : 17);
          cfg_data = tap_t'((j == 1 || j == 2) ? 4096 : 0);
          @(negedge clk);
          n_cfg++;
        end
        cfg_we = 1'b0;
      end
      drive(k, NSYM1);
      en = 1'b1;
      y_prev = y;
      @(negedge clk);
      // output symbol now present: transmitted symbol ks
      ks = k - (YLAT - 1) - GD_FRAMES;
      if (ks >= 20 && ks < NSYM1) begin
        bit swapped;
        // the swap reaches Linear FP 5 with frame 244 (its input latency is 6
        // clocks); the matched filter mixes frames 244..259, i.e. output
        // symbols 224..239, which are not checked
        swapped = (ks >= 240);
        // (a margin is left on either side)
        for (int c = 0; c < 4; c++) begin
          int cx;
          cx = swapped ? (c ^ 2) : c;
          checks++;
          if (ks < 210 || ks >= 260)
            if (fabs(yv(y, c) - xs[ks][cx]) > 0.06) begin
              failures++;
              if (failures < 10) $display("run1 k=%0d c=%0d y=%f x=%f", k, c, yv(y, c), xs[ks][cx]);
            end
        end
      end
      // e_mon holds (y - pilot)/B of the previous output symbol
      if (ks - 1 >= 20 && k < 245) begin
        vec4_t ew;
        ew = vec4_t'(e_mon);
        for (int c = 0; c < 4; c++) begin
          real ex;
          ex = (yv(y_prev, c) - $itor(q11(xs[ks - 1][c])) / 2048.0) / 21.0;
          checks++;
          if (fabs($itor(ew[3 - c]) / 32768.0 - ex) > 1.5 / 32768.0) begin
            failures++;
            if (failures < 10) $display("run1 e_mon k=%0d c=%0d got %f exp %f", k, c,
                                        $itor(ew[3 - c]) / 32768.0, ex);
          end
        end
      end
    end

    // ================= run 2: training on a changing channel =================
    alpha = '{0.6, 0.5, -0.1};
    make_link(NSYM2, alpha, 0.25, 0.01);
    do_reset();
    gamma_bar = gamma_t'(16384);        // 0.25, the channel's gamma
    lr_shift  = 4'd2;
    err_first = 0.0; err_last = 0.0; pw = 0.0;
    n_first = 0; n_last = 0;
    begin
      int k;
      k = 0;
      while (k < NSYM2) begin
        int ks;
        train_en = (k < NTRAIN);
        if (k == NTRAIN) frozen = taps_o;
        if ($urandom_range(0, 19) == 0) begin
          en = 1'b0;
          n_stall++;
          @(negedge clk);
          continue;
        end
        drive(k, NSYM2);
        en = 1'b1;
        @(negedge clk);
        if (!train_en && dut.u_gradient0.cnt == 0) n_infer_batches++;
        ks = k - (YLAT - 1) - GD_FRAMES;
        if (ks >= 40) begin
          real e2;
          e2 = 0.0;
          for (int c = 0; c < 4; c++) e2 += (yv(y, c) - xs[ks][c]) ** 2;
          if (ks < 140) begin
            err_first += e2;
            n_first++;
          end
          if (ks >= NSYM2 - 1500 - 60) begin
            err_last += e2;
            n_last++;
          end
          pw += 4.0 * A * A;
        end
        k++;
      end
    end
    en = 1'b0;
    begin
      real snr_first, snr_last;
      snr_first = 10.0 * $log10((4.0 * A * A) / (err_first / n_first));
      snr_last  = 10.0 * $log10((4.0 * A * A) / (err_last / n_last));
      $display("effective SNR: first 100 symbols %0.2f dB, last 1500 symbols %0.2f dB",
               snr_first, snr_last);
      checks += 2;
      if (snr_last - snr_first < 10.0) begin
        failures++;
        $display("training improved the SNR by less than 10 dB");
      end
      if (snr_last < 15.0) begin
        failures++;
        $display("final effective SNR below 15 dB");
      end
    end
    // taps frozen while training was off
    checks++;
    if (taps_o !== frozen) begin
      failures++;
      $display("taps moved while train_en was low");
    end
    begin
      taps_t t5;
      tap_t  h00, h01, h10, h11;
      t5  = taps_o[2];
      h00 = t5[0][0][2];
      h01 = t5[0][1][2];
      h10 = t5[1][0][2];
      h11 = t5[1][1][2];
      $display("centre taps of Linear FP 5 (Q1.12): %0d %0d %0d %0d", h00, h01, h10, h11);
    end

    // ================= mechanism coverage =================
    $display("coverage: stalls=%0d updates L1=%0d L3=%0d L5=%0d inference batches=%0d cfg writes=%0d",
             n_stall, n_upd[0], n_upd[1], n_upd[2], n_infer_batches, n_cfg);
    checks += 6;
    if (n_stall == 0)         begin failures++; $display("no stall happened"); end
    if (n_upd[0] == 0)        begin failures++; $display("no update of Linear FP 1"); end
    if (n_upd[1] == 0)        begin failures++; $display("no update of Linear FP 3"); end
    if (n_upd[2] == 0)        begin failures++; $display("no update of Linear FP 5"); end
    if (n_infer_batches == 0) begin failures++; $display("no inference-only batch"); end
    if (n_cfg == 0)           begin failures++; $display("no configuration write"); end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
