// tb_mf_fp: self-checking test of the matched filter.
// First the 33 default taps are compared with a root-raised-cosine
// (roll-off 0.1, 2 samples/symbol, unit energy) computed here in floating
// point (within 1 LSB). Then a random sample stream is filtered and every
// output symbol is compared with y[t] = sum_m f[m] s[2t - m] evaluated in
// floating point (within 1 LSB), which also checks the 1-clock latency and
// the decimation phase.
module tb_mf_fp;
  import eq_pkg::*;

  localparam int N   = 300;
  localparam int LAT = 1;

  logic   clk = 1'b0, rst_n = 1'b0, en = 1'b0;
  frame_t din;
  samp_t  y;
  int     checks = 0, failures = 0;

  vec4_t s [SPC * N];

  mf_fp dut (.clk, .rst_n, .en, .din, .y);

  always #5 clk = ~clk;

  initial begin
    repeat (20 * N) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic real fabs(input real v);
    return (v < 0.0) ? -v : v;
  endfunction

  function automatic real rrc(input real t);
    real a, pi;
    a  = 0.1;
    pi = 3.14159265358979;
    if (fabs(t) < 1e-9) return 1.0 - a + 4.0 * a / pi;
    if (fabs(fabs(t) - 1.0 / (4.0 * a)) < 1e-9)
      return a / $sqrt(2.0) * ((1.0 + 2.0 / pi) * $sin(pi / (4.0 * a)) +
                               (1.0 - 2.0 / pi) * $cos(pi / (4.0 * a)));
    return ($sin(pi * t * (1.0 - a)) + 4.0 * a * t * $cos(pi * t * (1.0 + a))) /
           (pi * t * (1.0 - 16.0 * a * a * t * t));
  endfunction

  initial begin
    real e, r [MF_TAPS];
    // ---- tap values ----
    e = 0.0;
    for (int m = 0; m < MF_TAPS; m++) begin
      r[m] = rrc((m - 16) / 2.0);
      e = e + r[m] * r[m];
    end
    for (int m = 0; m < MF_TAPS; m++) begin
      checks++;
      if (fabs($itor(dut.TAPS[m]) - 2048.0 * r[m] / $sqrt(e)) > 1.0) begin
        failures++;
        $display("tap %0d = %0d, expected %f", m, dut.TAPS[m], 2048.0 * r[m] / $sqrt(e));
      end
    end
    // ---- filtering ----
    for (int n = 0; n < SPC * N; n++)
      for (int k = 0; k < 4; k++)
        s[n][k] = sig_t'($signed($urandom_range(0, 4000)) - 2000);
    din = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    en = 1'b1;
    for (int cyc = 0; cyc < N + LAT; cyc++) begin
      @(negedge clk);
      if (cyc >= LAT) begin
        int t;
        vec4_t o;
        t = cyc - LAT;
        o = vec4_t'(y);
        for (int c = 0; c < 4; c++) begin
          real acc;
          acc = 0.0;
          for (int m = 0; m < MF_TAPS; m++)
            if (2 * t - m >= 0)
              acc += $itor(MF_RRC[m]) / 2048.0 * $itor(s[2 * t - m][c]) / 2048.0;
          if (acc > 8191.0 / 2048.0) acc = 8191.0 / 2048.0;
          if (acc < -4.0) acc = -4.0;
          checks++;
          if (fabs($itor(o[c]) / 2048.0 - acc) > 1.0 / 2048.0) begin
            failures++;
            if (failures < 10) $display("t=%0d c=%0d got %f exp %f", t, c, $itor(o[c]) / 2048.0, acc);
          end
        end
      end
      if (cyc < N)
        for (int i = 0; i < SPC; i++) din[i] = samp_t'(s[SPC * cyc + i]);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
