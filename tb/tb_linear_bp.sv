// tb_linear_bp: self-checking test of the linear-layer backward step.
// A random gradient stream is passed backwards through random taps that
// change every 40 clocks; every output word is compared with
//   d_in_q[n] = sum_p sum_k h[p][q][k] d_out_p[n+k]
// in floating point (within 1 LSB), using the taps present when the last
// needed frame was captured. Frame tau must appear one clock after input
// frame tau + 2 (look-ahead and latency).
module tb_linear_bp;
  import eq_pkg::*;

  localparam int N   = 400;
  localparam int DLY = LA_LIN_BP + LAT_LIN_BP;   // 3

  logic   clk = 1'b0, rst_n = 1'b0, en = 1'b0;
  taps_t  taps;
  frame_t din, dout;
  int     checks = 0, failures = 0;

  vec4_t s [SPC * N];
  taps_t tin [N];

  linear_bp dut (.clk, .rst_n, .en, .taps, .din, .dout);

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

  initial begin
    taps_t t;
    for (int n = 0; n < SPC * N; n++)
      for (int k = 0; k < 4; k++)
        s[n][k] = sig_t'($signed($urandom_range(0, 4000)) - 2000);
    t = identity_taps();
    for (int c = 0; c < N; c++) begin
      if (c % 40 == 7)
        for (int p = 0; p < NPOL; p++)
          for (int q = 0; q < NPOL; q++)
            for (int k = 0; k < NTAPS; k++)
              t[p][q][k] = tap_t'($signed($urandom_range(0, 4096)) - 2048);
      tin[c] = t;
    end
    din  = '0;
    taps = identity_taps();
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    en = 1'b1;
    for (int cyc = 0; cyc < N; cyc++) begin
      @(negedge clk);
      if (cyc >= DLY) begin
        int tau;
        tau = cyc - DLY;
        for (int i = 0; i < SPC; i++) begin
          int n;
          vec4_t o;
          n = SPC * tau + i;
          o = vec4_t'(dout[i]);
          for (int q = 0; q < NPOL; q++)
            for (int ri = 0; ri < 2; ri++) begin
              real acc;
              int  idx;
              acc = 0.0;
              for (int p = 0; p < NPOL; p++)
                for (int k = 0; k < NTAPS; k++)
                  acc += $itor(tin[tau + LA_LIN_BP][p][q][k]) / 4096.0 *
                         $itor(s[n + k][ri ? im_idx(p) : re_idx(p)]) / 32768.0;
              if (acc > 8191.0 / 32768.0) acc = 8191.0 / 32768.0;
              if (acc < -0.25) acc = -0.25;
              idx = ri ? im_idx(q) : re_idx(q);
              checks++;
              if (fabs($itor(o[idx]) / 32768.0 - acc) > 1.0 / 32768.0) begin
                failures++;
                if (failures < 10) $display("n=%0d q=%0d got %f exp %f", n, q, $itor(o[idx]) / 32768.0, acc);
              end
            end
        end
      end
      for (int i = 0; i < SPC; i++) din[i] = samp_t'(s[SPC * cyc + i]);
      taps = tin[cyc];
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
