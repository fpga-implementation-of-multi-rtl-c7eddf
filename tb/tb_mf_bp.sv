// tb_mf_bp: self-checking test of the matched-filter backward step.
// A random error-symbol stream goes in; every output sample is compared with
//   d[n] = sum_t f[2t - n] e[t]
// evaluated in floating point over the whole stored stream (within 1 LSB).
// Frame tau must appear one clock after error symbol tau + 16, which checks
// the look-ahead and the latency.
module tb_mf_bp;
  import eq_pkg::*;

  localparam int N   = 300;
  localparam int DLY = LA_MF_BP + LAT_MF_BP;   // 17

  logic   clk = 1'b0, rst_n = 1'b0, en = 1'b0;
  samp_t  e;
  frame_t dout;
  int     checks = 0, failures = 0;

  vec4_t ev [N];

  mf_bp dut (.clk, .rst_n, .en, .e, .dout);

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
    for (int t = 0; t < N; t++)
      for (int k = 0; k < 4; k++)
        ev[t][k] = sig_t'($signed($urandom_range(0, 6000)) - 3000);
    e = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    en = 1'b1;
    for (int cyc = 0; cyc < N; cyc++) begin
      @(negedge clk);
      if (cyc >= DLY) begin
        int tau;
        tau = cyc - DLY;
        for (int i = 0; i < SPC; i++) begin
          vec4_t o;
          int n;
          n = SPC * tau + i;
          o = vec4_t'(dout[i]);
          for (int c = 0; c < 4; c++) begin
            real acc;
            acc = 0.0;
            for (int t = 0; t < N; t++)
              if (2 * t - n >= 0 && 2 * t - n < MF_TAPS)
                acc += $itor(MF_RRC[2 * t - n]) / 2048.0 * $itor(ev[t][c]) / 32768.0;
            checks++;
            if (fabs($itor(o[c]) / 32768.0 - acc) > 1.0 / 32768.0) begin
              failures++;
              if (failures < 10) $display("n=%0d c=%0d got %f exp %f", n, c, $itor(o[c]) / 32768.0, acc);
            end
          end
        end
      end
      e = samp_t'(ev[cyc]);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
