// tb_linear_fp: self-checking test of the 2x2 MIMO 5-tap FIR.
// A random sample stream is filtered with random taps that change every 50
// clocks; each output word is compared with
//   out_p[n] = sum_q sum_k h[p][q][k] in_q[n-k]
// evaluated in floating point from the stored stream (within 1 LSB). Also
// checks the 1-clock latency, the use of the taps present in the capture
// clock and that en = 0 freezes the block.
module tb_linear_fp;
  import eq_pkg::*;

  localparam int N   = 400;
  localparam int LAT = 1;

  logic   clk = 1'b0, rst_n = 1'b0, en = 1'b0;
  taps_t  taps;
  frame_t din, dout;
  int     checks = 0, failures = 0;

  vec4_t s [SPC * N];
  taps_t tin [N];

  linear_fp dut (.clk, .rst_n, .en, .taps, .din, .dout);

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

  task automatic check_frame(input int cyc, input frame_t got);
    for (int i = 0; i < SPC; i++) begin
      int n;
      vec4_t o;
      n = SPC * cyc + i;
      o = vec4_t'(got[i]);
      for (int p = 0; p < NPOL; p++)
        for (int ri = 0; ri < 2; ri++) begin
          real acc;
          int  idxp;
          acc = 0.0;
          for (int q = 0; q < NPOL; q++)
            for (int k = 0; k < NTAPS; k++)
              if (n - k >= 0)
                acc += $itor(tin[cyc][p][q][k]) / 4096.0 *
                       $itor(s[n - k][ri ? im_idx(q) : re_idx(q)]) / 2048.0;
          if (acc > 8191.0 / 2048.0) acc = 8191.0 / 2048.0;
          if (acc < -4.0) acc = -4.0;
          idxp = ri ? im_idx(p) : re_idx(p);
          checks++;
          if (fabs($itor(o[idxp]) / 2048.0 - acc) > 1.0 / 2048.0) begin
            failures++;
            if (failures < 10)
              $display("mismatch n=%0d p=%0d ri=%0d got %f exp %f", n, p, ri,
                       $itor(o[idxp]) / 2048.0, acc);
          end
        end
    end
  endtask

  initial begin
    taps_t t;
    for (int n = 0; n < SPC * N; n++)
      for (int k = 0; k < 4; k++)
        s[n][k] = sig_t'($signed($urandom_range(0, 4000)) - 2000);
    t = identity_taps();
    for (int c = 0; c < N; c++) begin
      if (c % 50 == 10)
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
    for (int cyc = 0; cyc < N + LAT; cyc++) begin
      @(negedge clk);
      if (cyc >= LAT) check_frame(cyc - LAT, dout);
      if (cyc < N) begin
        for (int i = 0; i < SPC; i++) din[i] = samp_t'(s[SPC * cyc + i]);
        taps = tin[cyc];
      end
    end
    begin
      frame_t hold;
      hold = dout;
      en = 1'b0;
      din = '0;
      repeat (4) @(negedge clk);
      checks++;
      if (dout !== hold) begin
        failures++;
        $display("output moved during stall");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
