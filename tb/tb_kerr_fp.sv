// tb_kerr_fp: self-checking test of the forward Kerr step.
// Random dual-polarization samples and random gamma_bar values go through
// kerr_fp; every output is compared with u * exp(j gamma_bar ||u||^2)
// computed in floating point (with the angle saturated at the 12-bit limit),
// within 3 LSB. Also checks the 2-clock latency and that en = 0 freezes the
// pipeline.
module tb_kerr_fp;
  import eq_pkg::*;

  localparam int N   = 400;
  localparam int LAT = 2;

  logic   clk = 1'b0, rst_n = 1'b0, en = 1'b0;
  gamma_t gamma_bar;
  frame_t din, dout;
  int     checks = 0, failures = 0;

  frame_t vin [N];
  gamma_t gin [N];

  kerr_fp dut (.clk, .rst_n, .en, .gamma_bar, .din, .dout);

  always #5 clk = ~clk;

  initial begin
    repeat (20 * N) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic real rv(input sig_t v, input int frac);
    return $itor(v) / (2.0 ** frac);
  endfunction

  function automatic real fabs(input real v);
    return (v < 0.0) ? -v : v;
  endfunction

  task automatic check_frame(input frame_t u, input gamma_t g, input frame_t got);
    for (int i = 0; i < SPC; i++) begin
      vec4_t w, o;
      real p, phi, c, s, er, ei;
      w = vec4_t'(u[i]);
      o = vec4_t'(got[i]);
      p = 0.0;
      for (int k = 0; k < 4; k++) p += rv(w[k], FRAC_SIG) ** 2;
      phi = $itor(g) / 65536.0 * p;
      if (phi > 4095.0 / 1024.0) phi = 4095.0 / 1024.0;
      phi = $floor(phi * 1024.0 + 0.5) / 1024.0;
      c = $cos(phi);
      s = $sin(phi);
      for (int pp = 0; pp < 2; pp++) begin
        er = rv(w[re_idx(pp)], FRAC_SIG) * c - rv(w[im_idx(pp)], FRAC_SIG) * s;
        ei = rv(w[re_idx(pp)], FRAC_SIG) * s + rv(w[im_idx(pp)], FRAC_SIG) * c;
        checks += 2;
        if (fabs(rv(o[re_idx(pp)], FRAC_SIG) - er) > 3.0 / 2048.0 ||
            fabs(rv(o[im_idx(pp)], FRAC_SIG) - ei) > 3.0 / 2048.0) begin
          failures++;
          if (failures < 10)
            $display("mismatch: phi=%f got %f %f exp %f %f", phi,
                     rv(o[re_idx(pp)], FRAC_SIG), rv(o[im_idx(pp)], FRAC_SIG), er, ei);
        end
      end
    end
  endtask

  initial begin
    for (int n = 0; n < N; n++) begin
      for (int i = 0; i < SPC; i++) begin
        vec4_t w;
        for (int k = 0; k < 4; k++) w[k] = sig_t'($signed($urandom_range(0, 5000)) - 2500);
        vin[n][i] = samp_t'(w);
      end
      gin[n] = gamma_t'($urandom_range(0, (n % 4 == 0) ? 65535 : 9000));
    end
    din = '0;
    gamma_bar = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    en = 1'b1;
    for (int cyc = 0; cyc < N + LAT; cyc++) begin
      @(negedge clk);
      if (cyc >= LAT) check_frame(vin[cyc - LAT], gin[cyc - LAT], dout);
      if (cyc < N) begin
        din = vin[cyc];
        gamma_bar = gin[cyc];
      end
    end
    // stall: output must not move while en is low
    begin
      frame_t hold;
      hold = dout;
      en = 1'b0;
      din = vin[0];
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
