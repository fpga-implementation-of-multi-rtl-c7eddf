// tb_kerr_bp: self-checking test of the Kerr backward step.
// Random forward samples u, backward gradients g and gamma_bar values go in;
// each output is compared with the chain-rule result
//   w = g exp(-j phi),  s = sum_p Im(w_p) Re(u_p) - Re(w_p) Im(u_p),
//   d = w + 2 gamma_bar s u
// computed in floating point with the same fifth-order Taylor polynomials
// for exp(-j phi), clamped to [-1, 1], and the angle rounded to 12 bits
// (Q2.10) (within 4 LSB). A second set of checks compares against the exact exponential for
// small angles (phi < 0.25, within 8 LSB). Checks the 3-clock latency.
module tb_kerr_bp;
  import eq_pkg::*;

  localparam int N   = 400;
  localparam int LAT = LAT_KERR_BP;

  logic   clk = 1'b0, rst_n = 1'b0, en = 1'b0;
  gamma_t gamma_bar;
  frame_t g, u, dout;
  int     checks = 0, failures = 0;

  frame_t gin [N], uin [N];

  kerr_bp dut (.clk, .rst_n, .en, .gamma_bar, .g, .u, .dout);

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

  task automatic check(input frame_t gf, input frame_t uf, input gamma_t gm,
                       input frame_t got, input bit exact);
    for (int i = 0; i < SPC; i++) begin
      vec4_t gv, uv, o;
      real ur [2], ui [2], gr [2], gi [2], wr [2], wi [2];
      real p, phi, cs, sn, s, gb, dr, di, tol;
      gv = vec4_t'(gf[i]);
      uv = vec4_t'(uf[i]);
      o  = vec4_t'(got[i]);
      gb = $itor(gm) / 65536.0;
      p  = 0.0;
      for (int q = 0; q < 2; q++) begin
        ur[q] = $itor(uv[re_idx(q)]) / 2048.0;
        ui[q] = $itor(uv[im_idx(q)]) / 2048.0;
        gr[q] = $itor(gv[re_idx(q)]) / 32768.0;
        gi[q] = $itor(gv[im_idx(q)]) / 32768.0;
        p += ur[q] * ur[q] + ui[q] * ui[q];
      end
      phi = gb * p;
      if (exact) begin
        if (phi >= 0.25) continue;
        cs  = $cos(phi);
        sn  = $sin(phi);
        tol = 8.0;
      end else begin
        if (phi > 4095.0 / 1024.0) phi = 4095.0 / 1024.0;
        phi = $floor(phi * 1024.0 + 0.5) / 1024.0;
        cs  = 1.0 - phi ** 2 / 2.0 + phi ** 4 / 24.0;
        sn  = phi - phi ** 3 / 6.0 + phi ** 5 / 120.0;
        if (cs > 1.0) cs = 1.0;
        if (cs < -1.0) cs = -1.0;
        if (sn > 1.0) sn = 1.0;
        if (sn < -1.0) sn = -1.0;
        tol = 4.0;
      end
      s = 0.0;
      for (int q = 0; q < 2; q++) begin
        wr[q] = gr[q] * cs + gi[q] * sn;
        wi[q] = gi[q] * cs - gr[q] * sn;
        s += wi[q] * ur[q] - wr[q] * ui[q];
      end
      for (int q = 0; q < 2; q++) begin
        dr = wr[q] + 2.0 * gb * s * ur[q];
        di = wi[q] + 2.0 * gb * s * ui[q];
        // the output word saturates at its range
        if (dr > 8191.0 / 32768.0) dr = 8191.0 / 32768.0;
        if (dr < -0.25) dr = -0.25;
        if (di > 8191.0 / 32768.0) di = 8191.0 / 32768.0;
        if (di < -0.25) di = -0.25;
        checks += 2;
        if (fabs($itor(o[re_idx(q)]) / 32768.0 - dr) > tol / 32768.0 ||
            fabs($itor(o[im_idx(q)]) / 32768.0 - di) > tol / 32768.0) begin
          failures++;
          if (failures < 10)
            $display("exact=%0d phi=%f got %f %f exp %f %f", exact, phi,
                     $itor(o[re_idx(q)]) / 32768.0, $itor(o[im_idx(q)]) / 32768.0, dr, di);
        end
      end
    end
  endtask

  initial begin
    for (int n = 0; n < N; n++) begin
      for (int i = 0; i < SPC; i++) begin
        vec4_t a, b;
        for (int k = 0; k < 4; k++) begin
          a[k] = sig_t'($signed($urandom_range(0, 5000)) - 2500);
          b[k] = sig_t'($signed($urandom_range(0, 12000)) - 6000);
        end
        uin[n][i] = samp_t'(a);
        gin[n][i] = samp_t'(b);
      end
    end
    g = '0;
    u = '0;
    gamma_bar = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    en = 1'b1;
    // gamma_bar is a quasi-static setting: the stream is run in four
    // segments, each with its own value held until the pipeline has drained
    for (int seg = 0; seg < 4; seg++) begin
      int base;
      base = seg * (N / 4);
      gamma_bar = gamma_t'(seg * 1700);
      for (int cyc = 0; cyc < N / 4 + LAT; cyc++) begin
        @(negedge clk);
        if (cyc >= LAT) begin
          check(gin[base + cyc - LAT], uin[base + cyc - LAT], gamma_bar, dout, 1'b0);
          check(gin[base + cyc - LAT], uin[base + cyc - LAT], gamma_bar, dout, 1'b1);
        end
        if (cyc < N / 4) begin
          g = gin[base + cyc];
          u = uin[base + cyc];
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
