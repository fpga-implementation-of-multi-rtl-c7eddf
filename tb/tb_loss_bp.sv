// tb_loss_bp: self-checking test of the loss backward step.
// Random symbol/pilot pairs go in; each output word is compared with
// (y - x) / B computed in floating point (within 1 LSB of the backward
// format), for the default B = 21. Checks the 1-clock latency.
module tb_loss_bp;
  import eq_pkg::*;

  localparam int N   = 500;
  localparam int LAT = 1;

  logic  clk = 1'b0, rst_n = 1'b0, en = 1'b0;
  samp_t y, x, e;
  int    checks = 0, failures = 0;

  samp_t yin [N], xin [N];

  loss_bp dut (.clk, .rst_n, .en, .y, .x, .e);

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
    for (int n = 0; n < N; n++) begin
      vec4_t a, b;
      for (int k = 0; k < 4; k++) begin
        a[k] = sig_t'($signed($urandom_range(0, 8000)) - 4000);
        b[k] = (n % 2) ? sig_t'(((a[k] > 0) ? 2048 : -2048))
                       : sig_t'($signed($urandom_range(0, 8000)) - 4000);
      end
      yin[n] = samp_t'(a);
      xin[n] = samp_t'(b);
    end
    y = '0;
    x = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    en = 1'b1;
    for (int cyc = 0; cyc < N + LAT; cyc++) begin
      @(negedge clk);
      if (cyc >= LAT) begin
        vec4_t a, b, o;
        a = vec4_t'(yin[cyc - LAT]);
        b = vec4_t'(xin[cyc - LAT]);
        o = vec4_t'(e);
        for (int c = 0; c < 4; c++) begin
          real ex;
          ex = ($itor(a[c]) - $itor(b[c])) / 2048.0 / 21.0;
          checks++;
          if (fabs($itor(o[c]) / 32768.0 - ex) > 1.0 / 32768.0) begin
            failures++;
            if (failures < 10) $display("got %f exp %f", $itor(o[c]) / 32768.0, ex);
          end
        end
      end
      if (cyc < N) begin
        y = yin[cyc];
        x = xin[cyc];
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
