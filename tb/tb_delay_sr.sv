// tb_delay_sr: self-checking test of the delay line.
// A random 16-bit stream is pushed through a 7-deep delay line with random
// stall clocks; after each enabled clock the output must equal the input of
// 7 enabled clocks earlier (zero before that, from reset).
module tb_delay_sr;

  localparam int W = 16;
  localparam int D = 7;
  localparam int N = 500;

  logic         clk = 1'b0, rst_n = 1'b0, en = 1'b0;
  logic [W-1:0] din, dout;
  logic [W-1:0] hist [$];
  int           checks = 0, failures = 0;

  delay_sr #(.WIDTH(W), .DEPTH(D)) dut (.clk, .rst_n, .en, .din, .dout);

  always #5 clk = ~clk;

  initial begin
    repeat (20 * N) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < D; i++) hist.push_back('0);
    din = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int c = 0; c < N; c++) begin
      en  = ($urandom_range(0, 3) != 0);
      din = W'($urandom);
      @(negedge clk);
      if (en) begin
        hist.push_back(din);
        void'(hist.pop_front());
      end
      checks++;
      if (dout !== hist[0]) begin
        failures++;
        if (failures < 10) $display("clock %0d: got %h expected %h", c, dout, hist[0]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
