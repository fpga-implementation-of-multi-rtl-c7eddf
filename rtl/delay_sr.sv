// delay_sr: shift register that delays a word by DEPTH enabled clocks.
//
// The forward path is pipelined, so the forward signals that a backward layer
// needs (the input of a Kerr layer for its Kerr backward step, the input of a
// linear layer for its gradient layer) must wait until the backward gradient
// of the same samples arrives. These delay lines do that; their depths are
// worked out in the top level from the latencies of the blocks in between.
//
// Interface and timing: dout is din as it was DEPTH enabled clocks earlier
// (DEPTH >= 1); the register chain advances only when en is high and resets
// to zero. The shift registers themselves are from the reference design; the
// depths are this design's, as they follow from its pipeline.
module delay_sr #(
  parameter int WIDTH = 8,
  parameter int DEPTH = 1
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             en,
  input  logic [WIDTH-1:0] din,
  output logic [WIDTH-1:0] dout
);

  logic [WIDTH-1:0] sr [DEPTH];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < DEPTH; i++) sr[i] <= '0;
    end else if (en) begin
      sr[0] <= din;
      for (int i = 1; i < DEPTH; i++) sr[i] <= sr[i - 1];
    end
  end

  assign dout = sr[DEPTH - 1];

  initial assert (DEPTH >= 1) else $fatal(1, "delay_sr: DEPTH must be at least 1");

endmodule
