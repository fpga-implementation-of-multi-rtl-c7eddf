// ml_equalizer: adaptive three-layer model-based equalizer for a
// dual-polarization coherent receiver, with on-chip training by gradient
// backpropagation.
//
// Forward path (inference), one symbol = two samples per clock:
//   Kerr FP 0 -> Linear FP 1 -> Kerr FP 2 -> Linear FP 3 -> Kerr FP 4
//   -> Linear FP 5 -> MF FP -> y
// The Kerr steps are fixed nonlinear phase rotations, the linear steps are
// trainable 2x2 MIMO 5-tap FIR filters (60 trainable taps in total) and the
// matched filter is fixed and decimates to one symbol per clock.
//
// Backward path (training), data flowing the other way:
//   Loss BP (y - pilot) / B -> MF BP -> Linear BP 0 -> Kerr BP 1
//   -> Linear BP 2 -> Kerr BP 3
// Gradient 0, 2 and 4 correlate the backward gradient at the output of
// Linear FP 5, 3 and 1 with that layer's forward input and update its taps
// after every batch of B symbols. The forward inputs reach the backward blocks
// through shift registers (Gradient SR 0/2/4, Kerr SR 1/3) whose depths are
// derived below from the block latencies, so each backward block sees the
// forward and backward values of the same samples in the same clock.
// Block numbering follows the backward order: index 0 belongs to layer 5.
//
// Interface: din is the received frame (samples 2k, 2k+1); pilot is the
// transmitted symbol k whose centre is sample 2k of that frame (before the
// channel). The pilot is delayed inside by the forward latency plus the
// 11-symbol group delay of the filters. y is the equalized symbol, valid
// Y_LATENCY enabled clocks after its frame entered (and equal to symbol
// k - GD_FRAMES of the input stream). e_mon is the scaled error (y - x) / B.
// en stalls every register (stream gaps); train_en turns tap updates on;
// lr_shift sets the learning rate 2^-lr_shift; gamma_bar is 8/9 gamma L in
// Q0.16. cfg_* loads taps: cfg_layer 0/1/2 = Linear FP 1/3/5,
// cfg_idx = 10 p + 5 q + k. taps_o[0..2] and upd_o[0..2] show the taps and
// update pulses of Linear FP 1/3/5, grad_o the last batch's gradient words.
//
// Taken from the reference design: the layer order, the block set and their
// connections, the shift registers between forward and backward path, the
// batch size and word lengths. This design's choices: the throughput of one
// symbol per clock, all latencies and delay depths, the pilot alignment and
// the configuration port.
module ml_equalizer
  import eq_pkg::*;
#(
  parameter int      B       = BATCH,
  parameter mftaps_t MF_COEF = MF_RRC
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            en,
  input  logic            train_en,
  input  logic [3:0]      lr_shift,
  input  gamma_t          gamma_bar,
  input  frame_t          din,
  input  samp_t           pilot,
  output samp_t           y,
  output samp_t           e_mon,
  input  logic            cfg_we,
  input  logic [1:0]      cfg_layer,
  input  logic [4:0]      cfg_idx,
  input  tap_t            cfg_data,
  output taps_t [2:0]     taps_o,
  output logic  [2:0]     upd_o,
  output taps_t [2:0]     grad_o
);

  // ---- arrival offsets (clocks) of frame tau at each forward node ----
  localparam int A_A0 = LAT_KERR_FP;                 // Kerr FP 0 output
  localparam int A_B1 = A_A0 + LAT_LIN_FP;           // Linear FP 1 output
  localparam int A_A2 = A_B1 + LAT_KERR_FP;          // Kerr FP 2 output
  localparam int A_B3 = A_A2 + LAT_LIN_FP;           // Linear FP 3 output
  localparam int A_A4 = A_B3 + LAT_KERR_FP;          // Kerr FP 4 output
  localparam int A_B5 = A_A4 + LAT_LIN_FP;           // Linear FP 5 output
  localparam int A_Y  = A_B5 + LAT_MF_FP;            // MF output
  localparam int A_E  = A_Y + LAT_LOSS_BP;           // Loss BP output
  // ---- arrival offsets of the backward gradient of frame tau ----
  localparam int D0 = A_E + LA_MF_BP + LAT_MF_BP;    // at Linear FP 5 output
  localparam int D1 = D0 + LA_LIN_BP + LAT_LIN_BP;   // at Kerr FP 4 output
  localparam int D2 = D1 + LAT_KERR_BP;              // at Linear FP 3 output
  localparam int D3 = D2 + LA_LIN_BP + LAT_LIN_BP;   // at Kerr FP 2 output
  localparam int D4 = D3 + LAT_KERR_BP;              // at Linear FP 1 output
  // ---- shift-register depths ----
  localparam int PILOT_DEPTH = A_Y + GD_FRAMES;
  localparam int GSR0_DEPTH  = D0 - A_A4;
  localparam int KSR1_DEPTH  = D1 - A_B3;
  localparam int GSR2_DEPTH  = D2 - A_A2;
  localparam int KSR3_DEPTH  = D3 - A_B1;
  localparam int GSR4_DEPTH  = D4 - A_A0;
  localparam int Y_LATENCY   = A_Y;
  localparam int FW          = $bits(frame_t);

  // ---- forward path ----
  frame_t a0, b1, a2, b3, a4, b5;

  kerr_fp   u_kerr_fp0   (.clk, .rst_n, .en, .gamma_bar, .din(din), .dout(a0));
  linear_fp u_linear_fp1 (.clk, .rst_n, .en, .taps(taps_o[0]), .din(a0), .dout(b1));
  kerr_fp   u_kerr_fp2   (.clk, .rst_n, .en, .gamma_bar, .din(b1), .dout(a2));
  linear_fp u_linear_fp3 (.clk, .rst_n, .en, .taps(taps_o[1]), .din(a2), .dout(b3));
  kerr_fp   u_kerr_fp4   (.clk, .rst_n, .en, .gamma_bar, .din(b3), .dout(a4));
  linear_fp u_linear_fp5 (.clk, .rst_n, .en, .taps(taps_o[2]), .din(a4), .dout(b5));
  mf_fp #(.TAPS(MF_COEF)) u_mf_fp (.clk, .rst_n, .en, .din(b5), .y(y));

  // ---- loss ----
  samp_t pilot_d;
  delay_sr #(.WIDTH($bits(samp_t)), .DEPTH(PILOT_DEPTH)) u_pilot_sr
    (.clk, .rst_n, .en, .din(pilot), .dout(pilot_d));

  loss_bp #(.B(B)) u_loss_bp (.clk, .rst_n, .en, .y(y), .x(pilot_d), .e(e_mon));

  // ---- backward path ----
  frame_t g5, g4, g3, g2, g1;
  frame_t gsr0, ksr1, gsr2, ksr3, gsr4;

  mf_bp #(.TAPS(MF_COEF)) u_mf_bp (.clk, .rst_n, .en, .e(e_mon), .dout(g5));
  linear_bp u_linear_bp0 (.clk, .rst_n, .en, .taps(taps_o[2]), .din(g5), .dout(g4));
  kerr_bp   u_kerr_bp1   (.clk, .rst_n, .en, .gamma_bar, .g(g4), .u(ksr1), .dout(g3));
  linear_bp u_linear_bp2 (.clk, .rst_n, .en, .taps(taps_o[1]), .din(g3), .dout(g2));
  kerr_bp   u_kerr_bp3   (.clk, .rst_n, .en, .gamma_bar, .g(g2), .u(ksr3), .dout(g1));

  delay_sr #(.WIDTH(FW), .DEPTH(GSR0_DEPTH)) u_grad_sr0
    (.clk, .rst_n, .en, .din(a4), .dout(gsr0));
  delay_sr #(.WIDTH(FW), .DEPTH(KSR1_DEPTH)) u_kerr_sr1
    (.clk, .rst_n, .en, .din(b3), .dout(ksr1));
  delay_sr #(.WIDTH(FW), .DEPTH(GSR2_DEPTH)) u_grad_sr2
    (.clk, .rst_n, .en, .din(a2), .dout(gsr2));
  delay_sr #(.WIDTH(FW), .DEPTH(KSR3_DEPTH)) u_kerr_sr3
    (.clk, .rst_n, .en, .din(b1), .dout(ksr3));
  delay_sr #(.WIDTH(FW), .DEPTH(GSR4_DEPTH)) u_grad_sr4
    (.clk, .rst_n, .en, .din(a0), .dout(gsr4));

  // ---- gradient layers (parameter updates to the linear layers) ----
  gradient #(.B(B)) u_gradient0 (
    .clk, .rst_n, .en, .train_en, .lr_shift, .u(gsr0), .d(g5),
    .cfg_we(cfg_we && cfg_layer == 2'd2), .cfg_idx, .cfg_data,
    .taps(taps_o[2]), .grad(grad_o[2]), .upd(upd_o[2]));
  gradient #(.B(B)) u_gradient2 (
    .clk, .rst_n, .en, .train_en, .lr_shift, .u(gsr2), .d(g3),
    .cfg_we(cfg_we && cfg_layer == 2'd1), .cfg_idx, .cfg_data,
    .taps(taps_o[1]), .grad(grad_o[1]), .upd(upd_o[1]));
  gradient #(.B(B)) u_gradient4 (
    .clk, .rst_n, .en, .train_en, .lr_shift, .u(gsr4), .d(g1),
    .cfg_we(cfg_we && cfg_layer == 2'd0), .cfg_idx, .cfg_data,
    .taps(taps_o[0]), .grad(grad_o[0]), .upd(upd_o[0]));

  // ---- configuration port rules ----
  cfg_range: assert property (@(posedge clk) disable iff (!rst_n)
    cfg_we |-> (cfg_layer < 2'd3 && cfg_idx < 5'(NPOL * NPOL * NTAPS)))
    else $error("ml_equalizer: configuration write out of range");

endmodule
