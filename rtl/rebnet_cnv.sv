// rebnet_cnv: residual-binarized CNN accelerator for the Arch-2 network
// (CIFAR-10 / SVHN classifier), built as a dataflow chain of layers.
//
// Network (layer: kind, output channels, PE count P, SIMD width S):
//   L0 conv3x3 64 (16,3)   32x32 -> 30x30
//   L1 conv3x3 64 (32,32)  30x30 -> 28x28, max-pool 2x2 -> 14x14
//   L2 conv3x3 128 (16,32) 14x14 -> 12x12
//   L3 conv3x3 128 (16,32) 12x12 -> 10x10, max-pool 2x2 -> 5x5
//   L4 conv3x3 256 (4,32)  5x5 -> 3x3
//   L5 conv3x3 256 (1,32)  3x3 -> 1x1
//   L6 fc 512 (1,4), L7 fc 512 (1,8), L8 fc 10 (4,1)
// Every layer except L8 ends in batch normalisation (thresholds) and residual
// binarization; L8 emits its ten thresholded T-bit scores, from which the host
// takes the class (softmax / argmax is not built). Each layer is an rb_layer
// (sliding window unit -> MVTU -> optional max pooling); all layers run
// concurrently on one image stream, linked by valid/ready handshakes.
//
// Interface:
//   levels     number of residual levels M (1..M_MAX) used by every layer;
//              change it only while the accelerator is idle. Run time grows
//              linearly with M; the hardware is the same for every M.
//   cfg_*      parameter loading: cfg_layer selects the layer, the rest is the
//              MVTU write port of that layer (weights, thresholds, gammas).
//   in_*       input image, 32x32 pixels row-major, each pixel 3 channels of
//              M_MAX-bit residual codes (the host encodes the image).
//   out_*      one word of ten T-bit class scores per image.
//
// The layer list, the parallelism and T = 24 follow the paper's Arch-2
// configuration. Unpadded convolutions, the host-side encoding of the input
// image and the parameter-load port are this design's choices.
module rebnet_cnv
  import rebnet_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  logic [LW-1:0]     levels,
  input  logic              cfg_we,
  input  logic [3:0]        cfg_layer,
  input  cfg_sel_e          cfg_sel,
  input  logic [4:0]        cfg_pe,
  input  logic [CFG_AW-1:0] cfg_addr,
  input  logic [CFG_W-1:0]  cfg_data,
  input  logic              in_valid,
  output logic              in_ready,
  input  logic [3*M_MAX-1:0] in_data,
  output logic              out_valid,
  input  logic              out_ready,
  output logic [10*T-1:0]   out_data
);

  logic l0_valid, l0_ready;
  logic [64*M_MAX-1:0] l0_data;
  logic l1_valid, l1_ready;
  logic [64*M_MAX-1:0] l1_data;
  logic l2_valid, l2_ready;
  logic [128*M_MAX-1:0] l2_data;
  logic l3_valid, l3_ready;
  logic [128*M_MAX-1:0] l3_data;
  logic l4_valid, l4_ready;
  logic [256*M_MAX-1:0] l4_data;
  logic l5_valid, l5_ready;
  logic [256*M_MAX-1:0] l5_data;
  logic l6_valid, l6_ready;
  logic [512*M_MAX-1:0] l6_data;
  logic l7_valid, l7_ready;
  logic [512*M_MAX-1:0] l7_data;

  rb_layer #(.CI(L_CI[0]), .CO(L_CO[0]), .IFM(L_IFM[0]), .K(L_K[0]), .P(L_P[0]), .S(L_S[0]),
             .POOL(L_POOL[0] != 0), .OUT_RAW(1'b0)) u_l0 (
    .clk, .rst_n, .levels,
    .in_valid (in_valid), .in_ready (in_ready), .in_data (in_data),
    .out_valid (l0_valid), .out_ready (l0_ready), .out_data (l0_data),
    .cfg_we (cfg_we && cfg_layer == 4'd0), .cfg_sel, .cfg_pe (cfg_pe[3:0]),
    .cfg_addr, .cfg_data
  );

  rb_layer #(.CI(L_CI[1]), .CO(L_CO[1]), .IFM(L_IFM[1]), .K(L_K[1]), .P(L_P[1]), .S(L_S[1]),
             .POOL(L_POOL[1] != 0), .OUT_RAW(1'b0)) u_l1 (
    .clk, .rst_n, .levels,
    .in_valid (l0_valid), .in_ready (l0_ready), .in_data (l0_data),
    .out_valid (l1_valid), .out_ready (l1_ready), .out_data (l1_data),
    .cfg_we (cfg_we && cfg_layer == 4'd1), .cfg_sel, .cfg_pe (cfg_pe[4:0]),
    .cfg_addr, .cfg_data
  );

  rb_layer #(.CI(L_CI[2]), .CO(L_CO[2]), .IFM(L_IFM[2]), .K(L_K[2]), .P(L_P[2]), .S(L_S[2]),
             .POOL(L_POOL[2] != 0), .OUT_RAW(1'b0)) u_l2 (
    .clk, .rst_n, .levels,
    .in_valid (l1_valid), .in_ready (l1_ready), .in_data (l1_data),
    .out_valid (l2_valid), .out_ready (l2_ready), .out_data (l2_data),
    .cfg_we (cfg_we && cfg_layer == 4'd2), .cfg_sel, .cfg_pe (cfg_pe[3:0]),
    .cfg_addr, .cfg_data
  );

  rb_layer #(.CI(L_CI[3]), .CO(L_CO[3]), .IFM(L_IFM[3]), .K(L_K[3]), .P(L_P[3]), .S(L_S[3]),
             .POOL(L_POOL[3] != 0), .OUT_RAW(1'b0)) u_l3 (
    .clk, .rst_n, .levels,
    .in_valid (l2_valid), .in_ready (l2_ready), .in_data (l2_data),
    .out_valid (l3_valid), .out_ready (l3_ready), .out_data (l3_data),
    .cfg_we (cfg_we && cfg_layer == 4'd3), .cfg_sel, .cfg_pe (cfg_pe[3:0]),
    .cfg_addr, .cfg_data
  );

  rb_layer #(.CI(L_CI[4]), .CO(L_CO[4]), .IFM(L_IFM[4]), .K(L_K[4]), .P(L_P[4]), .S(L_S[4]),
             .POOL(L_POOL[4] != 0), .OUT_RAW(1'b0)) u_l4 (
    .clk, .rst_n, .levels,
    .in_valid (l3_valid), .in_ready (l3_ready), .in_data (l3_data),
    .out_valid (l4_valid), .out_ready (l4_ready), .out_data (l4_data),
    .cfg_we (cfg_we && cfg_layer == 4'd4), .cfg_sel, .cfg_pe (cfg_pe[1:0]),
    .cfg_addr, .cfg_data
  );

  rb_layer #(.CI(L_CI[5]), .CO(L_CO[5]), .IFM(L_IFM[5]), .K(L_K[5]), .P(L_P[5]), .S(L_S[5]),
             .POOL(L_POOL[5] != 0), .OUT_RAW(1'b0)) u_l5 (
    .clk, .rst_n, .levels,
    .in_valid (l4_valid), .in_ready (l4_ready), .in_data (l4_data),
    .out_valid (l5_valid), .out_ready (l5_ready), .out_data (l5_data),
    .cfg_we (cfg_we && cfg_layer == 4'd5), .cfg_sel, .cfg_pe (cfg_pe[0:0]),
    .cfg_addr, .cfg_data
  );

  rb_layer #(.CI(L_CI[6]), .CO(L_CO[6]), .IFM(L_IFM[6]), .K(L_K[6]), .P(L_P[6]), .S(L_S[6]),
             .POOL(L_POOL[6] != 0), .OUT_RAW(1'b0)) u_l6 (
    .clk, .rst_n, .levels,
    .in_valid (l5_valid), .in_ready (l5_ready), .in_data (l5_data),
    .out_valid (l6_valid), .out_ready (l6_ready), .out_data (l6_data),
    .cfg_we (cfg_we && cfg_layer == 4'd6), .cfg_sel, .cfg_pe (cfg_pe[0:0]),
    .cfg_addr, .cfg_data
  );

  rb_layer #(.CI(L_CI[7]), .CO(L_CO[7]), .IFM(L_IFM[7]), .K(L_K[7]), .P(L_P[7]), .S(L_S[7]),
             .POOL(L_POOL[7] != 0), .OUT_RAW(1'b0)) u_l7 (
    .clk, .rst_n, .levels,
    .in_valid (l6_valid), .in_ready (l6_ready), .in_data (l6_data),
    .out_valid (l7_valid), .out_ready (l7_ready), .out_data (l7_data),
    .cfg_we (cfg_we && cfg_layer == 4'd7), .cfg_sel, .cfg_pe (cfg_pe[0:0]),
    .cfg_addr, .cfg_data
  );

  rb_layer #(.CI(L_CI[8]), .CO(L_CO[8]), .IFM(L_IFM[8]), .K(L_K[8]), .P(L_P[8]), .S(L_S[8]),
             .POOL(L_POOL[8] != 0), .OUT_RAW(1'b1)) u_l8 (
    .clk, .rst_n, .levels,
    .in_valid (l7_valid), .in_ready (l7_ready), .in_data (l7_data),
    .out_valid (out_valid), .out_ready (out_ready), .out_data (out_data),
    .cfg_we (cfg_we && cfg_layer == 4'd8), .cfg_sel, .cfg_pe (cfg_pe[1:0]),
    .cfg_addr, .cfg_data
  );

endmodule
