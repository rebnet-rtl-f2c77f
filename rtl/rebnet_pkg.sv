// rebnet_pkg: types and constants shared by the residual-binarized CNN
// accelerator.
//
// Features travel between layers as M-level residual codes: every channel of
// a pixel carries M_MAX bits, bit M_MAX-1 being b_1 (the sign of the feature
// itself) and the lower bits the signs of the successive residuals. Unused
// levels (when fewer than M_MAX are active) are zero. A pixel is packed with
// channel c at bits [c*M_MAX +: M_MAX].
//
// All fixed-point quantities (scaling factors gamma, thresholds, MAC result)
// are T-bit two's complement numbers on one common scale chosen by the host.
// T = 24 follows the bitwidth used in the evaluation; the common scale (no
// fraction-point shifts) is a choice of this design.
//
// The table below is the Arch-2 network (CIFAR-10 / SVHN) with its per-layer
// parallelism (PE count P, SIMD width S). Convolutions are 3x3, stride 1 and
// unpadded, so the feature maps shrink 32->30->28->(pool)14->12->10->(pool)5
// ->3->1; fully connected layers are treated as 1x1 "convolutions" over a 1x1
// image.
package rebnet_pkg;

  parameter int T     = 24;  // fixed-point bitwidth
  parameter int M_MAX = 3;   // largest number of residual levels supported
  parameter int LW    = 2;   // width of the run-time level count (1..M_MAX)
  parameter int CFG_W = 64;  // parameter-load data width (max of S and T)
  parameter int CFG_AW = 16; // parameter-load address width

  typedef logic signed [T-1:0] fix_t;

  // What a parameter-load write targets inside an MVTU.
  typedef enum logic [1:0] {
    CFG_WEIGHT    = 2'd0,  // one S-bit weight word of one PE
    CFG_THRESHOLD = 2'd1,  // one T-bit threshold of one PE
    CFG_GAMMA_IN  = 2'd2,  // gamma_i of this layer's input features (addr = i)
    CFG_GAMMA_OUT = 2'd3   // gamma_i used to encode this layer's output (addr = i)
  } cfg_sel_e;

  // Arch-2 layer table.
  parameter int NUM_LAYERS = 9;
  typedef int layer_tab_t [NUM_LAYERS];
  parameter layer_tab_t L_CI   = '{3,  64,  64, 128, 128, 256, 256, 512, 512};
  parameter layer_tab_t L_CO   = '{64, 64, 128, 128, 256, 256, 512, 512,  10};
  parameter layer_tab_t L_IFM  = '{32, 30,  14,  12,   5,   3,   1,   1,   1};
  parameter layer_tab_t L_K    = '{3,   3,   3,   3,   3,   3,   1,   1,   1};
  parameter layer_tab_t L_P    = '{16, 32,  16,  16,   4,   1,   1,   1,   4};
  parameter layer_tab_t L_S    = '{3,  32,  32,  32,  32,  32,   4,   8,   1};
  parameter layer_tab_t L_POOL = '{0,   1,   0,   1,   0,   0,   0,   0,   0};

  function automatic int clog2_min1(int v);
    return (v <= 2) ? 1 : $clog2(v);
  endfunction

endpackage
