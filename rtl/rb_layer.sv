// rb_layer: one layer of the dataflow accelerator: sliding window unit,
// matrix-vector-threshold unit and, when POOL is set, 2x2 max pooling.
//
// Input: row-major pixel stream of an IFM x IFM map with CI channels of MM-bit
// residual codes. Output: the layer's pixel stream, CO channels of MM-bit codes
// (or CO T-bit values with OUT_RAW, for the final classifier layer). A fully
// connected layer is K = 1, IFM = 1: the single "pixel" is the whole vector.
// The three units are joined by valid/ready streams and run concurrently, as
// in the paper's chain SWU -> MVTU -> max-pooling -> next SWU.
// cfg_* writes reach the MVTU only when cfg_we is set (see mvtu).
module rb_layer
  import rebnet_pkg::*;
#(
  parameter int CI      = 64,
  parameter int CO      = 64,
  parameter int IFM     = 30,
  parameter int K       = 3,
  parameter int P       = 32,
  parameter int S       = 32,
  parameter bit POOL    = 1'b1,
  parameter bit OUT_RAW = 1'b0,
  parameter int TW      = T,
  parameter int MM      = M_MAX,
  localparam int OE     = OUT_RAW ? TW : MM,
  localparam int PW     = clog2_min1(P)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [LW-1:0]     levels,
  input  logic              in_valid,
  output logic              in_ready,
  input  logic [CI*MM-1:0]  in_data,
  output logic              out_valid,
  input  logic              out_ready,
  output logic [CO*OE-1:0]  out_data,
  input  logic              cfg_we,
  input  cfg_sel_e          cfg_sel,
  input  logic [PW-1:0]     cfg_pe,
  input  logic [CFG_AW-1:0] cfg_addr,
  input  logic [CFG_W-1:0]  cfg_data
);

  localparam int CONV_OFM = IFM - K + 1;

  logic         w_valid, w_ready;
  logic [S-1:0] w_word;
  logic              mv_valid, mv_ready;
  logic [CO*OE-1:0]  mv_data;

  swu #(.CI(CI), .IFM(IFM), .K(K), .STRIDE(1), .S(S), .MM(MM)) u_swu (
    .clk, .rst_n, .levels,
    .in_valid, .in_ready, .in_data,
    .out_valid (w_valid), .out_ready (w_ready), .out_word (w_word)
  );

  mvtu #(.N(K*K*CI), .CO(CO), .P(P), .S(S), .TW(TW), .MM(MM), .OUT_RAW(OUT_RAW)) u_mvtu (
    .clk, .rst_n, .levels,
    .in_valid (w_valid), .in_ready (w_ready), .in_word (w_word),
    .out_valid (mv_valid), .out_ready (mv_ready), .out_data (mv_data),
    .cfg_we, .cfg_sel, .cfg_pe, .cfg_addr, .cfg_data
  );

  if (POOL) begin : g_pool
    maxpool #(.C(CO), .IFM(CONV_OFM), .MM(MM)) u_pool (
      .clk, .rst_n,
      .in_valid (mv_valid), .in_ready (mv_ready), .in_data (mv_data[CO*MM-1:0]),
      .out_valid, .out_ready, .out_data (out_data[CO*MM-1:0])
    );
  end else begin : g_nopool
    assign out_valid = mv_valid;
    assign mv_ready  = out_ready;
    assign out_data  = mv_data;
  end

endmodule
