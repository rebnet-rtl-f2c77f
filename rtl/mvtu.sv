// mvtu: matrix-vector-threshold unit with residual-binarized inputs.
//
// Multiplies an N-element input vector, given as M residual sign vectors, by
// a CO x N binary weight matrix, then applies per-neuron thresholds and
// residual encoding. P processing elements (rb_pe) work on P output neurons at
// once (one "neuron fold"); each consumes S bits of the input vector per cycle
// (SIMD width), so one fold takes SF*M cycles with SF = N/S, and a whole vector
// NF*SF*M cycles with NF = ceil(CO/P). The run time thus grows linearly with
// the number of active levels M while the hardware stays the same.
//
// Input stream (in_valid/in_ready/in_word): for chunk j = 0..SF-1, the words
// of levels 1..M one after another. During the first fold the words are used
// straight from the stream and written to the input vector buffer; the later
// folds replay them from the buffer, so the stream is only ready in fold 0.
// Output stream (out_valid/out_ready/out_data): one output pixel holding all
// CO channels, M_MAX-bit codes (channel c at [c*MM +: MM]) or, with OUT_RAW,
// the T-bit thresholded values (for the last layer, which has no residual
// binarization). The output vector buffer is held until accepted; the unit
// stalls before the last word of a fold while the previous pixel is pending.
//
// Parameter loading (cfg_*): one write per cycle into a PE's weight memory
// (address nf*SF + j, S-bit word, bit b = weight of vector element j*S+b) or
// threshold memory (address nf), or into the layer's gamma_in/gamma_out
// registers (address = level). Neuron n = nf*P + p lives in PE p.
//
// Structure (input buffer, P PEs of S lanes, output buffer) follows the
// paper. Word order, fold-0 bypass of the buffer, the handshakes and the
// loading port are this design's choices. levels may only change while idle.
// Lint notes: rst_n is also sampled synchronously, but only by the assertion's
// disable iff; the load bus is shared by all layers, so a layer uses only the
// low address and data bits it needs, and of the PE valids only PE 0's (all
// PEs finish together).
module mvtu
  import rebnet_pkg::*;
#(
  parameter int N       = 576,
  parameter int CO      = 64,
  parameter int P       = 32,
  parameter int S       = 32,
  parameter int TW      = T,
  parameter int MM      = M_MAX,
  parameter bit OUT_RAW = 1'b0,
  localparam int SF     = N / S,
  localparam int NF     = (CO + P - 1) / P,
  localparam int WDEPTH = NF * SF,
  localparam int OE     = OUT_RAW ? TW : MM,
  localparam int PW     = clog2_min1(P)
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic [LW-1:0]       levels,
  // input word stream
  input  logic                in_valid,
  output logic                in_ready,
  input  logic [S-1:0]        in_word,
  // output pixel stream
  output logic                out_valid,
  input  logic                out_ready,
  output logic [CO*OE-1:0]    out_data,
  // parameter loading
  input  logic                cfg_we,
  input  cfg_sel_e            cfg_sel,
  input  logic [PW-1:0]       cfg_pe,
  input  logic [CFG_AW-1:0]   cfg_addr,
  input  logic [CFG_W-1:0]    cfg_data
);

  localparam int WAW = clog2_min1(WDEPTH);
  localparam int TAW = clog2_min1(NF);
  localparam int JW  = clog2_min1(SF);
  localparam int FW  = clog2_min1(NF);

  // ---------------------------------------------------------------- counters
  logic [FW-1:0] nf;
  logic [JW-1:0] j;
  logic [LW-1:0] m;
  logic          final_word, issue, src_valid, stall;
  logic          obuf_valid;
  logic          pe_fin;
  logic [FW-1:0] fin_fold;

  assign final_word = (j == JW'(SF - 1)) && (m == levels - 1'b1);
  // the output buffer is busy from the last fold's result until it is taken
  assign stall      = final_word && (obuf_valid || (pe_fin && fin_fold == FW'(NF - 1)));
  assign src_valid  = (nf == '0) ? in_valid : 1'b1;
  assign issue      = src_valid && !stall;
  assign in_ready   = (nf == '0) && !stall;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      nf       <= '0;
      j        <= '0;
      m        <= '0;
      fin_fold <= '0;
    end else if (issue) begin
      if (final_word) fin_fold <= nf;
      if (m == levels - 1'b1) begin
        m <= '0;
        if (j == JW'(SF - 1)) begin
          j  <= '0;
          nf <= (nf == FW'(NF - 1)) ? '0 : nf + 1'b1;
        end else begin
          j <= j + 1'b1;
        end
      end else begin
        m <= m + 1'b1;
      end
    end
  end

  // ------------------------------------------------------ input vector buffer
  logic [S-1:0] ivb [SF*MM];
  logic [S-1:0] word;
  int           ivb_idx;
  assign ivb_idx = int'(j) * MM + int'(m);
  assign word    = (nf == '0) ? in_word : ivb[ivb_idx];

  always_ff @(posedge clk) begin
    if (issue && nf == '0) ivb[ivb_idx] <= in_word;
  end

  // ------------------------------------------------------------ coefficients
  fix_t gamma_in  [MM];
  fix_t gamma_out [MM];
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < MM; i++) begin
        gamma_in[i]  <= '0;
        gamma_out[i] <= '0;
      end
    end else if (cfg_we) begin
      if (cfg_sel == CFG_GAMMA_IN)  gamma_in[cfg_addr[LW-1:0]]  <= cfg_data[TW-1:0];
      if (cfg_sel == CFG_GAMMA_OUT) gamma_out[cfg_addr[LW-1:0]] <= cfg_data[TW-1:0];
    end
  end

  // ------------------------------------------------------ processing elements
  logic [MM-1:0]        pe_code  [P];
  fix_t                 pe_value [P];
  logic [P-1:0]         pe_valid;

  for (genvar p = 0; p < P; p++) begin : g_pe
    rb_pe #(.S(S), .TW(TW), .MM(MM), .WDEPTH(WDEPTH), .TDEPTH(NF)) u_pe (
      .clk       (clk),
      .rst_n     (rst_n),
      .in_valid  (issue),
      .in_word   (word),
      .w_addr    (WAW'(int'(nf) * SF + int'(j))),
      .level     (m),
      .clear     (j == '0),
      .last      (final_word),
      .t_addr    (TAW'(nf)),
      .gamma_in  (gamma_in),
      .gamma_out (gamma_out),
      .levels    (levels),
      .w_we      (cfg_we && cfg_sel == CFG_WEIGHT && cfg_pe == PW'(p)),
      .w_waddr   (cfg_addr[WAW-1:0]),
      .w_wdata   (cfg_data[S-1:0]),
      .t_we      (cfg_we && cfg_sel == CFG_THRESHOLD && cfg_pe == PW'(p)),
      .t_waddr   (cfg_addr[TAW-1:0]),
      .t_wdata   (cfg_data[TW-1:0]),
      .out_valid (pe_valid[p]),
      .out_code  (pe_code[p]),
      .out_value (pe_value[p])
    );
  end
  assign pe_fin = pe_valid[0];

  // ----------------------------------------------------- output vector buffer
  logic [OE-1:0] obuf [NF*P];
  always_ff @(posedge clk) begin
    if (pe_fin) begin
      for (int p = 0; p < P; p++)
        obuf[int'(fin_fold) * P + p] <= OUT_RAW ? OE'(pe_value[p]) : OE'(pe_code[p]);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                                  obuf_valid <= 1'b0;
    else if (pe_fin && fin_fold == FW'(NF - 1))  obuf_valid <= 1'b1;
    else if (out_ready)                          obuf_valid <= 1'b0;
  end

  assign out_valid = obuf_valid;
  always_comb begin
    for (int n = 0; n < CO; n++) out_data[n*OE +: OE] = obuf[n];
  end

  // the output pixel must stay stable until it is accepted
  a_out_stable: assert property (@(posedge clk) disable iff (!rst_n)
    out_valid && !out_ready |=> out_valid && $stable(out_data));

endmodule
