// rb_pe: processing element of the residual-binarized MVTU.
//
// Computes one output neuron. Each cycle with in_valid it XNORs an S-bit
// input word (one residual level of one chunk of the input vector) with the
// S-bit weight word at w_addr ("Index 1"), popcounts the result and adds the
// +/-1 dot product 2*popcount - S to accumulator #level ("Index 2 = i"); the
// clear flag restarts that accumulator with the word's value instead. After the
// word flagged last, the accumulators hold dot(s_ei, s_w) for every level i.
// In the next cycle (out_valid) the MAC forms sum_i gamma_in[i] * acc[i] over
// the active levels, the threshold at t_addr (sampled with the last word) is
// subtracted (batch normalisation), and the residual encoder turns the result
// into an M-bit code with the next layer's gamma_out[].
//
// Timing: one word per cycle, no stall inside; out_valid / out_code /
// out_value are valid for exactly one cycle, one cycle after the last word.
// The accumulators may already take the next vector's words in that cycle.
//
// Follows the paper: weight memory, XNOR, popcount, M accumulators behind a
// demux/mux, MAC with this layer's coefficients, threshold memory, encoder.
// Own choices: accumulating 2p-S rather than p; one common fixed-point scale
// (no shifts), with the batch-norm scale assumed folded into gamma_in by the
// host; asynchronous-read memories with a write port for loading.
// Lint notes: rst_n is also sampled synchronously, but only by the assertion's
// disable iff; the upper T bits of each 2T-bit product are unused on purpose
// (truncation to T bits).
module rb_pe
  import rebnet_pkg::*;
#(
  parameter int S      = 32,
  parameter int TW     = T,
  parameter int MM     = M_MAX,
  parameter int WDEPTH = 18,
  parameter int TDEPTH = 2,
  localparam int WAW   = clog2_min1(WDEPTH),
  localparam int TAW   = clog2_min1(TDEPTH)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // compute
  input  logic                 in_valid,
  input  logic [S-1:0]         in_word,
  input  logic [WAW-1:0]       w_addr,
  input  logic [LW-1:0]        level,
  input  logic                 clear,
  input  logic                 last,
  input  logic [TAW-1:0]       t_addr,
  input  logic signed [TW-1:0] gamma_in  [MM],
  input  logic signed [TW-1:0] gamma_out [MM],
  input  logic [LW-1:0]        levels,
  // parameter loading
  input  logic                 w_we,
  input  logic [WAW-1:0]       w_waddr,
  input  logic [S-1:0]         w_wdata,
  input  logic                 t_we,
  input  logic [TAW-1:0]       t_waddr,
  input  logic signed [TW-1:0] t_wdata,
  // result
  output logic                 out_valid,
  output logic [MM-1:0]        out_code,
  output logic signed [TW-1:0] out_value
);

  logic [S-1:0]         wmem [WDEPTH];
  logic signed [TW-1:0] tmem [TDEPTH];
  logic signed [TW-1:0] acc  [MM];
  logic                 fin;
  logic [TAW-1:0]       t_sel;

  // XnorPopcount of the current word
  logic [S-1:0]         xnor_bits;
  logic signed [TW-1:0] dot;
  always_comb begin
    int pc;
    xnor_bits = ~(in_word ^ wmem[w_addr]);
    pc = 0;
    for (int b = 0; b < S; b++) pc += int'(xnor_bits[b]);
    dot = TW'(2 * pc - S);
  end

  always_ff @(posedge clk) begin
    if (w_we) wmem[w_waddr] <= w_wdata;
    if (t_we) tmem[t_waddr] <= t_wdata;
  end

  // accumulators (DEMUX on write, MUX on read, both indexed by level)
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < MM; i++) acc[i] <= '0;
      fin   <= 1'b0;
      t_sel <= '0;
    end else begin
      fin <= in_valid && last;
      if (in_valid) begin
        acc[level] <= (clear ? '0 : acc[level]) + dot;
        if (last) t_sel <= t_addr;
      end
    end
  end

  // MAC, threshold, encoder
  logic signed [TW-1:0] mac;
  always_comb begin
    logic signed [2*TW-1:0] prod;
    prod = '0;
    mac  = '0;
    for (int i = 0; i < MM; i++) begin
      if (i < int'(levels)) begin
        prod = gamma_in[i] * acc[i];
        mac  = mac + prod[TW-1:0];
      end
    end
  end

  assign out_value = mac - tmem[t_sel];
  assign out_valid = fin;

  rb_encoder #(.TW(TW), .MM(MM)) u_enc (
    .x      (out_value),
    .gamma  (gamma_out),
    .levels (levels),
    .code   (out_code)
  );

  // the level index must address an active accumulator
  a_level_range: assert property (@(posedge clk) disable iff (!rst_n)
    in_valid |-> (level < levels));

endmodule
