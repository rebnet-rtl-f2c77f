// swu: sliding window unit for residual-binarized feature maps.
//
// Turns a stream of input pixels (row-major, CI channels of MM-bit residual
// codes each) into the word stream an MVTU consumes. For every KxK window
// position (unpadded, step STRIDE) the window is flattened into an N = K*K*CI
// element vector, element (ky*K + kx)*CI + c, and sent as SF = N/S words of
// S bits; for M active levels each S-bit chunk is sent M times in a row, once
// per level (b_1 first). One window thus takes SF*M cycles.
//
// Buffering: a ring of R = K + STRIDE image rows. The rows of the current
// output row (K of them) are read while the next STRIDE rows are written, so
// loading and emitting overlap and the unit never makes the MVTU wait once the
// first K rows are in. `avail` counts the rows written from the top row of the
// current output row on; windows are emitted while avail >= K, pixels are
// accepted while avail < R. At the end of an image the top jumps past the
// rows below the last window (they are written and never read), and the next
// image follows without a gap. Fully connected layers use the unit with K = 1
// and IFM = 1, where it only cuts the input vector into words.
//
// Interface: valid/ready streams; levels (1..MM) may change only while idle.
// Following the paper: a streaming line buffer of about K rows, S-bit words,
// M words per chunk. The STRIDE extra rows that let loading overlap, the
// window element order and the lack of padding are this design's choices.
// Requires S to divide K*K*CI and STRIDE <= K.
// Lint note: rst_n is also sampled synchronously, but only by the
// assertion's disable iff.
module swu
  import rebnet_pkg::*;
#(
  parameter int CI     = 64,
  parameter int IFM    = 30,
  parameter int K      = 3,
  parameter int STRIDE = 1,
  parameter int S      = 32,
  parameter int MM     = M_MAX,
  localparam int N     = K * K * CI,
  localparam int SF    = N / S,
  localparam int OFM   = (IFM - K) / STRIDE + 1,
  localparam int R     = K + STRIDE
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic [LW-1:0]       levels,
  input  logic                in_valid,
  output logic                in_ready,
  input  logic [CI*MM-1:0]    in_data,
  output logic                out_valid,
  input  logic                out_ready,
  output logic [S-1:0]        out_word
);

  localparam int RW    = clog2_min1(R);
  localparam int CW    = clog2_min1(IFM);
  localparam int AW    = $clog2(IFM + R + 1) + 1;   // signed row count
  localparam int JW    = clog2_min1(SF);
  localparam int OW    = clog2_min1(OFM);
  localparam int JUMP  = IFM - (OFM - 1) * STRIDE;  // top advance after the last row

  logic [CI*MM-1:0]     lb [R][IFM];
  logic [RW-1:0]        wr_slot, top_slot;
  logic [CW-1:0]        in_col;
  logic signed [AW-1:0] avail;
  logic [OW-1:0]        oy, ox;
  logic [JW-1:0]        j;
  logic [LW-1:0]        m;

  assign in_ready  = (avail < AW'(R));
  assign out_valid = (avail >= AW'(K));

  logic accept, row_done, word_done, win_done, orow_done, img_done;
  assign accept    = in_valid && in_ready;
  assign row_done  = accept && (in_col == CW'(IFM - 1));
  assign word_done = out_valid && out_ready;
  assign win_done  = word_done && (m == levels - 1'b1) && (j == JW'(SF - 1));
  assign orow_done = win_done && (ox == OW'(OFM - 1));
  assign img_done  = orow_done && (oy == OW'(OFM - 1));

  function automatic logic [RW-1:0] slot_add(logic [RW-1:0] a, int inc);
    int v = int'(a) + (inc % R);
    return RW'((v >= R) ? v - R : v);
  endfunction

  always_ff @(posedge clk) begin
    if (accept) lb[wr_slot][in_col] <= in_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wr_slot  <= '0;
      top_slot <= '0;
      in_col   <= '0;
      avail    <= '0;
      oy       <= '0;
      ox       <= '0;
      j        <= '0;
      m        <= '0;
    end else begin
      // ---- input side
      if (accept) in_col <= row_done ? '0 : in_col + 1'b1;
      if (row_done) wr_slot <= slot_add(wr_slot, 1);
      // ---- row bookkeeping
      avail <= avail + (row_done ? AW'(1) : AW'(0))
                     - (img_done ? AW'(JUMP) : orow_done ? AW'(STRIDE) : AW'(0));
      if (img_done)       top_slot <= slot_add(top_slot, JUMP);
      else if (orow_done) top_slot <= slot_add(top_slot, STRIDE);
      // ---- output side
      if (word_done) begin
        if (m == levels - 1'b1) begin
          m <= '0;
          if (j == JW'(SF - 1)) begin
            j  <= '0;
            ox <= (ox == OW'(OFM - 1)) ? '0 : ox + 1'b1;
          end else begin
            j <= j + 1'b1;
          end
        end else begin
          m <= m + 1'b1;
        end
      end
      if (orow_done) oy <= (oy == OW'(OFM - 1)) ? '0 : oy + 1'b1;
    end
  end

  // ---- window assembly for the current position and level
  logic [N-1:0] win;
  always_comb begin
    int pr;
    logic [CI*MM-1:0] pix;
    win = '0;
    for (int ky = 0; ky < K; ky++) begin
      pr = int'(top_slot) + ky;
      if (pr >= R) pr = pr - R;
      for (int kx = 0; kx < K; kx++) begin
        pix = lb[pr][int'(ox) * STRIDE + kx];
        for (int c = 0; c < CI; c++)
          win[(ky * K + kx) * CI + c] = pix[c * MM + (MM - 1 - int'(m))];
      end
    end
  end
  assign out_word = win[int'(j) * S +: S];

  a_stable: assert property (@(posedge clk) disable iff (!rst_n)
    out_valid && !out_ready |=> out_valid && $stable(out_word));

endmodule
