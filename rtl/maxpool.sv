// maxpool: 2x2 max pooling over residual-binarized feature maps.
//
// With one binarization level max pooling is an OR of the bits. With M levels
// it needs comparators, but the comparison can be made on the M-bit codes
// directly: with decreasing positive scaling factors a larger code (b_1 as
// MSB) means a larger value. Each channel therefore keeps the unsigned maximum
// of its codes over the window.
//
// Input: row-major stream of IFM x IFM pixels, C channels of MM bits each.
// Output: (IFM/2) x (IFM/2) pooled pixels, one per 2x2 window (stride 2); an
// odd last row or column is dropped. A buffer of IFM/2 partial maxima holds the
// first row of each window pair. One pixel per cycle in; a pooled pixel is
// registered on the pixel that completes its window and held until accepted
// (in_ready is low while it waits).
//
// Following the paper: comparison of codes instead of values, and the
// OR-equivalence for M = 1. Buffer organisation and handshakes are this
// design's choices.
module maxpool
  import rebnet_pkg::*;
#(
  parameter int C   = 64,
  parameter int IFM = 28,
  parameter int MM  = M_MAX,
  localparam int OFM = IFM / 2
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  output logic             in_ready,
  input  logic [C*MM-1:0]  in_data,
  output logic             out_valid,
  input  logic             out_ready,
  output logic [C*MM-1:0]  out_data
);

  localparam int XW = clog2_min1(IFM);

  logic [C*MM-1:0] rowbuf [OFM];
  logic [XW-1:0]   x, y;
  logic            accept;
  logic [C*MM-1:0] merged;
  int              px;

  assign in_ready = !(out_valid && !out_ready);
  assign accept   = in_valid && in_ready;
  assign px       = int'(x) / 2;

  // per-channel maximum of the stored partial result and the new pixel
  always_comb begin
    logic [MM-1:0] a, b;
    for (int c = 0; c < C; c++) begin
      a = rowbuf[px][c*MM +: MM];
      b = in_data[c*MM +: MM];
      merged[c*MM +: MM] = (a > b) ? a : b;
    end
  end

  logic in_window, first_of_window, last_of_window;
  assign in_window       = (px < OFM) && (int'(y) / 2 < OFM);
  assign first_of_window = !x[0] && !y[0];
  assign last_of_window  = x[0] && y[0];

  always_ff @(posedge clk) begin
    if (accept && in_window) rowbuf[px] <= first_of_window ? in_data : merged;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      x         <= '0;
      y         <= '0;
      out_valid <= 1'b0;
      out_data  <= '0;
    end else begin
      if (out_valid && out_ready) out_valid <= 1'b0;
      if (accept) begin
        if (in_window && last_of_window) begin
          out_data  <= merged;
          out_valid <= 1'b1;
        end
        if (x == XW'(IFM - 1)) begin
          x <= '0;
          y <= (y == XW'(IFM - 1)) ? '0 : y + 1'b1;
        end else begin
          x <= x + 1'b1;
        end
      end
    end
  end

endmodule
