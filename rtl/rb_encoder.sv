// rb_encoder: M-level residual binarization of one fixed-point value.
//
// Follows the paper's residual encoding algorithm: r starts as x; at level i
// the bit b_i is 1 when r >= 0 (sign +1) and 0 otherwise, and r is reduced by
// Sign(r)*gamma_i. The scaling factors are those of the layer that will read
// the code (the "next layer" coefficients of the processing element).
//
// Interface: x and gamma[] are T-bit two's complement on the host's common
// fixed-point scale; levels (1..M_MAX) is the number of active levels. The
// output code has b_1 in its MSB; bits of inactive levels are 0, so that codes
// order like the values they stand for when gamma_1 > gamma_2 > ... > 0.
// Purely combinational (a chain of M_MAX add/subtract stages).
//
// Own choices: Sign(0) = +1; the bit ordering and zeroing of unused levels.
module rb_encoder
  import rebnet_pkg::*;
#(
  parameter int TW = T,
  parameter int MM = M_MAX
) (
  input  logic signed [TW-1:0] x,
  input  logic signed [TW-1:0] gamma [MM],
  input  logic [LW-1:0]        levels,
  output logic [MM-1:0]        code
);

  always_comb begin
    logic signed [TW-1:0] r;
    r    = x;
    code = '0;
    for (int i = 0; i < MM; i++) begin
      if (i < int'(levels)) begin
        code[MM-1-i] = ~r[TW-1];
        r = r[TW-1] ? (r + gamma[i]) : (r - gamma[i]);
      end
    end
  end

endmodule
