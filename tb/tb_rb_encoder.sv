// tb_rb_encoder: checks the residual encoder against a behavioural
// re-statement of the residual encoding algorithm, for random values and
// scaling factors and every level count 1..M_MAX, plus hand-worked cases
// (x = 0 encodes as +1; a value between the levels).
`timescale 1ns/1ps
module tb_rb_encoder;
  import rebnet_pkg::*;

  logic signed [T-1:0] x;
  logic signed [T-1:0] gamma [M_MAX];
  logic [LW-1:0]       levels;
  logic [M_MAX-1:0]    code;

  rb_encoder dut (.x, .gamma, .levels, .code);

  int checks = 0, failures = 0;

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [M_MAX-1:0] model(longint xv, longint g [M_MAX], int m);
    logic [M_MAX-1:0] b = '0;
    longint r = xv;
    for (int i = 0; i < m; i++) begin
      int sgn = (r >= 0) ? 1 : -1;
      b[M_MAX - 1 - i] = (sgn == 1);
      r = r - sgn * g[i];
    end
    return b;
  endfunction

  task automatic check(longint xv, longint g [M_MAX], int m);
    logic [M_MAX-1:0] exp_code;
    x = T'(xv);
    for (int i = 0; i < M_MAX; i++) gamma[i] = T'(g[i]);
    levels = LW'(m);
    #1;
    exp_code = model(xv, g, m);
    checks++;
    if (code !== exp_code) begin
      failures++;
      $display("x=%0d m=%0d: code %b expected %b", xv, m, code, exp_code);
    end
  endtask

  initial begin
    longint g [M_MAX];
    // worked example: gammas 8,4,2; x = 5 -> r: 5 (+) -3 (-) 1 (+) -> 101
    g = '{8, 4, 2};
    check(5, g, 3);
    checks++; if (code !== 3'b101) failures++;
    // x = 0 counts as positive; -1 gives 0xx
    check(0, g, 1);
    checks++; if (code !== 3'b100) failures++;
    check(-1, g, 3);
    checks++; if (code !== 3'b011) failures++;   // -1 (-) 7 (+) 3 (+)
    for (int t = 0; t < 3000; t++) begin
      automatic int m = 1 + $urandom_range(M_MAX - 1);
      automatic longint xv = longint'($urandom_range(200000)) - 100000;
      automatic int g1 = 1 + $urandom_range(60000);
      g[0] = g1; g[1] = g1 / 2 + $urandom_range(100); g[2] = g1 / 4 + $urandom_range(50);
      check(xv, g, m);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
