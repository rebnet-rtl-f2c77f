// tb_swu: checks the sliding window unit in two shapes: 3x3 windows with
// stride 1 over a 5x5 map (CI = 2, S = 3), and 3x3 windows with stride 2 over
// an 8x8 map (CI = 4, S = 4), where the last row is dropped. Each shape is
// driven and checked by a swu_check instance.
`timescale 1ns/1ps
module tb_swu;
  logic clk = 1'b0, rst_n = 1'b0;
  int c0, f0, c1, f1;
  bit d0, d1;
  int checks = 0, failures = 0;

  swu_check #(.CI(2), .IFM(5), .K(3), .STRIDE(1), .S(3)) u0 (.clk, .rst_n, .checks(c0), .failures(f0), .done(d0));
  swu_check #(.CI(4), .IFM(8), .K(3), .STRIDE(2), .S(4)) u1 (.clk, .rst_n, .checks(c1), .failures(f1), .done(d1));

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", c0 + c1, f0 + f1 + 1);
    $finish;
  end

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    wait (d0 && d1);
    checks = c0 + c1; failures = f0 + f1;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
