// tb_maxpool: checks 2x2 max pooling of residual codes on a 5x5 map with
// three channels (the odd last row and column are dropped). Random images
// with every level count are compared with a per-channel maximum computed
// here; one image carries the 4x4 single-level example of max pooling as OR
// (ones at (0,0), (1,0), (1,1), (2,2) pool to [1 0; 0 1]). Random input gaps
// and output back-pressure.
`timescale 1ns/1ps
module tb_maxpool;
  import rebnet_pkg::*;
  localparam int C = 3, IFM = 5, MM = M_MAX, OFM = IFM / 2;

  logic clk = 1'b0, rst_n = 1'b0;
  logic in_valid = 1'b0, in_ready;
  logic [C*MM-1:0] in_data = '0;
  logic out_valid, out_ready = 1'b0;
  logic [C*MM-1:0] out_data;

  maxpool #(.C(C), .IFM(IFM)) dut (.*);

  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [C*MM-1:0] pixq [$], expq [$];

  task automatic make_image(int m, bit fig);
    logic [MM-1:0] img [IFM][IFM][C];
    foreach (img[y, x, c]) img[y][x][c] = MM'($urandom_range((1 << m) - 1) << (MM - m));
    if (fig) begin
      foreach (img[y, x, c]) img[y][x][c] = '0;
      img[0][0][0] = 3'b100; img[1][0][0] = 3'b100; img[1][1][0] = 3'b100; img[2][2][0] = 3'b100;
    end
    for (int y = 0; y < IFM; y++)
      for (int x = 0; x < IFM; x++) begin
        logic [C*MM-1:0] p;
        for (int c = 0; c < C; c++) p[c*MM +: MM] = img[y][x][c];
        pixq.push_back(p);
      end
    for (int py = 0; py < OFM; py++)
      for (int px = 0; px < OFM; px++) begin
        logic [C*MM-1:0] e;
        for (int c = 0; c < C; c++) begin
          int best = 0;
          for (int d = 0; d < 4; d++)
            if (int'(img[2 * py + d / 2][2 * px + d % 2][c]) > best) best = int'(img[2 * py + d / 2][2 * px + d % 2][c]);
          e[c*MM +: MM] = MM'(best);
        end
        if (fig) begin
          checks++;
          if (e[MM-1:0] != ((py == px) ? 3'b100 : 3'b000)) failures++;
        end
        expq.push_back(e);
      end
  endtask

  initial forever begin
    @(negedge clk);
    if (pixq.size() != 0 && $urandom_range(3) != 0) begin
      in_valid = 1'b1; in_data = pixq[0];
      #1;
      if (in_ready) void'(pixq.pop_front());
    end else in_valid = 1'b0;
  end

  initial forever begin
    @(negedge clk);
    out_ready = ($urandom_range(2) != 0);
    #1;
    if (out_valid && out_ready) begin
      checks++;
      if (expq.size() == 0) begin failures++; $display("unexpected output"); end
      else begin
        logic [C*MM-1:0] e;
        e = expq.pop_front();
        if (out_data !== e) begin failures++; $display("pooled %b expected %b", out_data, e); end
      end
    end
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    make_image(1, 1'b1);
    for (int t = 0; t < 30; t++) make_image(1 + t % MM, 1'b0);
    while (expq.size() != 0) @(negedge clk);
    repeat (5) @(negedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
