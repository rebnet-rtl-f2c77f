// swu_check: drives one sliding window unit with random images for every
// level count and compares each emitted word with the window contents
// computed here from the image (element (ky*K + kx)*CI + c, S elements per
// word, the M level words of a chunk in a row). Random input gaps and output
// back-pressure. Used by tb_swu; reports through checks/failures/done.
`timescale 1ns/1ps
module swu_check
  import rebnet_pkg::*;
#(
  parameter int CI = 2, IFM = 5, K = 3, STRIDE = 1, S = 3
) (
  input  logic clk,
  input  logic rst_n,
  output int   checks,
  output int   failures,
  output bit   done
);
  localparam int MM = M_MAX, N = K * K * CI, SF = N / S, OFM = (IFM - K) / STRIDE + 1;

  logic [LW-1:0] levels = LW'(1);
  logic in_valid = 1'b0, in_ready;
  logic [CI*MM-1:0] in_data = '0;
  logic out_valid, out_ready = 1'b0;
  logic [S-1:0] out_word;

  swu #(.CI(CI), .IFM(IFM), .K(K), .STRIDE(STRIDE), .S(S)) dut (.*);

  logic [CI*MM-1:0] pixq [$];
  logic [S-1:0] expq [$];

  initial begin
    checks = 0; failures = 0; done = 1'b0;
  end

  task automatic make_image(int m);
    logic [CI*MM-1:0] img [IFM][IFM];
    foreach (img[y, x]) begin
      img[y][x] = '0;
      for (int c = 0; c < CI; c++)
        img[y][x][c*MM +: MM] = MM'($urandom_range((1 << m) - 1) << (MM - m));
      pixq.push_back(img[y][x]);
    end
    for (int oy = 0; oy < OFM; oy++)
      for (int ox = 0; ox < OFM; ox++)
        for (int jj = 0; jj < SF; jj++)
          for (int i = 0; i < m; i++) begin
            logic [S-1:0] wd;
            for (int b = 0; b < S; b++) begin
              int f = jj * S + b;
              int ky = f / (K * CI), kx = (f / CI) % K, c = f % CI;
              wd[b] = img[oy * STRIDE + ky][ox * STRIDE + kx][c * MM + MM - 1 - i];
            end
            expq.push_back(wd);
          end
  endtask

  initial begin
    forever begin
      @(negedge clk);
      if (pixq.size() != 0 && $urandom_range(3) != 0) begin
        in_valid = 1'b1; in_data = pixq[0];
        #1;
        if (in_ready) void'(pixq.pop_front());
      end else in_valid = 1'b0;
    end
  end

  initial begin
    forever begin
      @(negedge clk);
      out_ready = ($urandom_range(3) != 0);
      #1;
      if (out_valid && out_ready) begin
        checks++;
        if (expq.size() == 0) begin failures++; $display("swu: unexpected word"); end
        else begin
          logic [S-1:0] e;
          e = expq.pop_front();
          if (out_word !== e) begin failures++; $display("swu: word %b expected %b", out_word, e); end
        end
      end
    end
  end

  initial begin
    wait (rst_n);
    for (int m = 1; m <= MM; m++) begin
      levels = LW'(m);
      make_image(m);
      make_image(m);
      while (expq.size() != 0 || pixq.size() != 0) @(negedge clk);
      repeat (3) @(negedge clk);
    end
    repeat (5) @(negedge clk);
    checks++;
    if (out_valid) begin failures++; $display("swu: extra output"); end
    done = 1'b1;
  end
endmodule
