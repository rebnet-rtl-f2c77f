// tb_rb_pe: checks one processing element with S = 8, two neuron folds of two
// chunks each. Random weights, thresholds and gammas are loaded through the
// write ports; random residual input vectors are fed chunk-major (M level
// words per chunk), with random idle cycles and also back to back. For every
// vector the thresholded MAC value and the residual code are compared with a
// model computed here from sign vectors, and out_valid must rise exactly one
// cycle after the last word.
`timescale 1ns/1ps
module tb_rb_pe;
  import rebnet_pkg::*;

  localparam int S = 8, SF = 2, NF = 2, MM = M_MAX;

  logic clk = 1'b0, rst_n = 1'b0;
  logic in_valid = 1'b0;
  logic [S-1:0] in_word = '0;
  logic [1:0] w_addr = '0;
  logic [LW-1:0] level = '0;
  logic clear = 1'b0, last = 1'b0;
  logic [0:0] t_addr = '0;
  logic signed [T-1:0] gamma_in [MM];
  logic signed [T-1:0] gamma_out [MM];
  logic [LW-1:0] levels = LW'(3);
  logic w_we = 1'b0; logic [1:0] w_waddr = '0; logic [S-1:0] w_wdata = '0;
  logic t_we = 1'b0; logic [0:0] t_waddr = '0; logic signed [T-1:0] t_wdata = '0;
  logic out_valid; logic [MM-1:0] out_code; logic signed [T-1:0] out_value;

  rb_pe #(.S(S), .WDEPTH(NF * SF), .TDEPTH(NF)) dut (.*);

  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [S-1:0] wm [NF * SF];
  int thr [NF];

  // expected results, in order of the vectors' last words
  int exp_val [$]; int exp_code [$]; longint exp_cycle [$];
  longint cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  always @(posedge clk) begin
    if (rst_n && out_valid) begin
      checks += 3;
      if (exp_val.size() == 0) begin
        failures += 3;
        $display("unexpected out_valid");
      end else begin
        int ev, ec; longint et;
        ev = exp_val.pop_front(); ec = exp_code.pop_front(); et = exp_cycle.pop_front();
        if (out_value !== T'(ev)) begin failures++; $display("value %0d expected %0d", out_value, ev); end
        if (int'(out_code) != ec) begin failures++; $display("code %b expected %b", out_code, 3'(ec)); end
        if (cycle != et + 1) begin failures++; $display("result at cycle %0d, last word at %0d", cycle, et); end
      end
    end
  end

  task automatic run_vector(int fold, int m, bit gaps);
    logic [S-1:0] xw [SF][MM];
    longint mac = 0, r;
    int code = 0;
    for (int jj = 0; jj < SF; jj++) for (int i = 0; i < MM; i++) xw[jj][i] = S'($urandom);
    // model
    for (int i = 0; i < m; i++) begin
      int acc = 0;
      for (int jj = 0; jj < SF; jj++)
        for (int b = 0; b < S; b++) acc += (xw[jj][i][b] == wm[fold * SF + jj][b]) ? 1 : -1;
      mac += longint'(gamma_in[i]) * acc;
    end
    r = mac - thr[fold];
    exp_val.push_back(int'(r));
    for (int i = 0; i < m; i++) begin
      if (r >= 0) begin code |= 1 << (MM - 1 - i); r -= gamma_out[i]; end
      else r += gamma_out[i];
    end
    exp_code.push_back(code);
    // drive
    for (int jj = 0; jj < SF; jj++)
      for (int i = 0; i < m; i++) begin
        if (gaps) while ($urandom_range(2) == 0) begin in_valid = 1'b0; @(negedge clk); end
        in_valid = 1'b1; in_word = xw[jj][i]; w_addr = 2'(fold * SF + jj);
        level = LW'(i); clear = (jj == 0); last = (jj == SF - 1) && (i == m - 1);
        t_addr = 1'(fold);
        if (last) exp_cycle.push_back(cycle);
        @(negedge clk);
      end
    in_valid = 1'b0; last = 1'b0;
  endtask

  initial begin
    for (int i = 0; i < MM; i++) begin
      gamma_in[i]  = T'(($urandom_range(200) + 50) >> i);
      gamma_out[i] = T'(($urandom_range(800) + 200) >> i);
    end
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int a = 0; a < NF * SF; a++) begin
      wm[a] = S'($urandom);
      w_we = 1'b1; w_waddr = 2'(a); w_wdata = wm[a];
      @(negedge clk);
    end
    w_we = 1'b0;
    for (int a = 0; a < NF; a++) begin
      thr[a] = int'($urandom_range(1000)) - 500;
      t_we = 1'b1; t_waddr = 1'(a); t_wdata = T'(thr[a]);
      @(negedge clk);
    end
    t_we = 1'b0;
    for (int v = 0; v < 300; v++) begin
      automatic int m = 1 + $urandom_range(MM - 1);
      levels = LW'(m);
      run_vector($urandom_range(NF - 1), m, v[0]);
      if (v % 3 == 0) repeat (2) @(negedge clk);   // let the result out before changing M
      else begin
        // back to back with the same M
        run_vector($urandom_range(NF - 1), m, 1'b0);
        repeat (2) @(negedge clk);
      end
    end
    repeat (3) @(negedge clk);
    checks++;
    if (exp_val.size() != 0) begin failures++; $display("%0d results missing", exp_val.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
