// tb_arch1_mnist: runs the MNIST network (Arch-1) built from the same layer
// blocks: 784 inputs - D256(16,64) - D256(32,16) - D256(16,32) - D10(16,4),
// each layer batch-normalised and residual-binarized except the last, whose
// ten thresholded scores are compared. Fully connected layers are rb_layer
// instances with K = 1 on a 1x1 "image". The 784 inputs are padded with zeros
// to 832 = 13 words of 64 bits (the pad elements have zero weights, so they
// add a constant that the threshold absorbs; the model includes them).
// Random weights, thresholds and inputs; eight images are streamed back to
// back at each of M = 1, 2, 3 and compared with a model computed here. The
// steady-state interval between results must equal the slowest layer's
// NF*SF*M cycles (first layer: 16 folds x 13 words x M).
`timescale 1ns/1ps
module tb_arch1_mnist;
  import rebnet_pkg::*;

  localparam int NL = 4, MM = M_MAX, NIMG = 8;
  localparam int A_CI [NL] = '{832, 256, 256, 256};
  localparam int A_CO [NL] = '{256, 256, 256, 10};
  localparam int A_P  [NL] = '{16, 32, 16, 16};
  localparam int A_S  [NL] = '{64, 16, 32, 4};

  logic clk = 1'b0, rst_n = 1'b0;
  logic [LW-1:0] levels = LW'(1);
  logic cfg_we [NL];
  cfg_sel_e cfg_sel = CFG_WEIGHT;
  logic [4:0] cfg_pe = '0;
  logic [CFG_AW-1:0] cfg_addr = '0;
  logic [CFG_W-1:0] cfg_data = '0;

  logic in_valid = 1'b0, in_ready;
  logic [832*MM-1:0] in_data = '0;
  logic v0, r0, v1, r1, v2, r2;
  logic [256*MM-1:0] d0, d1, d2;
  logic out_valid, out_ready = 1'b1;
  logic [10*T-1:0] out_data;

  rb_layer #(.CI(832), .CO(256), .IFM(1), .K(1), .P(16), .S(64), .POOL(1'b0)) u0 (
    .clk, .rst_n, .levels, .in_valid, .in_ready, .in_data,
    .out_valid (v0), .out_ready (r0), .out_data (d0),
    .cfg_we (cfg_we[0]), .cfg_sel, .cfg_pe (cfg_pe[3:0]), .cfg_addr, .cfg_data);
  rb_layer #(.CI(256), .CO(256), .IFM(1), .K(1), .P(32), .S(16), .POOL(1'b0)) u1 (
    .clk, .rst_n, .levels, .in_valid (v0), .in_ready (r0), .in_data (d0),
    .out_valid (v1), .out_ready (r1), .out_data (d1),
    .cfg_we (cfg_we[1]), .cfg_sel, .cfg_pe (cfg_pe[4:0]), .cfg_addr, .cfg_data);
  rb_layer #(.CI(256), .CO(256), .IFM(1), .K(1), .P(16), .S(32), .POOL(1'b0)) u2 (
    .clk, .rst_n, .levels, .in_valid (v1), .in_ready (r1), .in_data (d1),
    .out_valid (v2), .out_ready (r2), .out_data (d2),
    .cfg_we (cfg_we[2]), .cfg_sel, .cfg_pe (cfg_pe[3:0]), .cfg_addr, .cfg_data);
  rb_layer #(.CI(256), .CO(10), .IFM(1), .K(1), .P(16), .S(4), .POOL(1'b0), .OUT_RAW(1'b1)) u3 (
    .clk, .rst_n, .levels, .in_valid (v2), .in_ready (r2), .in_data (d2),
    .out_valid, .out_ready, .out_data,
    .cfg_we (cfg_we[3]), .cfg_sel, .cfg_pe (cfg_pe[3:0]), .cfg_addr, .cfg_data);

  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  longint cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  bit wts [NL][];
  int thr [NL][];
  int gi [MM], go [NL][MM];
  int expq [$];
  longint out_times [$];

  function automatic int nf_of(int l); return (A_CO[l] + A_P[l] - 1) / A_P[l]; endfunction

  task automatic load();
    for (int l = 0; l < NL; l++) begin
      int n = A_CI[l], s = A_S[l], p = A_P[l], sf = A_CI[l] / A_S[l], cop = nf_of(l) * A_P[l];
      wts[l] = new[cop * n];
      thr[l] = new[cop];
      foreach (wts[l][i]) wts[l][i] = (l == 0 && i % n >= 784) ? 1'b0 : 1'($urandom);
      foreach (thr[l][i]) thr[l][i] = int'($urandom_range(800)) - 400;
      @(negedge clk);
      foreach (cfg_we[k]) cfg_we[k] = (k == l);
      for (int i = 0; i < MM; i++) begin
        go[l][i] = (32 * 16 * 2) >> i;
        cfg_sel = CFG_GAMMA_IN;  cfg_addr = CFG_AW'(i); cfg_data = CFG_W'(gi[i]);    @(negedge clk);
        cfg_sel = CFG_GAMMA_OUT; cfg_addr = CFG_AW'(i); cfg_data = CFG_W'(go[l][i]); @(negedge clk);
      end
      for (int o = 0; o < cop; o++) begin
        cfg_pe = 5'(o % p);
        cfg_sel = CFG_THRESHOLD; cfg_addr = CFG_AW'(o / p); cfg_data = CFG_W'(thr[l][o]);
        @(negedge clk);
        cfg_sel = CFG_WEIGHT;
        for (int jj = 0; jj < sf; jj++) begin
          logic [CFG_W-1:0] w = '0;
          for (int b = 0; b < s; b++) w[b] = wts[l][o * n + jj * s + b];
          cfg_addr = CFG_AW'((o / p) * sf + jj); cfg_data = w;
          @(negedge clk);
        end
      end
      foreach (cfg_we[k]) cfg_we[k] = 1'b0;
    end
  endtask

  // reference: one image of codes through the four layers
  task automatic model(int m, input int x0 [], output int res []);
    int cur [];
    cur = x0;
    for (int l = 0; l < NL; l++) begin
      int nxt [];
      nxt = new[A_CO[l]];
      for (int o = 0; o < A_CO[l]; o++) begin
        longint mac = 0, r;
        int code = 0;
        for (int i = 0; i < m; i++) begin
          int acc = 0;
          for (int f = 0; f < A_CI[l]; f++)
            acc += (cur[f][MM - 1 - i] == wts[l][o * A_CI[l] + f]) ? 1 : -1;
          mac += longint'(gi[i]) * acc;
        end
        r = mac - thr[l][o];
        if (l == NL - 1) nxt[o] = int'(r);
        else begin
          for (int i = 0; i < m; i++) begin
            if (r >= 0) begin code |= 1 << (MM - 1 - i); r -= go[l][i]; end
            else r += go[l][i];
          end
          nxt[o] = code;
        end
      end
      cur = nxt;
    end
    res = cur;
  endtask

  initial forever begin
    @(negedge clk);
    #1;
    if (out_valid && out_ready) begin
      out_times.push_back(cycle);
      for (int o = 0; o < 10; o++) begin
        int e;
        e = expq.pop_front();
        checks++;
        if (int'(signed'(out_data[o*T +: T])) != e) begin
          failures++;
          $display("score %0d: got %0d expected %0d", o, int'(signed'(out_data[o*T +: T])), e);
        end
      end
    end
  end

  initial begin
    foreach (cfg_we[k]) cfg_we[k] = 1'b0;
    for (int i = 0; i < MM; i++) gi[i] = 32 >> i;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    load();
    for (int m = 1; m <= MM; m++) begin
      int interval;
      levels = LW'(m);
      out_times.delete();
      for (int t = 0; t < NIMG; t++) begin
        int x [];
        int res [];
        x = new[832];
        foreach (x[f]) x[f] = (f < 784) ? int'($urandom_range((1 << m) - 1) << (MM - m)) : 0;
        model(m, x, res);
        foreach (res[o]) expq.push_back(res[o]);
        for (int f = 0; f < 832; f++) in_data[f*MM +: MM] = MM'(x[f]);
        in_valid = 1'b1;
        #1;
        while (!in_ready) begin @(negedge clk); #1; end
        @(negedge clk);
        in_valid = 1'b0;
      end
      while (expq.size() != 0) @(negedge clk);
      interval = int'(out_times[NIMG - 1] - out_times[NIMG - 2]);
      $display("M=%0d: result interval %0d cycles (%0d samples/s at 200 MHz)", m, interval, 200_000_000 / interval);
      checks++;
      if (interval != 16 * 13 * m) begin
        failures++;
        $display("interval %0d, expected %0d", interval, 16 * 13 * m);
      end
      repeat (10) @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
