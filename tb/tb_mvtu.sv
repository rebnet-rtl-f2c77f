// tb_mvtu: checks the matrix-vector-threshold unit with N = 16, CO = 6, P = 4,
// S = 4 (two neuron folds, the second with two spare PEs). Weights,
// thresholds and gammas are loaded through the cfg port. Random residual
// input vectors are streamed in the chunk-major word order, first with random
// input gaps and output back-pressure, then as a continuous burst in which
// successive outputs must be exactly NF*SF*M cycles apart (the unit's rate).
// Every output pixel is compared with a model computed from sign vectors.
`timescale 1ns/1ps
module tb_mvtu;
  import rebnet_pkg::*;

  localparam int N = 16, CO = 6, P = 4, S = 4, MM = M_MAX;
  localparam int SF = N / S, NF = (CO + P - 1) / P;

  logic clk = 1'b0, rst_n = 1'b0;
  logic [LW-1:0] levels = LW'(3);
  logic in_valid = 1'b0, in_ready;
  logic [S-1:0] in_word = '0;
  logic out_valid, out_ready = 1'b0;
  logic [CO*MM-1:0] out_data;
  logic cfg_we = 1'b0;
  cfg_sel_e cfg_sel = CFG_WEIGHT;
  logic [1:0] cfg_pe = '0;
  logic [CFG_AW-1:0] cfg_addr = '0;
  logic [CFG_W-1:0] cfg_data = '0;

  mvtu #(.N(N), .CO(CO), .P(P), .S(S)) dut (.*);

  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  longint cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  bit w [NF * P][N];
  int thr [NF * P];
  int gi [MM], go [MM];
  logic [CO*MM-1:0] expq [$];
  logic [S-1:0] wordq [$];
  bit random_ready = 1'b1;
  longint out_times [$];

  task automatic cfg(cfg_sel_e sel, int pe, int addr, int data);
    cfg_we = 1'b1; cfg_sel = sel; cfg_pe = 2'(pe); cfg_addr = CFG_AW'(addr); cfg_data = CFG_W'(data);
    @(negedge clk);
    cfg_we = 1'b0;
  endtask

  // make one vector: queue its words and its expected output
  task automatic make_vector(int m);
    bit x [MM][N];
    logic [CO*MM-1:0] e = '0;
    foreach (x[i, f]) x[i][f] = (i < m) ? 1'($urandom) : 1'b0;
    for (int jj = 0; jj < SF; jj++)
      for (int i = 0; i < m; i++) begin
        logic [S-1:0] wd;
        for (int b = 0; b < S; b++) wd[b] = x[i][jj * S + b];
        wordq.push_back(wd);
      end
    for (int o = 0; o < CO; o++) begin
      longint mac = 0, r;
      int code = 0;
      for (int i = 0; i < m; i++) begin
        int acc = 0;
        for (int f = 0; f < N; f++) acc += (x[i][f] == w[o][f]) ? 1 : -1;
        mac += longint'(gi[i]) * acc;
      end
      r = mac - thr[o];
      for (int i = 0; i < m; i++) begin
        if (r >= 0) begin code |= 1 << (MM - 1 - i); r -= go[i]; end
        else r += go[i];
      end
      e[o*MM +: MM] = MM'(code);
    end
    expq.push_back(e);
  endtask

  // input driver
  initial begin
    forever begin
      @(negedge clk);
      if (wordq.size() != 0 && (!random_ready || $urandom_range(3) != 0)) begin
        in_valid = 1'b1; in_word = wordq[0];
        #1;
        if (in_ready) void'(wordq.pop_front());
      end else begin
        in_valid = 1'b0;
      end
    end
  end

  // output monitor
  initial begin
    forever begin
      @(negedge clk);
      out_ready = !random_ready || ($urandom_range(2) != 0);
      #1;
      if (out_valid && out_ready) begin
        checks++;
        out_times.push_back(cycle);
        if (expq.size() == 0) begin failures++; $display("unexpected output"); end
        else begin
          logic [CO*MM-1:0] e;
          e = expq.pop_front();
          if (out_data !== e) begin failures++; $display("output %h expected %h", out_data, e); end
        end
      end
    end
  end

  initial begin
    for (int i = 0; i < MM; i++) begin gi[i] = 40 >> i; go[i] = 160 >> i; end
    foreach (w[o, f]) w[o][f] = 1'($urandom);
    foreach (thr[o]) thr[o] = int'($urandom_range(120)) - 60;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    for (int i = 0; i < MM; i++) begin cfg(CFG_GAMMA_IN, 0, i, gi[i]); cfg(CFG_GAMMA_OUT, 0, i, go[i]); end
    for (int o = 0; o < NF * P; o++) begin
      cfg(CFG_THRESHOLD, o % P, o / P, thr[o]);
      for (int jj = 0; jj < SF; jj++) begin
        automatic int d = 0;
        for (int b = 0; b < S; b++) d |= int'(w[o][jj * S + b]) << b;
        cfg(CFG_WEIGHT, o % P, (o / P) * SF + jj, d);
      end
    end
    // phase 1: random traffic, every level count
    for (int m = 1; m <= MM; m++) begin
      levels = LW'(m);
      for (int v = 0; v < 20; v++) make_vector(m);
      while (expq.size() != 0) @(negedge clk);
      repeat (5) @(negedge clk);
    end
    // phase 2: continuous burst, check the rate
    for (int m = 1; m <= MM; m++) begin
      levels = LW'(m);
      random_ready = 1'b0;
      out_times.delete();
      for (int v = 0; v < 6; v++) make_vector(m);
      while (expq.size() != 0) @(negedge clk);
      for (int v = 1; v < out_times.size(); v++) begin
        checks++;
        if (out_times[v] - out_times[v - 1] != NF * SF * m) begin
          failures++;
          $display("M=%0d: outputs %0d cycles apart, expected %0d", m, out_times[v] - out_times[v - 1], NF * SF * m);
        end
      end
      repeat (5) @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
