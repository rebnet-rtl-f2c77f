// tb_rebnet_cnv: end-to-end test of the full-size Arch-2 accelerator.
//
// Loads pseudo-random weights, thresholds and scaling factors through the
// parameter port, streams one 32x32x3 residual-encoded image through the nine
// layers and compares the ten class scores with a behavioural model of the
// network written here (plain loops over sign vectors, independent of the RTL
// structure). The image is run with M = 3, then M = 1 (mode switch), then
// M = 2. The output side applies random back-pressure and the input side
// random gaps. Also checked: the run time grows roughly linearly with M, and
// with three images streamed back to back at M = 1 one result leaves every
// 32,400..36,000 cycles (about 6,000 images/s at 200 MHz).
// Counted mechanisms (each must occur): input back-pressure, output stall,
// max-pool outputs, input-vector-buffer replay (neuron folds > 0), level
// switches, discarded spare PE results (10 outputs on 4 PEs).
`timescale 1ns/1ps
module tb_rebnet_cnv;
  import rebnet_pkg::*;

  localparam int NL = NUM_LAYERS;

  logic              clk = 1'b0;
  logic              rst_n = 1'b0;
  logic [LW-1:0]     levels = LW'(1);
  logic              cfg_we = 1'b0;
  logic [3:0]        cfg_layer = '0;
  cfg_sel_e          cfg_sel = CFG_WEIGHT;
  logic [4:0]        cfg_pe = '0;
  logic [CFG_AW-1:0] cfg_addr = '0;
  logic [CFG_W-1:0]  cfg_data = '0;
  logic              in_valid = 1'b0;
  logic              in_ready;
  logic [3*M_MAX-1:0] in_data = '0;
  logic              out_valid;
  logic              out_ready = 1'b0;
  logic [10*T-1:0]   out_data;

  rebnet_cnv dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  longint cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  // watchdog
  initial begin
    repeat (6_000_000) @(posedge clk);
    $display("watchdog expired");
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ------------------------------------------------------------- model data
  bit   wts [NL][];           // weight of neuron n, element f at [n*N + f]
  int   thr [NL][];
  int   g_in  [NL][M_MAX];
  int   g_out [NL][M_MAX];
  int   img [];               // input codes, (y*32 + x)*3 + c, all M_MAX levels

  function automatic int n_of(int l);   return L_K[l] * L_K[l] * L_CI[l]; endfunction
  function automatic int nf_of(int l);  return (L_CO[l] + L_P[l] - 1) / L_P[l]; endfunction
  function automatic int isqrt(int v);
    int r = 0;
    while ((r + 1) * (r + 1) <= v) r++;
    return r;
  endfunction

  // Algorithm 1 with the sign bit b_1 placed in the code's MSB
  function automatic int encode(longint x, int l, int m);
    longint r = x;
    int code = 0;
    for (int i = 0; i < m; i++) begin
      if (r >= 0) begin code |= 1 << (M_MAX - 1 - i); r -= g_out[l][i]; end
      else        begin                                r += g_out[l][i]; end
    end
    return code;
  endfunction

  // One layer of the reference network on a feature map fm (codes).
  function automatic void ref_layer(int l, int m, input int fm [], output int res []);
    int ci = L_CI[l], co = L_CO[l], k = L_K[l], ifm = L_IFM[l];
    int ofm = ifm - k + 1;
    int n = n_of(l);
    int conv [];
    conv = new[ofm * ofm * co];
    for (int oy = 0; oy < ofm; oy++)
      for (int ox = 0; ox < ofm; ox++)
        for (int o = 0; o < co; o++) begin
          longint mac = 0;
          for (int i = 0; i < m; i++) begin
            int acc = 0;
            for (int ky = 0; ky < k; ky++)
              for (int kx = 0; kx < k; kx++)
                for (int c = 0; c < ci; c++) begin
                  int f = (ky * k + kx) * ci + c;
                  bit xb = fm[((oy + ky) * ifm + ox + kx) * ci + c][M_MAX - 1 - i];
                  acc += (xb == wts[l][o * n + f]) ? 1 : -1;
                end
            mac += longint'(g_in[l][i]) * acc;
          end
          if (l == NL - 1) conv[(oy * ofm + ox) * co + o] = int'(mac - thr[l][o]);
          else             conv[(oy * ofm + ox) * co + o] = encode(mac - thr[l][o], l, m);
        end
    if (L_POOL[l] != 0) begin
      int pfm = ofm / 2;
      res = new[pfm * pfm * co];
      for (int py = 0; py < pfm; py++)
        for (int px = 0; px < pfm; px++)
          for (int o = 0; o < co; o++) begin
            int best = 0;
            for (int dy = 0; dy < 2; dy++)
              for (int dx = 0; dx < 2; dx++) begin
                int v = conv[((2 * py + dy) * ofm + 2 * px + dx) * co + o];
                if (v > best) best = v;
              end
            res[(py * pfm + px) * co + o] = best;
          end
    end else begin
      res = conv;
    end
  endfunction

  // ------------------------------------------------------------- driving
  task automatic cfg_write(int l, cfg_sel_e sel, int pe, int addr, logic [CFG_W-1:0] data);
    @(negedge clk);
    cfg_we = 1'b1; cfg_layer = 4'(l); cfg_sel = sel; cfg_pe = 5'(pe);
    cfg_addr = CFG_AW'(addr); cfg_data = data;
    @(negedge clk);
    cfg_we = 1'b0;
  endtask

  task automatic load_params();
    for (int l = 0; l < NL; l++) begin
      int n = n_of(l), s = L_S[l], p = L_P[l], sf = n / L_S[l];
      int co_pad = nf_of(l) * p;
      int go = 64 * isqrt(n);
      wts[l] = new[co_pad * n];
      thr[l] = new[co_pad];
      foreach (wts[l][i]) wts[l][i] = 1'($urandom);
      foreach (thr[l][i]) thr[l][i] = int'($urandom_range(go)) - go / 2;
      for (int i = 0; i < M_MAX; i++) begin
        g_in[l][i]  = 64 >> i;
        g_out[l][i] = go >> i;
        cfg_write(l, CFG_GAMMA_IN, 0, i, CFG_W'(g_in[l][i]));
        cfg_write(l, CFG_GAMMA_OUT, 0, i, CFG_W'(g_out[l][i]));
      end
      @(negedge clk);
      for (int o = 0; o < co_pad; o++) begin
        cfg_we = 1'b1; cfg_layer = 4'(l); cfg_pe = 5'(o % p);
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
      cfg_we = 1'b0;
    end
  endtask

  int in_stalls = 0, out_stalls = 0, pool_outs = 0, replays = 0, switches = 0, spare = 0;
  always @(posedge clk) if (rst_n) begin
    if (in_valid && !in_ready) in_stalls++;
    if (out_valid && !out_ready) out_stalls++;
    if (dut.u_l1.out_valid && dut.u_l1.out_ready) pool_outs++;
    if (dut.u_l3.out_valid && dut.u_l3.out_ready) pool_outs++;
    if (dut.u_l2.u_mvtu.issue && dut.u_l2.u_mvtu.nf != 0) replays++;
    if (dut.u_l8.u_mvtu.pe_valid[0] && dut.u_l8.u_mvtu.fin_fold == 2) spare++;
  end

  task automatic run_image(int m, output longint lat);
    int expect_fm [];
    int cur [];
    int got [10];
    longint t0;
    // reference
    cur = new[32 * 32 * 3];
    foreach (cur[i]) cur[i] = img[i] & (((1 << m) - 1) << (M_MAX - m));
    for (int l = 0; l < NL; l++) begin
      ref_layer(l, m, cur, expect_fm);
      cur = expect_fm;
    end
    // stimulus
    @(negedge clk);
    if (int'(levels) != m) switches++;
    levels = LW'(m);
    t0 = cycle;
    fork
      begin
        for (int px = 0; px < 32 * 32; px++) begin
          @(negedge clk);
          while ($urandom_range(7) == 0) begin in_valid = 1'b0; @(negedge clk); end
          in_valid = 1'b1;
          for (int c = 0; c < 3; c++) in_data[c*M_MAX +: M_MAX] = M_MAX'(cur_img(px, c, m));
          #1;
          while (!in_ready) begin @(negedge clk); #1; end
        end
        @(negedge clk);
        in_valid = 1'b0;
      end
      begin
        int hold = 0;
        forever begin
          @(negedge clk);
          // hold every result back for two cycles before accepting it
          out_ready = (hold >= 2);
          #1;
          if (out_valid && !out_ready) hold++;
          if (out_valid && out_ready) begin
            for (int o = 0; o < 10; o++) got[o] = int'(signed'(out_data[o*T +: T]));
            break;
          end
        end
        @(negedge clk);
        out_ready = 1'b0;
      end
    join
    lat = cycle - t0;
    for (int o = 0; o < 10; o++) begin
      checks++;
      if (got[o] != cur[o]) begin
        failures++;
        $display("M=%0d score %0d: got %0d expected %0d", m, o, got[o], cur[o]);
      end
    end
    $display("M=%0d: image done in %0d cycles, scores %p", m, lat, got);
  endtask


  // Several copies of the image back to back, no gaps, output always ready:
  // the interval between results is the pipeline's per-image time.
  task automatic run_stream(int m, int nimg, output longint interval);
    int expect_fm [];
    int cur [];
    longint t_out [$];
    cur = new[32 * 32 * 3];
    foreach (cur[i]) cur[i] = img[i] & (((1 << m) - 1) << (M_MAX - m));
    for (int l = 0; l < NL; l++) begin
      ref_layer(l, m, cur, expect_fm);
      cur = expect_fm;
    end
    @(negedge clk);
    if (int'(levels) != m) switches++;
    levels = LW'(m);
    fork
      begin
        for (int k = 0; k < nimg; k++)
          for (int px = 0; px < 32 * 32; px++) begin
            in_valid = 1'b1;
            for (int c = 0; c < 3; c++) in_data[c*M_MAX +: M_MAX] = M_MAX'(cur_img(px, c, m));
            #1;
            while (!in_ready) begin @(negedge clk); #1; end
            @(negedge clk);
          end
        in_valid = 1'b0;
      end
      begin
        out_ready = 1'b1;
        while (t_out.size() < nimg) begin
          @(negedge clk);
          #1;
          if (out_valid) begin
            t_out.push_back(cycle);
            for (int o = 0; o < 10; o++) begin
              checks++;
              if (int'(signed'(out_data[o*T +: T])) != cur[o]) begin
                failures++;
                $display("stream M=%0d score %0d: got %0d expected %0d", m, o, int'(signed'(out_data[o*T +: T])), cur[o]);
              end
            end
          end
        end
        @(negedge clk);
        out_ready = 1'b0;
      end
    join
    interval = t_out[nimg - 1] - t_out[nimg - 2];
    $display("M=%0d: %0d images back to back, one result every %0d cycles (%0d images/s at 200 MHz)",
             m, nimg, interval, 200_000_000 / interval);
  endtask

  function automatic int cur_img(int px, int c, int m);
    return img[px * 3 + c] & (((1 << m) - 1) << (M_MAX - m));
  endfunction

  initial begin
    longint lat3, lat1, lat2, ival;
    img = new[32 * 32 * 3];
    foreach (img[i]) img[i] = int'($urandom_range((1 << M_MAX) - 1));
    levels = LW'(3);
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    load_params();
    $display("parameters loaded at cycle %0d", cycle);
    run_image(3, lat3);
    run_image(1, lat1);
    run_image(2, lat2);
    // run time should scale with M (about 3x and 2x of the M=1 time)
    checks++;
    if (!(lat3 > lat1 * 25 / 10 && lat3 < lat1 * 33 / 10 && lat2 > lat1 * 17 / 10 && lat2 < lat1 * 22 / 10)) begin
      failures++;
      $display("latency does not scale with M: %0d %0d %0d", lat1, lat2, lat3);
    end
    // steady-state rate at M = 1: the first layer needs 900 windows x 4 folds
    // x 9 words = 32,400 cycles per image (fc layers 6 and 7 need 32,768)
    run_stream(1, 3, ival);
    checks++;
    if (ival < 32400 || ival > 36000) begin
      failures++;
      $display("interval %0d outside 32400..36000", ival);
    end
    $display("mechanisms: in_stalls=%0d out_stalls=%0d pool_outs=%0d replays=%0d switches=%0d spare=%0d",
             in_stalls, out_stalls, pool_outs, replays, switches, spare);
    checks++; if (in_stalls == 0) failures++;
    checks++; if (out_stalls == 0) failures++;
    checks++; if (pool_outs != 6 * (14 * 14 + 5 * 5)) failures++;
    checks++; if (replays == 0) failures++;
    checks++; if (switches < 3) failures++;
    checks++; if (spare != 6) failures++;   // one per image
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
