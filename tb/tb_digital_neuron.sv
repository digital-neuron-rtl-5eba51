// tb_digital_neuron: end-to-end test of the accelerator at its default
// parameters.
//
// A software model in this testbench does what a host would. It packs the
// weights of each layer into w bank words, loads images, and runs layers. It
// also computes every layer directly (convolution, bias, ReLU, truncation,
// saturation, 2x2 max pooling or flat FC storage) and compares the whole
// result region of the input feature map after each layer. Weights are drawn
// as exact sums of three signed powers of two, so the results must match
// bit for bit.
//
// Layers run (all filter-size cases of the design):
//   chain:  image 14x14x3 -> conv K5 GRP4 (6 out, pool) -> FC 150->30 -> FC 30->10
//   K5 GRP1 depth 32 (one output per clock, column updates), no pooling
//   K7 GRP1 depth 16, K9 GRP1 depth 8, K7 GRP2 depth 8
//   K5 GRP4 depth 20, K5 GRP2 depth 24 and K5 GRP1 depth 128 (the paper's
//   case 6: four passes of 32 channels added with ACC_SEL)
// For every layer it checks that one dot product is issued per clock and that
// the layer takes the expected number of clocks. At the end it checks that
// each mechanism happened at least once: column update, w-bus rotation,
// accumulation, each grouping, K=7, K=9, pooling, FC copy, image load path,
// write-back path, ReLU clamp, saturation.
module automatic tb_digital_neuron;
  import dn_pkg::*;

  logic clk = 0, rst_n = 0;
  logic img_wr_en = 0;
  fm_addr_t img_wr_addr = '0;
  logic [7:0] img_wr_data = '0;
  logic wld_en = 0, wld_bias_en = 0;
  logic [7:0] wld_addr = '0;
  logic [4:0] wld_lane = '0;
  kern_w_t wld_kernel = '0;
  logic [1:0] wld_bias_nt = '0;
  logic [15:0] wld_bias = '0;
  logic start = 0, busy, done;
  layer_cfg_t cfg_in = '0;
  fm_addr_t res_addr = '0;
  logic [7:0] res_data;

  digital_neuron dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  // reference state
  int ref_ifm [128][32][32];
  int wt [64][128][9][9];
  int bs [64];
  int wnext = 0;                 // next free w bank word

  // mechanism counters
  int n_col = 0, n_rot = 0, n_acc = 0, n_init = 0, n_of = 0;
  int n_grp1 = 0, n_grp2 = 0, n_grp4 = 0, n_k7 = 0, n_k9 = 0;
  int n_pool = 0, n_fc = 0, n_relu = 0, n_sat = 0;

  always @(posedge clk) begin
    if (dut.u_ctrl.xb_col)                 n_col++;
    if (dut.u_ctrl.wb_rot)                 n_rot++;
    if (dut.nt_en && dut.acc_sel)          n_acc++;
    if (dut.u_ifm.we && !dut.m_sel)        n_init++;
    if (dut.u_ifm.we && dut.m_sel)         n_of++;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int rand_w();
    int t;
    do begin
      t = 0;
      for (int i = 0; i < 3; i++)
        t += (int'($urandom_range(0, 2)) - 1) * (1 << $urandom_range(0, 6));
    end while (t < -128 || t > 127);
    return t;
  endfunction

  task automatic load_image(int ch, int h, int w);
    for (int c = 0; c < ch; c++) for (int y = 0; y < h; y++) for (int x = 0; x < w; x++) begin
      ref_ifm[c][y][x] = int'($urandom_range(0, 255));
      img_wr_en <= 1; img_wr_addr <= '{7'(c), 5'(y), 5'(x)}; img_wr_data <= 8'(ref_ifm[c][y][x]);
      @(posedge clk);
    end
    img_wr_en <= 0;
  endtask

  // Random weights for a layer, then pack them into w bank words.
  task automatic make_layer(layer_cfg_t c, int n_in_valid, output int wbase);
    int s, cc, cpp, passes, kk;
    kk = int'(c.k);
    for (int oc = 0; oc < int'(c.out_ch); oc++) begin
      bs[oc] = int'($urandom_range(0, 4000)) - 2000;
      for (int ic = 0; ic < 128; ic++) for (int fy = 0; fy < 9; fy++) for (int fx = 0; fx < 9; fx++) begin
        bit valid = (ic < int'(c.in_ch)) && fy < kk && fx < kk;
        if (c.fc) valid = valid && (ic * 25 + fy * 5 + fx < n_in_valid);
        wt[oc][ic][fy][fx] = valid ? rand_w() : 0;
      end
    end
    s  = (c.grp == GRP4) ? 1 : (c.grp == GRP2) ? 2 : 4;
    cc = (kk == 9) ? 4 : (kk == 7) ? 2 : 1;
    cpp = 8 * s / cc;
    passes = (int'(c.in_ch) + cpp - 1) / cpp;
    wbase = wnext;
    for (int oc = 0; oc < int'(c.out_ch); oc++)
      for (int p = 0; p < passes; p++) begin
        int word = wnext + oc * passes + p;
        for (int lane = 0; lane < 32; lane++) begin
          int n = lane / 8, ch = lane % 8;
          int l = n % s;
          int chunk = l % cc;
          int ic = p * cpp + (l / cc) * 8 + ch;
          kern_w_t kw = '0;
          for (int e = 0; e < 25; e++) begin
            int f = chunk * 25 + e;
            if (f < kk * kk && ic < 128) kw[e] = 8'(wt[oc][ic][f / kk][f % kk]);
          end
          wld_en <= 1; wld_addr <= 8'(word); wld_lane <= 5'(lane); wld_kernel <= kw;
          @(posedge clk);
        end
        wld_en <= 0;
        for (int n = 0; n < 4; n++) begin
          wld_bias_en <= 1; wld_addr <= 8'(word); wld_bias_nt <= 2'(n);
          wld_bias <= (p == 0 && (n % s) == 0) ? 16'(bs[oc]) : 16'd0;
          @(posedge clk);
        end
        wld_bias_en <= 0;
      end
    wnext += int'(c.out_ch) * passes;
  endtask

  function automatic int act(longint v, int sh);
    longint r;
    if (v < 0) begin n_relu++; return 0; end
    r = v >>> sh;
    if (r > 255) begin n_sat++; return 255; end
    return int'(r);
  endfunction

  task automatic run_layer(layer_cfg_t c, string name);
    int o [64][32][32];
    int kk = int'(c.k);
    int s, cc, cpp, passes, nout, issues, pools, cycles, issued;
    int nxt [128][32][32];
    // reference
    for (int oc = 0; oc < int'(c.out_ch); oc++)
      for (int oy = 0; oy < int'(c.out_h); oy++) for (int ox = 0; ox < int'(c.out_w); ox++) begin
        longint a = bs[oc];
        for (int ic = 0; ic < int'(c.in_ch); ic++)
          for (int fy = 0; fy < kk; fy++) for (int fx = 0; fx < kk; fx++)
            if (wt[oc][ic][fy][fx] != 0)
              a += longint'(ref_ifm[ic][oy+fy][ox+fx]) * wt[oc][ic][fy][fx];
        o[oc][oy][ox] = act(a, int'(c.shift));
      end
    nxt = ref_ifm;
    if (c.fc) begin
      for (int j = 0; j < int'(c.out_ch); j++) nxt[j/25][(j%25)/5][j%5] = o[j][0][0];
      pools = ((int'(c.out_ch) + 24) / 25) * 25;
    end else if (c.pool2) begin
      for (int oc = 0; oc < int'(c.out_ch); oc++)
        for (int py = 0; py < int'(c.out_h) / 2; py++) for (int px = 0; px < int'(c.out_w) / 2; px++) begin
          int m = 0;
          for (int i = 0; i < 4; i++) if (o[oc][2*py + i/2][2*px + i%2] > m) m = o[oc][2*py + i/2][2*px + i%2];
          nxt[oc][py][px] = m;
        end
      pools = int'(c.out_ch) * (int'(c.out_h) / 2) * (int'(c.out_w) / 2);
    end else begin
      for (int oc = 0; oc < int'(c.out_ch); oc++)
        for (int oy = 0; oy < int'(c.out_h); oy++) for (int ox = 0; ox < int'(c.out_w); ox++)
          nxt[oc][oy][ox] = o[oc][oy][ox];
      pools = int'(c.out_ch) * int'(c.out_h) * int'(c.out_w);
    end
    // expected timing
    s  = (c.grp == GRP4) ? 1 : (c.grp == GRP2) ? 2 : 4;
    nout = 4 / s;
    cc = (kk == 9) ? 4 : (kk == 7) ? 2 : 1;
    cpp = 8 * s / cc;
    passes = (int'(c.in_ch) + cpp - 1) / cpp;
    issues = int'(c.out_ch) * ((int'(c.out_h) + nout - 1) / nout) * int'(c.out_w) * passes;
    // run
    cfg_in <= c; start <= 1;
    @(posedge clk);
    start <= 0;
    cycles = 1; issued = 0;
    while (!done) begin
      @(posedge clk);
      cycles++;
      if (dut.u_ctrl.xb_load || dut.u_ctrl.xb_col) issued++;
    end
    checks++;
    if (issued != issues) begin failures++; $display("FAIL %s: %0d issues, expected %0d", name, issued, issues); end
    checks++;
    if (cycles != issues + pools + 5) begin
      failures++; $display("FAIL %s: %0d clocks, expected %0d", name, cycles, issues + pools + 5);
    end
    // compare every written location
    for (int ch = 0; ch < 128; ch++) for (int y = 0; y < 32; y++) for (int x = 0; x < 32; x++)
      if (nxt[ch][y][x] != ref_ifm[ch][y][x] || (c.fc && ch * 25 + y * 5 + x < int'(c.out_ch) && y < 5 && x < 5)) begin
        bit stale = c.fc && !(ch * 25 + y * 5 + x < int'(c.out_ch) && y < 5 && x < 5);
        if (!stale) begin
          res_addr = '{7'(ch), 5'(y), 5'(x)};
          #1;
          checks++;
          if (int'(res_data) != nxt[ch][y][x]) begin
            failures++;
            if (failures < 20) $display("FAIL %s at %0d,%0d,%0d: got %0d expected %0d", name, ch, y, x, res_data, nxt[ch][y][x]);
          end
        end
      end
    // rows the layer rewrote with stale FC values are not predictable: keep the device's view
    ref_ifm = nxt;
    if (c.fc) begin
      for (int j = int'(c.out_ch); j < ((int'(c.out_ch) + 24) / 25) * 25; j++) begin
        res_addr = '{7'(j / 25), 5'((j % 25) / 5), 5'(j % 5)};
        #1;
        ref_ifm[j/25][(j%25)/5][j%5] = int'(res_data);
      end
    end
    case (c.grp) GRP1: n_grp1++; GRP2: n_grp2++; default: n_grp4++; endcase
    if (kk == 7) n_k7++;
    if (kk == 9) n_k9++;
    if (c.fc) n_fc++; else if (c.pool2) n_pool++;
    $display("layer %s: %0d clocks, %0d dot-product issues", name, cycles, issued);
  endtask

  function automatic layer_cfg_t mk(bit fc, int k, grp_t g, int in_ch, int oh, int ow, int oc, bit pool, int sh);
    layer_cfg_t c;
    c.fc = fc; c.k = 4'(k); c.grp = g; c.in_ch = 8'(in_ch); c.out_h = 6'(oh); c.out_w = 6'(ow);
    c.out_ch = 8'(oc); c.wbase = 8'(wnext); c.pool2 = pool; c.shift = 5'(sh);
    return c;
  endfunction

  task automatic layer(bit fc, int k, grp_t g, int in_ch, int oh, int ow, int oc, bit pool, int sh,
                       int n_in, string name);
    layer_cfg_t c;
    int wb;
    c = mk(fc, k, g, in_ch, oh, ow, oc, pool, sh);
    make_layer(c, n_in, wb);
    c.wbase = 8'(wb);
    run_layer(c, name);
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    // chained network: conv -> pool -> FC -> FC
    load_image(3, 14, 14);
    layer(0, 5, GRP4, 3, 10, 10, 6, 1, 9, 0, "conv5x5x3 grp4");
    layer(1, 5, GRP1, 6, 1, 1, 30, 0, 11, 150, "fc150");
    layer(1, 5, GRP1, 2, 1, 1, 10, 0, 9, 30, "fc30");
    // filter-size cases
    load_image(32, 16, 16);
    layer(0, 5, GRP1, 32, 12, 12, 2, 0, 13, 0, "case1 5x5x32");
    load_image(16, 16, 16);
    layer(0, 7, GRP1, 16, 10, 10, 2, 1, 12, 0, "case2 7x7x16");
    load_image(8, 16, 16);
    layer(0, 9, GRP1, 8, 8, 8, 2, 1, 12, 0, "case3 9x9x8");
    load_image(8, 16, 16);
    layer(0, 7, GRP2, 8, 9, 10, 2, 0, 11, 0, "case5 7x7x8 grp2");
    load_image(24, 12, 12);
    layer(0, 5, GRP4, 20, 8, 8, 2, 1, 11, 0, "acc 5x5x20 grp4");
    load_image(24, 12, 12);
    layer(0, 5, GRP2, 24, 7, 8, 2, 0, 12, 0, "acc 5x5x24 grp2");
    load_image(128, 9, 9);
    layer(0, 5, GRP1, 128, 5, 5, 2, 0, 14, 0, "case6 5x5x128");

    $display("mechanisms: col=%0d rot=%0d acc=%0d init=%0d of=%0d grp1=%0d grp2=%0d grp4=%0d k7=%0d k9=%0d pool=%0d fc=%0d relu=%0d sat=%0d",
             n_col, n_rot, n_acc, n_init, n_of, n_grp1, n_grp2, n_grp4, n_k7, n_k9, n_pool, n_fc, n_relu, n_sat);
    begin
      int cnt [14] = '{n_col, n_rot, n_acc, n_init, n_of, n_grp1, n_grp2, n_grp4, n_k7, n_k9, n_pool, n_fc, n_relu, n_sat};
      for (int i = 0; i < 14; i++) begin
        checks++;
        if (cnt[i] == 0) begin failures++; $display("FAIL mechanism %0d never happened", i); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
