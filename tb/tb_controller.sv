// tb_controller: drives the layer sequencer alone and checks, clock by clock,
// the control it issues against a reference walk of the loops
// (oc, oy step NOUT, ox, pass):
//  * full load of X-bus and w-bus at each row start, or every clock when not
//    rotating; otherwise a column update into slot (ox-1) mod 5 plus w-bus
//    rotation;
//  * w bank word = wbase + oc*passes + pass; per-NT window, chunk and
//    channel base;
//  * ACC_SEL and the NT enable one clock after issue; output-map writes
//    (enables and addresses, flat for FC) two clocks after the last pass;
//  * the write-back walk with M_SEL = OF and 2x2 read addresses;
//  * done after issues + write-backs + 5 clocks.
module automatic tb_controller;
  import dn_pkg::*;
  logic clk = 0, rst_n = 0, start = 0;
  layer_cfg_t cfg_in = '0, cfg;
  logic busy, done, xb_load, xb_col, wb_load, wb_rot, nt_en, acc_sel, m_sel, if_wr_en;
  logic [2:0] xb_slot;
  nt_win_t [3:0] win;
  logic [7:0] wb_addr;
  logic [3:0] of_wr_en;
  fm_addr_t [3:0] of_wr_addr;
  fm_addr_t pool_rd_addr, if_wr_addr;
  int checks = 0, failures = 0;

  controller dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(bit cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 20) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  task automatic run(layer_cfg_t c);
    int s = (c.grp == GRP4) ? 1 : (c.grp == GRP2) ? 2 : 4;
    int nout = 4 / s;
    int kk = int'(c.k);
    int cc = (kk == 9) ? 4 : (kk == 7) ? 2 : 1;
    int cpp = 8 * s / cc;
    int passes = (int'(c.in_ch) + cpp - 1) / cpp;
    bit rot = (kk == 5) && passes == 1 && !c.fc;
    int ph, pw, pch, cycles = 0;
    // queue of expected writes: {valid, oc, oy, ox}, delay line of 2
    int q_oc [$], q_oy [$], q_ox [$], q_v [$], q_acc [$], q_nt [$];
    cfg_in <= c; start <= 1;
    @(posedge clk);
    start <= 0;
    for (int oc = 0; oc < int'(c.out_ch); oc++)
      for (int oy = 0; oy < int'(c.out_h); oy += nout)
        for (int ox = 0; ox < int'(c.out_w); ox++)
          for (int p = 0; p < passes; p++) begin
            #1;
            if (rot && ox != 0) begin
              chk(xb_col && wb_rot && !xb_load && !wb_load, "column update");
              chk(int'(xb_slot) == (ox - 1) % 5, "slot");
            end else begin
              chk(xb_load && wb_load && !xb_col && !wb_rot, "full load");
              chk(int'(wb_addr) == int'(c.wbase) + oc * passes + p, "w bank address");
            end
            for (int n = 0; n < 4; n++) begin
              int l = n % s;
              chk(int'(win[n].y) == oy + n / s && int'(win[n].x) == ox, "window origin");
              chk(int'(win[n].chunk) == l % cc, "chunk");
              chk(int'(win[n].ch_base) == p * cpp + (l / cc) * 8, "channel base");
            end
            q_acc.push_back(p != 0);
            q_v.push_back(p == passes - 1);
            q_oc.push_back(oc); q_oy.push_back(oy); q_ox.push_back(ox);
            @(posedge clk);
            cycles++;
            #1;
            chk(nt_en && acc_sel == q_acc.pop_front(), "ACC_SEL");
            if (q_v.size() > 1) begin
              int v = q_v.pop_front(), eoc = q_oc.pop_front(), eoy = q_oy.pop_front(), eox = q_ox.pop_front();
              for (int g = 0; g < 4; g++) begin
                bit en = v && g < nout && eoy + g < int'(c.out_h);
                chk(of_wr_en[g] == en, "write enable");
                if (en && c.fc)
                  chk(of_wr_addr[g] == fm_addr_t'({7'(eoc / 25), 5'((eoc % 25) / 5), 5'(eoc % 5)}), "fc address");
                else if (en)
                  chk(of_wr_addr[g] == fm_addr_t'({7'(eoc), 5'(eoy + g), 5'(eox)}), "conv address");
              end
            end
          end
    // drain the remaining writes
    while (q_v.size() > 0) begin
      int v = q_v.pop_front(), eoc = q_oc.pop_front(), eoy = q_oy.pop_front(), eox = q_ox.pop_front();
      if (q_v.size() == 0) begin @(posedge clk); cycles++; #1; end
      for (int g = 0; g < 4; g++) begin
        bit en = v && g < nout && eoy + g < int'(c.out_h);
        chk(of_wr_en[g] == en, "drain write enable");
        if (en && !c.fc) chk(of_wr_addr[g] == fm_addr_t'({7'(eoc), 5'(eoy + g), 5'(eox)}), "drain address");
      end
    end
    // write-back
    if (c.fc) begin pch = (int'(c.out_ch) + 24) / 25; ph = 5; pw = 5; end
    else if (c.pool2) begin pch = int'(c.out_ch); ph = int'(c.out_h) / 2; pw = int'(c.out_w) / 2; end
    else begin pch = int'(c.out_ch); ph = int'(c.out_h); pw = int'(c.out_w); end
    while (!m_sel) begin @(posedge clk); cycles++; #1; end
    for (int ch = 0; ch < pch; ch++) for (int y = 0; y < ph; y++) for (int x = 0; x < pw; x++) begin
      int f = (c.pool2 && !c.fc) ? 2 : 1;
      chk(m_sel && if_wr_en && if_wr_addr == fm_addr_t'({7'(ch), 5'(y), 5'(x)}), "write-back address");
      chk(pool_rd_addr == fm_addr_t'({7'(ch), 5'(f * y), 5'(f * x)}), "pool read address");
      @(posedge clk); cycles++; #1;
    end
    chk(!m_sel, "write-back ends");
    while (!done) begin @(posedge clk); cycles++; #1; end
    chk(cycles + 2 == int'(c.out_ch) * ((int'(c.out_h) + nout - 1) / nout) * int'(c.out_w) * passes
                      + pch * ph * pw + 5, "layer clocks");
    @(posedge clk); #1;
    chk(!busy && !done, "back to idle");
  endtask

  function automatic layer_cfg_t mk(bit fc, int k, grp_t g, int in_ch, int oh, int ow, int oc, bit pool, int wb);
    layer_cfg_t c;
    c.fc = fc; c.k = 4'(k); c.grp = g; c.in_ch = 8'(in_ch); c.out_h = 6'(oh); c.out_w = 6'(ow);
    c.out_ch = 8'(oc); c.wbase = 8'(wb); c.pool2 = pool; c.shift = 5'd4;
    return c;
  endfunction

  initial begin
    repeat (2) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    run(mk(0, 5, GRP1, 32, 3, 12, 2, 1, 7));
    run(mk(0, 5, GRP4, 20, 6, 5, 2, 0, 30));
    run(mk(0, 7, GRP2, 16, 5, 4, 2, 1, 3));
    run(mk(0, 9, GRP1, 8, 2, 3, 3, 0, 50));
    run(mk(1, 5, GRP1, 5, 1, 1, 40, 0, 100));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
