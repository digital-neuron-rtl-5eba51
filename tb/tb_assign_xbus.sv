// tb_assign_xbus: fills the map with random bytes and checks the X-bus
// register against a reference gather:
//  * full loads for K = 5, 7, 9 with random windows, chunks and channel bases,
//    including windows off the map edge and channels past in_ch (must be 0);
//  * a sweep of one-column updates (slot 0,1,2,3,4,0,...). After each one the
//    bus, read with the column rotation taken into account, must equal the
//    window at the new position. Columns not in the update slot must not
//    change.
module automatic tb_assign_xbus;
  import dn_pkg::*;
  logic clk = 0, rst_n = 0, load = 0, col_en = 0;
  logic [7:0] fmap [FM_CH][FM_H][FM_W];
  nt_win_t [3:0] win;
  logic [3:0] k = 4'd5;
  logic [7:0] in_ch = 8'd128;
  logic [2:0] col_slot = '0;
  xbus_t xbus;
  int checks = 0, failures = 0;

  assign_xbus dut (.clk, .rst_n, .fmap, .win, .k, .in_ch, .load, .col_en, .col_slot, .xbus);

  always #5 clk = ~clk;

  function automatic logic [7:0] mp(int c, int y, int x);
    if (c >= int'(in_ch) || c >= FM_CH || y >= FM_H || x >= FM_W) return 8'd0;
    return fmap[c][y][x];
  endfunction

  function automatic logic [7:0] exp_full(int n, int c, int e);
    int f = int'(win[n].chunk) * 25 + e;
    int kk = int'(k);
    if (f >= kk * kk) return 8'd0;
    return mp(int'(win[n].ch_base) + c, int'(win[n].y) + f / kk, int'(win[n].x) + f % kk);
  endfunction

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int c = 0; c < FM_CH; c++) for (int y = 0; y < FM_H; y++) for (int x = 0; x < FM_W; x++)
      fmap[c][y][x] = 8'($urandom);
    win = '0;
    repeat (2) @(posedge clk);
    rst_n <= 1;
    // full loads
    for (int t = 0; t < 60; t++) begin
      bit ok = 1;
      k     <= (t % 3 == 0) ? 4'd5 : (t % 3 == 1) ? 4'd7 : 4'd9;
      in_ch <= 8'($urandom_range(1, 128));
      for (int n = 0; n < 4; n++) begin
        win[n].y       <= 6'($urandom_range(0, 31));
        win[n].x       <= 6'($urandom_range(0, 31));
        win[n].ch_base <= 8'(8 * $urandom_range(0, 15));
        win[n].chunk   <= 2'($urandom_range(0, 3));
      end
      load <= 1;
      @(posedge clk);
      load <= 0;
      #1;
      for (int n = 0; n < 4; n++) for (int c = 0; c < 8; c++) for (int e = 0; e < 25; e++)
        if (xbus[n][c][e] != exp_full(n, c, e)) ok = 0;
      checks++;
      if (!ok) begin failures++; $display("FAIL full t=%0d k=%0d", t, k); end
    end
    // column sweep (K = 5)
    k <= 4'd5; in_ch <= 8'd128;
    for (int n = 0; n < 4; n++) begin
      win[n].y <= 6'(3 * n); win[n].x <= '0; win[n].ch_base <= 8'(8 * n + 64); win[n].chunk <= '0;
    end
    load <= 1;
    @(posedge clk);
    load <= 0;
    for (int step = 1; step < 28; step++) begin
      bit ok = 1;
      xbus_t prev;
      #1;
      prev = xbus;
      for (int n = 0; n < 4; n++) win[n].x <= 6'(step);
      col_slot <= 3'((step - 1) % 5);
      col_en <= 1;
      @(posedge clk);
      col_en <= 0;
      #1;
      for (int n = 0; n < 4; n++) for (int c = 0; c < 8; c++)
        for (int r = 0; r < 5; r++) for (int s = 0; s < 5; s++) begin
          // slot s holds window column (s - step) mod 5
          int wc = ((s - step) % 5 + 5) % 5;
          if (xbus[n][c][r*5+s] != mp(8*n + 64 + c, 3*n + r, step + wc)) ok = 0;
          if (s != (step - 1) % 5 && xbus[n][c][r*5+s] != prev[n][c][r*5+s]) ok = 0;
        end
      checks++;
      if (!ok) begin failures++; $display("FAIL column step %0d", step); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
