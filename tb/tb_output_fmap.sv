// tb_output_fmap: four write ports at once to random distinct addresses of a
// reference array, then 2x2 window reads (including windows hanging off the
// right and bottom edge, which must read 0 there).
module automatic tb_output_fmap;
  import dn_pkg::*;
  logic clk = 0;
  logic [3:0] wr_en = '0;
  fm_addr_t [3:0] wr_addr = '0;
  logic [3:0][7:0] wr_data = '0;
  fm_addr_t rd_addr = '0;
  logic [3:0][7:0] rd_data;
  int checks = 0, failures = 0;

  output_fmap dut (.clk, .wr_en, .wr_addr, .wr_data, .rd_addr, .rd_data);

  always #5 clk = ~clk;

  logic [7:0] ref_m [FM_CH][FM_H][FM_W];

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    // initialise everything, four per clock on one row
    for (int c = 0; c < FM_CH; c++) for (int y = 0; y < FM_H; y++) for (int x = 0; x < FM_W; x += 4) begin
      for (int p = 0; p < 4; p++) begin
        ref_m[c][y][x+p] = 8'($urandom);
        wr_en[p] <= 1; wr_addr[p] <= '{7'(c), 5'(y), 5'(x+p)}; wr_data[p] <= ref_m[c][y][x+p];
      end
      @(posedge clk);
    end
    // random partial writes
    for (int i = 0; i < 1000; i++) begin
      int c = $urandom_range(0, FM_CH-1), y = $urandom_range(0, FM_H-4), x = $urandom_range(0, FM_W-1);
      for (int p = 0; p < 4; p++) begin
        bit e = 1'($urandom);
        logic [7:0] d = 8'($urandom);
        wr_en[p] <= e; wr_addr[p] <= '{7'(c), 5'(y+p), 5'(x)}; wr_data[p] <= d;
        if (e) ref_m[c][y+p][x] = d;
      end
      @(posedge clk);
    end
    wr_en <= '0;
    @(posedge clk);
    for (int i = 0; i < 3000; i++) begin
      int c = $urandom_range(0, FM_CH-1), y = $urandom_range(0, FM_H-1), x = $urandom_range(0, FM_W-1);
      rd_addr = '{7'(c), 5'(y), 5'(x)};
      #1;
      for (int k = 0; k < 4; k++) begin
        int yy = y + k / 2, xx = x + k % 2;
        logic [7:0] r = (yy < FM_H && xx < FM_W) ? ref_m[c][yy][xx] : 8'd0;
        checks++;
        if (rd_data[k] != r) begin failures++; if (failures < 10) $display("FAIL %0d %0d %0d %0d", c, y, x, k); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
