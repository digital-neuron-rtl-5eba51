// tb_input_fmap: writes random bytes through the Init path (m_sel=0) and the
// OF path (m_sel=1), and checks that only the selected path writes. It then
// reads every written location back through the read port and the full-map
// output.
module automatic tb_input_fmap;
  import dn_pkg::*;
  logic clk = 0, m_sel = 0, init_en = 0, of_en = 0;
  fm_addr_t init_addr = '0, of_addr = '0, rd_addr = '0;
  logic [7:0] init_data = '0, of_data = '0, rd_data;
  logic [7:0] fmap [FM_CH][FM_H][FM_W];
  int checks = 0, failures = 0;

  input_fmap dut (.clk, .m_sel, .init_en, .init_addr, .init_data, .of_en, .of_addr,
                  .of_data, .rd_addr, .rd_data, .fmap);

  always #5 clk = ~clk;

  logic [7:0] ref_m [FM_CH][FM_H][FM_W];

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    // fill everything through Init
    for (int c = 0; c < FM_CH; c++) for (int y = 0; y < FM_H; y++) for (int x = 0; x < FM_W; x++) begin
      ref_m[c][y][x] = 8'($urandom);
      m_sel <= 0; init_en <= 1; init_addr <= '{7'(c), 5'(y), 5'(x)}; init_data <= ref_m[c][y][x];
      of_en <= 1; of_addr <= '{7'(c), 5'(x), 5'(y)}; of_data <= ~ref_m[c][y][x];  // must be ignored
      @(posedge clk);
    end
    init_en <= 0; of_en <= 0;
    // overwrite some through OF, with Init active but deselected
    for (int i = 0; i < 2000; i++) begin
      int c = $urandom_range(0, FM_CH-1), y = $urandom_range(0, FM_H-1), x = $urandom_range(0, FM_W-1);
      ref_m[c][y][x] = 8'($urandom);
      m_sel <= 1; of_en <= 1; of_addr <= '{7'(c), 5'(y), 5'(x)}; of_data <= ref_m[c][y][x];
      init_en <= 1; init_addr <= '{7'(x), 5'(c), 5'(y)}; init_data <= 8'hA5;
      @(posedge clk);
    end
    of_en <= 0; init_en <= 0; m_sel <= 0;
    @(posedge clk);
    for (int c = 0; c < FM_CH; c++) for (int y = 0; y < FM_H; y++) for (int x = 0; x < FM_W; x++) begin
      rd_addr = '{7'(c), 5'(y), 5'(x)};
      #1;
      checks++;
      if (rd_data != ref_m[c][y][x] || fmap[c][y][x] != ref_m[c][y][x]) begin
        failures++;
        if (failures < 10) $display("FAIL %0d %0d %0d", c, y, x);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
