// tb_w_bank: loads random kernels and biases into several words, then checks
// that bus_load presents a word on the w-bus one clock later, that each
// bus_rot moves every kernel column one place right (rightmost wraps to the
// leftmost), that five rotations restore the word, and that bus_load beats
// bus_rot.
module automatic tb_w_bank;
  import dn_pkg::*;
  localparam int D = 8;
  logic clk = 0, rst_n = 0;
  logic ld_en = 0, ld_bias_en = 0, bus_load = 0, bus_rot = 0;
  logic [2:0] ld_addr = '0, rd_addr = '0;
  logic [4:0] ld_lane = '0;
  kern_w_t ld_kernel = '0;
  logic [1:0] ld_bias_nt = '0;
  logic [15:0] ld_bias = '0;
  wbus_t wbus;
  bias_bus_t bias;
  int checks = 0, failures = 0;

  w_bank #(.DEPTH(D)) dut (.clk, .rst_n, .ld_en, .ld_addr, .ld_lane, .ld_kernel,
    .ld_bias_en, .ld_bias_nt, .ld_bias, .bus_load, .bus_rot, .rd_addr, .wbus, .bias);

  always #5 clk = ~clk;

  wbus_t     ref_w [D];
  bias_bus_t ref_b [D];

  // reference word after r right-rotations
  function automatic logic [7:0] exp_w(int a, int n, int c, int row, int col, int r);
    return ref_w[a][n][c][row*5 + ((col - r) % 5 + 5) % 5];
  endfunction

  task automatic check_word(int a, int r);
    bit ok = 1;
    for (int n = 0; n < 4; n++) for (int c = 0; c < 8; c++)
      for (int row = 0; row < 5; row++) for (int col = 0; col < 5; col++)
        if (wbus[n][c][row*5+col] != exp_w(a, n, c, row, col, r)) ok = 0;
    checks++;
    if (!ok) begin failures++; $display("FAIL word %0d rot %0d", a, r); end
  endtask

  initial begin
    repeat (3000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n <= 1;
    for (int a = 0; a < D; a++) begin
      for (int l = 0; l < 32; l++) begin
        for (int e = 0; e < 25; e++) ref_w[a][l/8][l%8][e] = 8'($urandom);
        ld_en <= 1; ld_addr <= 3'(a); ld_lane <= 5'(l); ld_kernel <= ref_w[a][l/8][l%8];
        @(posedge clk);
      end
      ld_en <= 0;
      for (int n = 0; n < 4; n++) begin
        ref_b[a][n] = 16'($urandom);
        ld_bias_en <= 1; ld_addr <= 3'(a); ld_bias_nt <= 2'(n); ld_bias <= ref_b[a][n];
        @(posedge clk);
      end
      ld_bias_en <= 0;
    end
    for (int a = D - 1; a >= 0; a--) begin
      bus_load <= 1; rd_addr <= 3'(a);
      @(posedge clk);
      bus_load <= 0;
      #1;
      check_word(a, 0);
      checks++;
      if (bias != ref_b[a]) begin failures++; $display("FAIL bias %0d", a); end
      for (int r = 1; r <= 6; r++) begin
        bus_rot <= 1;
        @(posedge clk);
        bus_rot <= 0;
        #1;
        check_word(a, r);
      end
    end
    // load has priority over rotate
    bus_load <= 1; bus_rot <= 1; rd_addr <= 3'd2;
    @(posedge clk);
    bus_load <= 0; bus_rot <= 0;
    #1;
    check_word(2, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
