// tb_neural_tile: one NT (5x5x8). Each clock with en=1 latches the
// 200-product dot product plus bias. With acc_sel=1 it also adds the previous
// O_NT. With en=0 O_NT holds. Weights are exact three-term values, so
// results match the reference exactly. Also checks that the result appears
// one clock after the inputs (one-clock dot product).
module automatic tb_neural_tile;
  import dn_pkg::*;
  logic clk = 0, rst_n = 0, en = 0, acc_sel = 0;
  nt_x_t x;
  nt_w_t w;
  logic [15:0] bias;
  acc_t o_nt;
  int checks = 0, failures = 0;

  neural_tile dut (.clk, .rst_n, .en, .acc_sel, .x, .w, .bias, .o_nt);

  always #5 clk = ~clk;

  function automatic int rand_w();
    int t;
    do begin
      t = 0;
      for (int i = 0; i < 3; i++)
        t += (int'($urandom_range(0, 2)) - 1) * (1 << $urandom_range(0, 7));
    end while (t < -128 || t > 127);
    return t;
  endfunction

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint expect_v = 0;
    x = '0; w = '0; bias = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 200; t++) begin
      longint dot = 0;
      int b = int'($urandom_range(0, 2000)) - 1000;
      bit a = (t % 4 != 0);
      bit e = (t % 7 != 3);
      for (int c = 0; c < 8; c++)
        for (int i = 0; i < 25; i++) begin
          int xv = int'($urandom_range(0, 255));
          int wv = rand_w();
          x[c][i] = 8'(xv); w[c][i] = 8'(wv);
          dot += xv * wv;
        end
      bias = 16'(b);
      en = e; acc_sel = a;
      @(posedge clk);
      if (e) expect_v = dot + b + (a ? expect_v : 0);
      #1;
      checks++;
      if (longint'(o_nt) != expect_v) begin
        failures++; $display("FAIL t=%0d got=%0d ref=%0d", t, o_nt, expect_v);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
