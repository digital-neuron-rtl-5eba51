// tb_pooling: 2x2 max pooling against a reference maximum, and the copy mode.
module automatic tb_pooling;
  import dn_pkg::*;
  logic [3:0][7:0] win;
  logic pool2;
  logic [7:0] dout;
  int checks = 0, failures = 0;

  pooling dut (.win(win), .pool2(pool2), .dout(dout));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 400; t++) begin
      int m = 0;
      for (int i = 0; i < 4; i++) begin
        win[i] = 8'($urandom_range(0, 255));
        if (int'(win[i]) > m) m = int'(win[i]);
      end
      pool2 = t[0];
      #1;
      checks++;
      if (int'(dout) != (pool2 ? m : int'(win[0]))) begin
        failures++; $display("FAIL t=%0d", t);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
