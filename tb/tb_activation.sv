// tb_activation: ReLU, LSB truncation and saturation against a reference,
// for random values, zero, negatives and values far above the 8-bit range.
module automatic tb_activation;
  import dn_pkg::*;
  acc_t din;
  logic [4:0] shift;
  logic [7:0] dout;
  int checks = 0, failures = 0;

  activation dut (.din(din), .shift(shift), .dout(dout));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 500; t++) begin
      int v, s, r;
      s = (t % 3 == 0) ? 4 : int'($urandom_range(0, 10));
      case (t % 5)
        0: v = -int'($urandom_range(1, 100000));
        1: v = 0;
        2: v = int'($urandom_range(0, 4095));
        default: v = int'($urandom_range(0, 10000000));
      endcase
      din = v; shift = 5'(s);
      #1;
      r = (v < 0) ? 0 : (v / (1 << s));
      if (r > 255) r = 255;
      checks++;
      if (int'(dout) != r) begin
        failures++; $display("FAIL v=%0d s=%0d got=%0d ref=%0d", v, s, dout, r);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
