// tb_moa: compares the multi-operand adder with a plain signed sum. Two
// instances: 75 operands of 16 bits into 23 bits (the PSUM use) and 10
// operands of 32 bits into 32 bits (the CHSUM use). Vectors: random, all
// operands at the most negative product (-32640), all at the most positive,
// and mixed signs.
module automatic tb_moa;
  logic [74:0][15:0] a;
  logic [22:0]       sa;
  logic [9:0][31:0]  b;
  logic [31:0]       sb;
  int checks = 0, failures = 0;

  moa #(.N_OPS(75), .IN_W(16), .OUT_W(23)) dut_a (.ops(a), .sum(sa));
  moa #(.N_OPS(10), .IN_W(32), .OUT_W(32)) dut_b (.ops(b), .sum(sb));

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 400; t++) begin
      longint ra, rb;
      ra = 0; rb = 0;
      for (int i = 0; i < 75; i++) begin
        int v;
        case (t)
          0: v = -32640;
          1: v = 32640;
          2: v = (i % 2) ? -32640 : 32640;
          default: v = int'($urandom_range(0, 65280)) - 32640;
        endcase
        a[i] = 16'(v);
        ra += v;
      end
      for (int i = 0; i < 10; i++) begin
        int v = (t == 0) ? -20000000 : int'($urandom_range(0, 40000000)) - 20000000;
        b[i] = 32'(v);
        rb += v;
      end
      #1;
      checks++;
      if (longint'(signed'(sa)) != ra) begin
        failures++; $display("FAIL a t=%0d got=%0d ref=%0d", t, signed'(sa), ra);
      end
      checks++;
      if (longint'(signed'(sb)) != rb) begin
        failures++; $display("FAIL b t=%0d got=%0d ref=%0d", t, signed'(sb), rb);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
