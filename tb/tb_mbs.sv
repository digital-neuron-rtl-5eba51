// tb_mbs: random inputs times all 256 weights. The three partial products
// must add up to x*w exactly when w is a sum of at most three signed powers
// of two, and to within 2*x of x*w otherwise. Each product's bit 15 must be
// set exactly when its value is negative. Edge inputs 0 and 255 are included.
module automatic tb_mbs;
  import dn_pkg::*;
  logic [7:0] x;
  logic signed [7:0] w;
  logic [2:0][15:0] p;
  int checks = 0, failures = 0;

  mbs dut (.x(x), .w(w), .p(p));

  bit exact [256];

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int v = 0; v < 256; v++) exact[v] = 0;
    for (int s0 = -1; s0 <= 1; s0++) for (int e0 = 0; e0 < 8; e0++)
    for (int s1 = -1; s1 <= 1; s1++) for (int e1 = 0; e1 < 8; e1++)
    for (int s2 = -1; s2 <= 1; s2++) for (int e2 = 0; e2 < 8; e2++) begin
      int t = s0 * (1 << e0) + s1 * (1 << e1) + s2 * (1 << e2);
      if (t >= -128 && t < 128) exact[t+128] = 1;
    end
    for (int v = -128; v < 128; v++) begin
      for (int j = 0; j < 6; j++) begin
        int xv, sum, ref_v, d;
        xv = (j == 0) ? 0 : (j == 1) ? 255 : int'($urandom_range(0, 255));
        x = 8'(xv); w = 8'(v);
        #1;
        sum = 0;
        for (int i = 0; i < 3; i++) begin
          int pv = int'(signed'(p[i]));
          sum += pv;
          checks++;
          if (p[i][15] != (pv < 0)) begin failures++; $display("FAIL sign"); end
        end
        ref_v = xv * v;
        d = (sum > ref_v) ? sum - ref_v : ref_v - sum;
        checks++;
        if (exact[v+128] ? (d != 0) : (d > 2 * xv)) begin
          failures++;
          $display("FAIL x=%0d w=%0d sum=%0d ref=%0d", xv, v, sum, ref_v);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
