// tb_neural_element: 25-input dot products against a direct sum of products.
// The weights are drawn as sums of three random signed powers of two, so the
// barrel-shift products are exact and the result must match exactly.
// Corner vectors: all inputs 255 with all weights -128 or +127 (=128-1).
module automatic tb_neural_element;
  import dn_pkg::*;
  logic [24:0][7:0] x;
  logic [24:0][7:0] w;
  logic [22:0]      psum;
  int checks = 0, failures = 0;

  neural_element dut (.x(x), .w(w), .psum(psum));

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
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 300; t++) begin
      int r = 0;
      for (int i = 0; i < 25; i++) begin
        int xv = (t < 2) ? 255 : int'($urandom_range(0, 255));
        int wv = (t == 0) ? -128 : (t == 1) ? 127 : rand_w();
        x[i] = 8'(xv); w[i] = 8'(wv);
        r += xv * wv;
      end
      #1;
      checks++;
      if (int'(signed'(psum)) != r) begin
        failures++; $display("FAIL t=%0d got=%0d ref=%0d", t, signed'(psum), r);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
