// tb_weight_decomp: checks all 256 weights. For each one the three terms must
// add up to the weight exactly if any three-term signed power-of-two form
// exists, and otherwise to the nearest value such a form can reach. The
// reference searches all 3-term combinations by brute force. Sign codes must
// be 00, 01 or 11.
module automatic tb_weight_decomp;
  import dn_pkg::*;
  logic signed [7:0] w;
  logic [2:0][2:0] sh;
  logic [2:0][1:0] sgn;
  int checks = 0, failures = 0;

  weight_decomp dut (.w(w), .sh(sh), .sgn(sgn));

  int best_err [256];

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    // brute-force the best reachable error for every weight
    for (int v = -128; v < 128; v++) best_err[v+128] = 1000;
    for (int s0 = -1; s0 <= 1; s0++) for (int e0 = 0; e0 < 8; e0++)
    for (int s1 = -1; s1 <= 1; s1++) for (int e1 = 0; e1 < 8; e1++)
    for (int s2 = -1; s2 <= 1; s2++) for (int e2 = 0; e2 < 8; e2++) begin
      int t = s0 * (1 << e0) + s1 * (1 << e1) + s2 * (1 << e2);
      for (int v = -128; v < 128; v++) begin
        int d = (t > v) ? t - v : v - t;
        if (d < best_err[v+128]) best_err[v+128] = d;
      end
    end
    for (int v = -128; v < 128; v++) begin
      int recon, err;
      bit codes_ok;
      w = 8'(v);
      #1;
      recon = 0; codes_ok = 1;
      for (int i = 0; i < 3; i++) begin
        case (sgn[i])
          2'b01: recon += (1 << sh[i]);
          2'b11: recon -= (1 << sh[i]);
          2'b00: ;
          default: codes_ok = 0;
        endcase
      end
      err = (recon > v) ? recon - v : v - recon;
      checks++;
      if (err != best_err[v+128]) begin
        failures++;
        $display("FAIL w=%0d recon=%0d err=%0d best=%0d", v, recon, err, best_err[v+128]);
      end
      checks++;
      if (!codes_ok) begin failures++; $display("FAIL bad code w=%0d", v); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
