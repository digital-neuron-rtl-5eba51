// tb_nt_combiner: random NT outputs; checks O_NT1P2, O_NT3P4 and O_NTSUM
// against integer sums.
module automatic tb_nt_combiner;
  import dn_pkg::*;
  acc_t [3:0] o_nt;
  acc_t o12, o34, osum;
  int checks = 0, failures = 0;

  nt_combiner dut (.o_nt(o_nt), .o_nt1p2(o12), .o_nt3p4(o34), .o_ntsum(osum));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 200; t++) begin
      int v [4];
      for (int i = 0; i < 4; i++) begin
        v[i] = int'($urandom_range(0, 200000000)) - 100000000;
        o_nt[i] = v[i];
      end
      #1;
      checks += 3;
      if (o12 != v[0] + v[1]) begin failures++; $display("FAIL 1p2"); end
      if (o34 != v[2] + v[3]) begin failures++; $display("FAIL 3p4"); end
      if (osum != v[0] + v[1] + v[2] + v[3]) begin failures++; $display("FAIL sum"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
