// weight_decomp: splits a signed 8-bit weight into NSUB signed powers of two,
//   w ~= sgn[0]*2^sh[0] + sgn[1]*2^sh[1] + sgn[2]*2^sh[2],  sgn in {-1,0,+1}.
//
// This is the "weight decomposition" box of the MBS block. The paper gives the
// equation and the signal widths (3-bit shift, 2-bit sign per term) but not
// the algorithm. Here each term is the power of two nearest to what is left of
// the weight (ties go to the larger power), then it is subtracted. The result
// is exact for every weight that can be written with at most NSUB nonzero
// signed binary digits; for the others the error is small (at most 2 for
// 8-bit weights with three terms, the smallest possible). Sign encoding: 2'b01 = +1, 2'b11 = -1,
// 2'b00 = 0. Purely combinational.
module weight_decomp
  import dn_pkg::*;
#(
  parameter int NSUB_P = NSUB
) (
  input  logic signed [W_W-1:0]     w,
  output logic [NSUB_P-1:0][SH_W-1:0] sh,
  output logic [NSUB_P-1:0][1:0]      sgn
);

  always_comb begin
    logic signed [W_W+2:0] r;     // residual, wide enough for overshoot
    logic        [W_W+1:0] m;     // |r|
    logic        [SH_W:0]  e;     // chosen exponent
    r = (W_W+3)'(w);
    for (int i = 0; i < NSUB_P; i++) begin
      m = (r < 0) ? (W_W+2)'(-r) : (W_W+2)'(r);
      e = '0;
      for (int b = 0; b < W_W+2; b++)
        if (m[b]) e = (SH_W+1)'(b);
      // round up to the next power when m >= 1.5 * 2^e
      if (m != 0 && ({m, 1'b0} >= ((W_W+3)'(3) << e)))
        e = e + 1'b1;
      if (e > (SH_W+1)'((1 << SH_W) - 1))
        e = (SH_W+1)'((1 << SH_W) - 1);
      if (m == 0) begin
        sgn[i] = 2'b00;
        sh[i]  = '0;
      end else if (r < 0) begin
        sgn[i] = 2'b11;
        sh[i]  = e[SH_W-1:0];
        r      = r + ((W_W+3)'(1) << e);
      end else begin
        sgn[i] = 2'b01;
        sh[i]  = e[SH_W-1:0];
        r      = r - ((W_W+3)'(1) << e);
      end
    end
  end

endmodule
