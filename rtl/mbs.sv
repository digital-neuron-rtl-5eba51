// mbs: Multiplication by Barrel Shift. Multiplies an unsigned 8-bit input X by
// a signed 8-bit weight without a multiplier.
//
// The weight goes through weight_decomp, giving per term a shift amount and a
// sign. Per term, a 3-way mux picks X, its two's complement ~X+1, or zero, and
// a barrel shifter shifts the choice left by the shift amount. This gives
// NSUB partial products P1..P3 with P1+P2+P3 = X * w_approx. These steps
// follow the paper's MBS figure.
//
// Output format: each product is a P_W=16-bit two's-complement number. Bits
// [14:0] are the 15-bit shifter output and bit 15 is the sign. The MOA
// does not sign-extend bit 15 but counts it (see moa). A term with sign -1 and
// X = 0 is output as +0, because ~0+1 wraps to 0 in 8 bits; this is
// this design's choice. Combinational.
module mbs
  import dn_pkg::*;
#(
  parameter int NSUB_P = NSUB
) (
  input  logic [X_W-1:0]            x,
  input  logic signed [W_W-1:0]     w,
  output logic [NSUB_P-1:0][P_W-1:0] p
);

  logic [NSUB_P-1:0][SH_W-1:0] sh;
  logic [NSUB_P-1:0][1:0]      sgn;

  weight_decomp #(.NSUB_P(NSUB_P)) u_dec (.w(w), .sh(sh), .sgn(sgn));

  logic [X_W-1:0] x_neg;
  assign x_neg = ~x + 1'b1;            // the paper's "~X_i + 1 [7:0]"

  always_comb begin
    logic signed [X_W:0]   sel;        // mux output with its sign bit
    logic signed [P_W-1:0] ext;
    for (int i = 0; i < NSUB_P; i++) begin
      unique case (sgn[i])
        2'b01:   sel = {1'b0, x};
        2'b11:   sel = (x == '0) ? '0 : {1'b1, x_neg};
        default: sel = '0;
      endcase
      ext  = P_W'(sel);                // sign-extend to the shifter width
      p[i] = ext <<< sh[i];            // barrel shifter
    end
  end

endmodule
