// neural_element: dot product of one 5x5 window of one channel with one 5x5
// kernel, in one combinational pass.
//
// It holds N = 25 MBS multipliers. Each gives three partial products, so the
// MOA(PSUM) adds 75 operands into a PSUM_W = 23-bit signed sum. The structure
// follows the paper's computational-engine figure. The 23-bit output width is
// the one printed for the neural-element outputs in the paper's NT figure.
// Interface: x and w are flat vectors indexed element = row*5 + column.
module neural_element
  import dn_pkg::*;
#(
  parameter int N = KN
) (
  input  logic [N-1:0][X_W-1:0] x,
  input  logic [N-1:0][W_W-1:0] w,
  output logic [PSUM_W-1:0]     psum
);

  logic [N*NSUB-1:0][P_W-1:0] pp;

  for (genvar i = 0; i < N; i++) begin : g_mbs
    mbs u_mbs (
      .x(x[i]),
      .w(w[i]),
      .p(pp[i*NSUB +: NSUB])
    );
  end

  moa #(.N_OPS(N*NSUB), .IN_W(P_W), .OUT_W(PSUM_W)) u_psum (
    .ops(pp),
    .sum(psum)
  );

endmodule
