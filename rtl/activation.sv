// activation: the ReLU block between the NT adders and the output feature map.
//
// Negative sums become 0 (ReLU, as in the paper). Then `shift` LSBs are
// dropped. The paper's FPGA run drops 4, which undoes the x16 scaling applied
// to the weights when they were made integers. The result saturates at 255 so
// it fits the 8-bit unsigned activation. The run-time shift and the
// saturation are this design's choices. Combinational.
module activation
  import dn_pkg::*;
(
  input  acc_t               din,
  input  logic [SHIFT_W-1:0] shift,
  output logic [X_W-1:0]     dout
);

  logic [ACC_W-1:0] pos;
  always_comb begin
    pos  = (din < 0) ? '0 : (din >>> shift);
    dout = (pos > ACC_W'((1 << X_W) - 1)) ? '1 : pos[X_W-1:0];
  end

endmodule
