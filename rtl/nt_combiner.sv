// nt_combiner: the three CLA adders that join the NT outputs:
//   O_NT1P2 = O_NT1 + O_NT2,  O_NT3P4 = O_NT3 + O_NT4,
//   O_NTSUM = O_NT1P2 + O_NT3P4.
// Which of these is stored depends on how the NTs are grouped for a layer
// (one output from four NTs, two from two pairs, or four separate outputs).
// The adders and signal names follow the paper. Sums keep ACC_W bits and wrap
// on overflow; that is this design's choice. Combinational.
module nt_combiner
  import dn_pkg::*;
(
  input  acc_t [N_NT-1:0] o_nt,
  output acc_t            o_nt1p2,
  output acc_t            o_nt3p4,
  output acc_t            o_ntsum
);

  assign o_nt1p2 = o_nt[0] + o_nt[1];
  assign o_nt3p4 = o_nt[2] + o_nt[3];
  assign o_ntsum = o_nt1p2 + o_nt3p4;

endmodule
