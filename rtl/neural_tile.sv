// neural_tile: one Neural Tile (NT), a 5x5x8 convolution engine.
//
// Eight neural elements each compute one channel's 5x5 dot product. MOA(CHSUM)
// adds their eight 23-bit results, the bias BS and, when acc_sel (the paper's
// ACC_SEL) is high, the NT's previous result. The sum goes into the O_NT
// register. The bias path and the 0/O_NT feedback mux follow the paper's
// figures. The ACC_W = 32-bit width is this design's choice.
// Timing: x, w and bias are sampled on the rising clock edge where en is high.
// O_NT then holds the new result until the next such edge. So a full 5x5x8
// dot product takes one clock. acc_sel lets a filter deeper than the NT's
// capacity be summed over several clocks. Synchronous active-low reset clears
// O_NT.
module neural_tile
  import dn_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  logic              en,
  input  logic              acc_sel,
  input  nt_x_t             x,
  input  nt_w_t             w,
  input  logic [BIAS_W-1:0] bias,
  output acc_t              o_nt
);

  logic [NT_CH-1:0][PSUM_W-1:0] psum;

  for (genvar c = 0; c < NT_CH; c++) begin : g_ne
    neural_element u_ne (.x(x[c]), .w(w[c]), .psum(psum[c]));
  end

  logic [NT_CH+1:0][ACC_W-1:0] ops;
  always_comb begin
    for (int c = 0; c < NT_CH; c++)
      ops[c] = ACC_W'(signed'(psum[c]));
    ops[NT_CH]   = ACC_W'(signed'(bias));
    ops[NT_CH+1] = acc_sel ? o_nt : '0;          // ACC mux
  end

  logic [ACC_W-1:0] chsum;
  moa #(.N_OPS(NT_CH + 2), .IN_W(ACC_W), .OUT_W(ACC_W)) u_chsum (
    .ops(ops),
    .sum(chsum)
  );

  always_ff @(posedge clk) begin
    if (!rst_n)  o_nt <= '0;
    else if (en) o_nt <= chsum;
  end

endmodule
