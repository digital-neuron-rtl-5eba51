// output_fmap: the output feature map registers (CH x H x W bytes).
//
// Up to four activated results come in per clock, one per NT grouping output
// (O_NT1..4, O_NT1P2/O_NT3P4, or O_NTSUM). Each has its own write enable and
// address. A combinational 2x2 read port gives pooling the window whose
// top-left corner is rd_addr, ordered {(y+1,x+1), (y+1,x), (y,x+1), (y,x)}.
// Reads outside the map return 0. Writes take effect on the rising edge.
// The contents are not reset. The paper names this block only; the size (the
// same as the input map) and ports are this design's choices.
module output_fmap
  import dn_pkg::*;
#(
  parameter int CH = FM_CH,
  parameter int H  = FM_H,
  parameter int W  = FM_W
) (
  input  logic                      clk,
  input  logic [N_NT-1:0]           wr_en,
  input  fm_addr_t [N_NT-1:0]       wr_addr,
  input  logic [N_NT-1:0][X_W-1:0]  wr_data,
  input  fm_addr_t                  rd_addr,
  output logic [3:0][X_W-1:0]       rd_data
);

  logic [X_W-1:0] mem [CH][H][W];

  always_ff @(posedge clk)
    for (int n = 0; n < N_NT; n++)
      if (wr_en[n] && int'(wr_addr[n].ch) < CH && int'(wr_addr[n].y) < H
          && int'(wr_addr[n].x) < W)
        mem[wr_addr[n].ch][wr_addr[n].y][wr_addr[n].x] <= wr_data[n];

  always_comb begin
    for (int i = 0; i < 4; i++) begin
      automatic int y = int'(rd_addr.y) + i / 2;
      automatic int x = int'(rd_addr.x) + i % 2;
      rd_data[i] = '0;
      if (int'(rd_addr.ch) < CH && y < H && x < W)
        rd_data[i] = mem[rd_addr.ch][y][x];
    end
  end

endmodule
