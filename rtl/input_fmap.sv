// input_fmap: the input feature map registers (CH x H x W bytes).
//
// One byte is written per clock. The source is picked by m_sel, the paper's
// M_SEL mux. With m_sel = 0 ("Init") it is the image loaded from DRAM. With
// m_sel = 1 ("OF") it is the pooled output of the layer just computed, so one
// layer's output becomes the next layer's input without going through DRAM.
// The whole array is visible on `fmap` for the X-bus assignment. A separate
// read port (rd_*) lets a host read back results. Writes take effect on the
// rising edge. The contents are not reset.
// The map size (128 channels x 32 x 32) is this design's choice. 32x32 fits
// the LeNet-5 input, and 128 channels fit the paper's deepest example
// filter (5x5x128).
module input_fmap
  import dn_pkg::*;
#(
  parameter int CH = FM_CH,
  parameter int H  = FM_H,
  parameter int W  = FM_W
) (
  input  logic           clk,
  input  logic           m_sel,
  input  logic           init_en,
  input  fm_addr_t       init_addr,
  input  logic [X_W-1:0] init_data,
  input  logic           of_en,
  input  fm_addr_t       of_addr,
  input  logic [X_W-1:0] of_data,
  input  fm_addr_t       rd_addr,
  output logic [X_W-1:0] rd_data,
  output logic [X_W-1:0] fmap [CH][H][W]
);

  logic           we;
  fm_addr_t       wa;
  logic [X_W-1:0] wd;

  always_comb begin
    if (m_sel) begin we = of_en;   wa = of_addr;   wd = of_data;   end
    else       begin we = init_en; wa = init_addr; wd = init_data; end
  end

  always_ff @(posedge clk)
    if (we && int'(wa.ch) < CH && int'(wa.y) < H && int'(wa.x) < W)
      fmap[wa.ch][wa.y][wa.x] <= wd;

  always_comb begin
    rd_data = '0;
    if (int'(rd_addr.ch) < CH && int'(rd_addr.y) < H && int'(rd_addr.x) < W)
      rd_data = fmap[rd_addr.ch][rd_addr.y][rd_addr.x];
  end

endmodule
