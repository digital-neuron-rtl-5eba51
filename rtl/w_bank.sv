// w_bank: weight bank registers and the w-bus register that feeds the four NTs.
//
// Storage: DEPTH words. A word is one full w-bus image: 4 NTs x 8 channels
// x 25 weights, plus one bias per NT. The weights of all layers are loaded
// from DRAM once and reused for every inference, as the paper describes. The
// load port writes one 25-weight kernel ("lane" = nt*8 + channel) or one bias
// per clock.
//
// The w-bus register:
//  * bus_load copies word rd_addr into the register: the full w-bus, or the
//    initial columns at the start of a filter row.
//  * bus_rot rotates every 5x5 kernel one column to the right, with the
//    rightmost column wrapping to the leftmost. This matches the X-bus, where
//    only one column is replaced per clock, so each weight stays in line with
//    its input. The rotation follows the paper's w-bank figure.
// bus_load has priority. Both act on the rising edge, so the new w-bus is
// visible one clock later. The word layout, DEPTH and load port are this
// design's choices. Synchronous active-low reset clears the w-bus register;
// the storage is not reset.
module w_bank
  import dn_pkg::*;
#(
  parameter int DEPTH = 256
) (
  input  logic                     clk,
  input  logic                     rst_n,
  // DRAM load port
  input  logic                     ld_en,
  input  logic [$clog2(DEPTH)-1:0] ld_addr,
  input  logic [4:0]               ld_lane,
  input  kern_w_t                  ld_kernel,
  input  logic                     ld_bias_en,
  input  logic [1:0]               ld_bias_nt,
  input  logic [BIAS_W-1:0]        ld_bias,
  // w-bus control
  input  logic                     bus_load,
  input  logic                     bus_rot,
  input  logic [$clog2(DEPTH)-1:0] rd_addr,
  output wbus_t                    wbus,
  output bias_bus_t                bias
);

  wbus_t     wmem [DEPTH];
  bias_bus_t bmem [DEPTH];

  always_ff @(posedge clk) begin
    if (ld_en)      wmem[ld_addr][ld_lane[4:3]][ld_lane[2:0]] <= ld_kernel;
    if (ld_bias_en) bmem[ld_addr][ld_bias_nt] <= ld_bias;
  end

  function automatic kern_w_t rotate(kern_w_t k);
    kern_w_t r;
    for (int row = 0; row < KS; row++)
      for (int col = 0; col < KS; col++)
        r[row*KS + col] = k[row*KS + (col + KS - 1) % KS];
    return r;
  endfunction

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      wbus <= '0;
      bias <= '0;
    end else if (bus_load) begin
      wbus <= wmem[rd_addr];
      bias <= bmem[rd_addr];
    end else if (bus_rot) begin
      for (int n = 0; n < N_NT; n++)
        for (int c = 0; c < NT_CH; c++)
          wbus[n][c] <= rotate(wbus[n][c]);
    end
  end

endmodule
