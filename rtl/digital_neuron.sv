// digital_neuron: top level of the Digital Neuron inference accelerator.
//
// The datapath, as in the paper's system figure:
//   DRAM -> w bank -> w-bus ---------------------.
//   DRAM -> (Init) input feature map -> Assign X-bus -> X-bus -> NT1..NT4
//   NT1..NT4 -> three CLA adders (O_NT1P2, O_NT3P4, O_NTSUM)
//            -> Activation (ReLU) -> output feature map -> pooling
//            -> (OF) input feature map, ready for the next layer.
// Four Neural Tiles each do a 5x5x8 dot product per clock (800 products in
// all). Multiplication is done by barrel shifts of the input, because each
// weight is split into three signed powers of two.
//
// Use: load the weights of all layers through the wld_* port (one 25-weight
// kernel or one bias per clock). Load an image through img_*. Then, for each
// layer, apply cfg with a one-clock start pulse and wait for done. The
// results of the last layer are in the input feature map; read them
// through res_addr/res_data. DRAM itself is outside this design.
// The paper gives the blocks and their wiring. The port protocol, map sizes
// and w bank depth are this design's choices.
module digital_neuron
  import dn_pkg::*;
#(
  parameter int WB_DEPTH = 256
) (
  input  logic                        clk,
  input  logic                        rst_n,
  // image load (DRAM -> input feature map, M_SEL = Init)
  input  logic                        img_wr_en,
  input  fm_addr_t                    img_wr_addr,
  input  logic [X_W-1:0]              img_wr_data,
  // weight load (DRAM -> w bank)
  input  logic                        wld_en,
  input  logic [$clog2(WB_DEPTH)-1:0] wld_addr,
  input  logic [4:0]                  wld_lane,
  input  kern_w_t                     wld_kernel,
  input  logic                        wld_bias_en,
  input  logic [1:0]                  wld_bias_nt,
  input  logic [BIAS_W-1:0]           wld_bias,
  // layer control
  input  logic                        start,
  input  layer_cfg_t                  cfg_in,
  output logic                        busy,
  output logic                        done,
  // result read-back from the input feature map
  input  fm_addr_t                    res_addr,
  output logic [X_W-1:0]              res_data
);

  layer_cfg_t                  cfg;
  logic                        xb_load, xb_col;
  logic [2:0]                  xb_slot;
  nt_win_t [N_NT-1:0]          win;
  logic                        wb_load, wb_rot;
  logic [$clog2(WB_DEPTH)-1:0] wb_addr;
  logic                        nt_en, acc_sel;
  logic [N_NT-1:0]             of_wr_en;
  fm_addr_t [N_NT-1:0]         of_wr_addr;
  fm_addr_t                    pool_rd_addr, if_wr_addr;
  logic                        m_sel, if_wr_en;

  controller #(.DEPTH(WB_DEPTH)) u_ctrl (
    .clk, .rst_n, .start, .cfg_in, .busy, .done, .cfg,
    .xb_load, .xb_col, .xb_slot, .win,
    .wb_load, .wb_rot, .wb_addr,
    .nt_en, .acc_sel,
    .of_wr_en, .of_wr_addr,
    .pool_rd_addr, .m_sel, .if_wr_en, .if_wr_addr
  );

  // weights
  wbus_t     wbus;
  bias_bus_t bias;
  w_bank #(.DEPTH(WB_DEPTH)) u_wbank (
    .clk, .rst_n,
    .ld_en(wld_en), .ld_addr(wld_addr), .ld_lane(wld_lane), .ld_kernel(wld_kernel),
    .ld_bias_en(wld_bias_en), .ld_bias_nt(wld_bias_nt), .ld_bias(wld_bias),
    .bus_load(wb_load), .bus_rot(wb_rot), .rd_addr(wb_addr),
    .wbus, .bias
  );

  // input feature map and X-bus
  logic [X_W-1:0] fmap [FM_CH][FM_H][FM_W];
  logic [X_W-1:0] pooled;
  input_fmap u_ifm (
    .clk, .m_sel,
    .init_en(img_wr_en), .init_addr(img_wr_addr), .init_data(img_wr_data),
    .of_en(if_wr_en), .of_addr(if_wr_addr), .of_data(pooled),
    .rd_addr(res_addr), .rd_data(res_data),
    .fmap
  );

  xbus_t xbus;
  assign_xbus u_xbus (
    .clk, .rst_n, .fmap, .win, .k(cfg.k), .in_ch(cfg.in_ch),
    .load(xb_load), .col_en(xb_col), .col_slot(xb_slot), .xbus
  );

  // Neural Tiles
  acc_t [N_NT-1:0] o_nt;
  for (genvar n = 0; n < N_NT; n++) begin : g_nt
    neural_tile u_nt (
      .clk, .rst_n, .en(nt_en), .acc_sel,
      .x(xbus[n]), .w(wbus[n]), .bias(bias[n]), .o_nt(o_nt[n])
    );
  end

  acc_t o_nt1p2, o_nt3p4, o_ntsum;
  nt_combiner u_comb (.o_nt, .o_nt1p2, .o_nt3p4, .o_ntsum);

  // select what is stored for each grouping, then ReLU
  acc_t [N_NT-1:0]          res;
  logic [N_NT-1:0][X_W-1:0] act;
  always_comb begin
    unique case (cfg.grp)
      GRP4:    res = o_nt;
      GRP2:    res = {o_ntsum, o_ntsum, o_nt3p4, o_nt1p2};
      default: res = {o_ntsum, o_ntsum, o_ntsum, o_ntsum};
    endcase
  end

  for (genvar n = 0; n < N_NT; n++) begin : g_act
    activation u_act (.din(res[n]), .shift(cfg.shift), .dout(act[n]));
  end

  // output feature map and pooling
  logic [3:0][X_W-1:0] pool_win;
  output_fmap u_ofm (
    .clk, .wr_en(of_wr_en), .wr_addr(of_wr_addr), .wr_data(act),
    .rd_addr(pool_rd_addr), .rd_data(pool_win)
  );

  pooling u_pool (.win(pool_win), .pool2(cfg.pool2 && !cfg.fc), .dout(pooled));

endmodule
