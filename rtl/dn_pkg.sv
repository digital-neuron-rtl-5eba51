// dn_pkg: types and constants shared by the Digital Neuron accelerator.
//
// The accelerator computes convolution and fully-connected layers with four
// Neural Tiles (NTs). Each NT holds eight neural elements, and each neural
// element takes a 5x5 window of one channel, so one NT covers a 5x5x8 filter
// and the four NTs together 800 products per clock. Inputs are unsigned 8-bit
// and weights signed 8-bit, and each weight is split into three signed powers
// of two. These numbers follow the paper. The remaining widths (accumulator,
// bias, map sizes, w bank depth) are this design's choices.
// The maps hold 128 channels so that a 5x5x128 filter (four accumulation
// passes of 32 channels) can run from on-chip data.
package dn_pkg;

  localparam int X_W    = 8;    // activation width (unsigned)
  localparam int W_W    = 8;    // weight width (signed)
  localparam int NSUB   = 3;    // partial sub-integers per weight
  localparam int SH_W   = 3;    // shift amount width (a, b, c)
  localparam int P_W    = 16;   // partial product: 15-bit shifter output + sign
  localparam int KS     = 5;    // neural element window side
  localparam int KN     = KS*KS;// inputs per neural element (N = 25)
  localparam int NT_CH  = 8;    // neural elements per NT
  localparam int N_NT   = 4;    // number of NTs
  localparam int PSUM_W = 23;   // neural element output width
  localparam int ACC_W  = 32;   // NT accumulator / O_NT width
  localparam int BIAS_W = 16;   // bias width
  localparam int SHIFT_W = 5;   // output truncation amount width

  // Map sizes (input and output feature map registers).
  localparam int FM_CH = 128;
  localparam int FM_H  = 32;
  localparam int FM_W  = 32;

  // Buses: [nt][channel][element] where element = row*5 + column.
  typedef logic [KN-1:0][X_W-1:0]              kern_x_t;
  typedef logic [KN-1:0][W_W-1:0]              kern_w_t;
  typedef logic [NT_CH-1:0][KN-1:0][X_W-1:0]   nt_x_t;
  typedef logic [NT_CH-1:0][KN-1:0][W_W-1:0]   nt_w_t;
  typedef logic [N_NT-1:0][NT_CH-1:0][KN-1:0][X_W-1:0] xbus_t;
  typedef logic [N_NT-1:0][NT_CH-1:0][KN-1:0][W_W-1:0] wbus_t;
  typedef logic [N_NT-1:0][BIAS_W-1:0]         bias_bus_t;
  typedef logic signed [ACC_W-1:0]             acc_t;

  // How the four NT outputs are combined (Sec. III-C cases).
  //   GRP1: one output per clock, O_NTSUM        (cases 1, 2, 3, 6, FC)
  //   GRP2: two outputs, O_NT1P2 and O_NT3P4     (case 5)
  //   GRP4: four outputs, O_NT1..O_NT4            (case 4)
  typedef enum logic [1:0] {GRP1 = 2'd0, GRP2 = 2'd1, GRP4 = 2'd2} grp_t;

  // Layer description given to the controller at start.
  typedef struct packed {
    logic         fc;       // fully-connected: outputs stored flat as 5x5xC
    logic [3:0]   k;        // filter side: 5, 7 or 9
    grp_t         grp;      // NT grouping
    logic [7:0]   in_ch;    // input channels (filter depth), 1..128
    logic [5:0]   out_h;    // output rows (1 for FC)
    logic [5:0]   out_w;    // output columns (1 for FC)
    logic [7:0]   out_ch;   // output channels / FC neurons
    logic [7:0]   wbase;    // first w bank word of this layer
    logic         pool2;    // 2x2 max pooling (else copy)
    logic [SHIFT_W-1:0] shift; // LSBs dropped after ReLU
  } layer_cfg_t;

  // Per-NT window for the X-bus assignment.
  typedef struct packed {
    logic [5:0] y;        // window origin row in the input map
    logic [5:0] x;        // window origin column
    logic [7:0] ch_base;  // first channel of this NT's 8
    logic [1:0] chunk;    // which 25-element piece of a K*K filter
  } nt_win_t;

  // Feature map address.
  typedef struct packed {
    logic [6:0] ch;
    logic [4:0] y;
    logic [4:0] x;
  } fm_addr_t;

endpackage
