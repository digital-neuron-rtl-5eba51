// controller: runs one layer on the accelerator, then moves its pooled
// output into the input feature map.
//
// A layer is described by a layer_cfg_t given with `start`. Derived values:
//   S     NTs per output: 4 (GRP1), 2 (GRP2), 1 (GRP4); NOUT = 4/S outputs
//         per clock, written to NOUT vertically adjacent output rows.
//   C     25-element chunks per filter channel: 1 (K=5), 2 (K=7), 4 (K=9).
//   CPP   channels per pass = 8*S/C; passes = ceil(in_ch / CPP). Passes
//         after the first are added into O_NT with ACC_SEL (the paper's
//         case 6).
//   rot   K=5 with a single pass and not FC: the window slides one column
//         per clock. Only one X-bus column is reloaded (ADDR step) and the
//         w-bus rotates. At the start of each output row both are loaded in
//         full.
// NT n of output group g = n / S, local index l = n % S, takes chunk l % C
// and channels pass*CPP + (l / C)*8 .. +7 of the window at (oy + g, ox).
// w bank word = wbase + oc*passes + pass. Software arranges the words to match,
// and puts the bias in the pass-0 word only.
//
// Timing: one dot product is issued per clock. Clock i loads the X-bus and
// w-bus, clock i+1 latches O_NT, clock i+2 writes the activated result into
// the output feature map. After the last issue two drain clocks follow. Then
// one output-map value (2x2 max, or a copy) per clock is written back to the
// input feature map with M_SEL = OF. `done` pulses for one clock at the end.
// An FC layer uses a 5x5 window at (0,0). Its neuron j is stored at channel
// j/25, row (j%25)/5, column j%5, the flat 5x5xC layout the paper uses for FC
// vectors. The paper names ADDR, ACC_SEL and M_SEL; the sequencing is this
// design's.
module controller
  import dn_pkg::*;
#(
  parameter int DEPTH = 256
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     start,
  input  layer_cfg_t               cfg_in,
  output logic                     busy,
  output logic                     done,
  output layer_cfg_t               cfg,
  // X-bus assignment
  output logic                     xb_load,
  output logic                     xb_col,
  output logic [2:0]               xb_slot,
  output nt_win_t [N_NT-1:0]       win,
  // w bank
  output logic                     wb_load,
  output logic                     wb_rot,
  output logic [$clog2(DEPTH)-1:0] wb_addr,
  // NTs (ACC_SEL is common to the four NTs here)
  output logic                     nt_en,
  output logic                     acc_sel,
  // output feature map writes
  output logic [N_NT-1:0]          of_wr_en,
  output fm_addr_t [N_NT-1:0]      of_wr_addr,
  // pooling and write-back
  output fm_addr_t                 pool_rd_addr,
  output logic                     m_sel,
  output logic                     if_wr_en,
  output fm_addr_t                 if_wr_addr
);

  typedef enum logic [2:0] {IDLE, COMP, DRAIN, POOL, FIN} state_t;
  state_t st;

  typedef struct packed {
    logic       valid;
    logic       acc;
    logic       last;
    logic [7:0] oc;
    logic [5:0] oy;
    logic [5:0] ox;
  } stage_t;

  // derived layer constants
  logic [2:0] s_nt, s_nt_q, nout, c_chk;
  logic [5:0] cpp;
  logic [4:0] passes;
  logic       rot;

  logic [7:0] oc;
  logic [5:0] oy, ox;
  logic [4:0] pass;
  logic [1:0] drain;
  logic [7:0] pc, pch;
  logic [5:0] py, px, ph, pw;
  stage_t     s1, s2;

  always_comb begin
    unique case (cfg_in.grp)
      GRP2:    s_nt = 3'd2;
      GRP4:    s_nt = 3'd1;
      default: s_nt = 3'd4;
    endcase
  end

  // issue-side combinational outputs
  always_comb begin
    xb_load = 1'b0; xb_col = 1'b0; wb_load = 1'b0; wb_rot = 1'b0;
    wb_addr = $clog2(DEPTH)'(cfg.wbase + oc * passes + pass);
    for (int n = 0; n < N_NT; n++) begin
      automatic int g = n / int'(s_nt_q);
      automatic int l = n % int'(s_nt_q);
      win[n].y       = oy + 6'(g);
      win[n].x       = ox;
      win[n].chunk   = 2'(l % int'(c_chk));
      win[n].ch_base = 8'(int'(pass) * int'(cpp) + (l / int'(c_chk)) * NT_CH);
    end
    if (st == COMP) begin
      if (rot && ox != '0) begin
        xb_col = 1'b1;
        wb_rot = 1'b1;
      end else begin
        xb_load = 1'b1;
        wb_load = 1'b1;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      st <= IDLE; done <= 1'b0; cfg <= '0;
      s_nt_q <= 3'd4; nout <= 3'd1; c_chk <= 3'd1; cpp <= 6'd32; passes <= 5'd1; rot <= 1'b0;
      oc <= '0; oy <= '0; ox <= '0; pass <= '0; xb_slot <= '0; drain <= '0;
      pc <= '0; py <= '0; px <= '0; pch <= '0; ph <= '0; pw <= '0;
      s1 <= '0; s2 <= '0;
    end else begin
      done <= 1'b0;
      // pipeline of issued operations
      s1.valid <= (st == COMP);
      s1.acc   <= (pass != '0);
      s1.last  <= (pass == passes - 1'b1);
      s1.oc    <= oc;
      s1.oy    <= oy;
      s1.ox    <= ox;
      s2       <= s1;
      unique case (st)
        IDLE: if (start) begin
          automatic int s  = int'(s_nt);
          automatic int c  = (cfg_in.k == 4'd9) ? 4 : (cfg_in.k == 4'd7) ? 2 : 1;
          automatic int cp = NT_CH * s / c;
          cfg    <= cfg_in;
          s_nt_q <= s_nt;
          nout   <= 3'(N_NT / s);
          c_chk  <= 3'(c);
          cpp    <= 6'(cp);
          passes <= 5'((int'(cfg_in.in_ch) + cp - 1) / cp);
          rot    <= (cfg_in.k == 4'd5) && (int'(cfg_in.in_ch) <= cp) && !cfg_in.fc;
          oc <= '0; oy <= '0; ox <= '0; pass <= '0; xb_slot <= '0;
          st <= COMP;
        end
        COMP: begin
          if (rot) xb_slot <= (ox == '0 || xb_slot == 3'd4) ? 3'd0 : xb_slot + 1'b1;
          if (pass != passes - 1'b1) pass <= pass + 1'b1;
          else begin
            pass <= '0;
            if (ox != cfg.out_w - 1'b1) ox <= ox + 1'b1;
            else begin
              ox <= '0;
              if (int'(oy) + int'(nout) < int'(cfg.out_h)) oy <= oy + 6'(nout);
              else begin
                oy <= '0;
                if (oc != cfg.out_ch - 1'b1) oc <= oc + 1'b1;
                else begin
                  st <= DRAIN; drain <= '0;
                end
              end
            end
          end
        end
        DRAIN: begin
          drain <= drain + 1'b1;
          if (drain == 2'd1) begin
            st <= POOL; pc <= '0; py <= '0; px <= '0;
            if (cfg.fc) begin
              pch <= 8'((int'(cfg.out_ch) + KN - 1) / KN); ph <= 6'(KS); pw <= 6'(KS);
            end else if (cfg.pool2) begin
              pch <= cfg.out_ch; ph <= cfg.out_h >> 1; pw <= cfg.out_w >> 1;
            end else begin
              pch <= cfg.out_ch; ph <= cfg.out_h; pw <= cfg.out_w;
            end
          end
        end
        POOL: begin
          if (px != pw - 1'b1) px <= px + 1'b1;
          else begin
            px <= '0;
            if (py != ph - 1'b1) py <= py + 1'b1;
            else begin
              py <= '0;
              if (pc != pch - 1'b1) pc <= pc + 1'b1;
              else st <= FIN;
            end
          end
        end
        FIN: begin
          done <= 1'b1;
          st   <= IDLE;
        end
        default: st <= IDLE;
      endcase
    end
  end

  assign busy    = (st != IDLE);
  assign nt_en   = s1.valid;
  assign acc_sel = s1.acc;

  // output feature map write addresses (stage 2)
  always_comb begin
    for (int g = 0; g < N_NT; g++) begin
      of_wr_en[g]   = s2.valid && s2.last && (g < int'(nout))
                      && (int'(s2.oy) + g < int'(cfg.out_h));
      if (cfg.fc) begin
        of_wr_addr[g].ch = 7'(int'(s2.oc) / KN);
        of_wr_addr[g].y  = 5'((int'(s2.oc) % KN) / KS);
        of_wr_addr[g].x  = 5'(int'(s2.oc) % KS);
      end else begin
        of_wr_addr[g].ch = 7'(s2.oc);
        of_wr_addr[g].y  = 5'(int'(s2.oy) + g);
        of_wr_addr[g].x  = 5'(s2.ox);
      end
    end
  end

  // pooling read and write-back
  assign m_sel              = (st == POOL);
  assign if_wr_en           = (st == POOL);
  assign if_wr_addr.ch      = 7'(pc);
  assign if_wr_addr.y       = 5'(py);
  assign if_wr_addr.x       = 5'(px);
  assign pool_rd_addr.ch    = 7'(pc);
  assign pool_rd_addr.y     = (cfg.pool2 && !cfg.fc) ? 5'({py, 1'b0}) : 5'(py);
  assign pool_rd_addr.x     = (cfg.pool2 && !cfg.fc) ? 5'({px, 1'b0}) : 5'(px);

endmodule
