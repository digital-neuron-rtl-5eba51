// assign_xbus: the "Assign X-bus" block and the X-bus register feeding the NTs.
//
// For each NT n, win[n] gives a window origin (y, x), the first of the NT's 8
// channels, and which 25-element chunk of a K x K filter the NT handles.
// Filter element f = chunk*25 + e (e = 0..24, e = row*5 + col on the bus)
// sits at filter row f / K and filter column f % K. So:
//   K = 5: the bus holds the 5x5 window itself.
//   K = 7: the 49 elements are split into [0:24] and [25:48].
//   K = 9: the 81 elements are split into [0:24], [25:49], [50:74], [75:80].
// This split follows the paper's filter-size cases. Elements past K*K,
// channels at or past in_ch, and positions outside the map read as 0.
//
// Two ways to update the register:
//  * load: every element is gathered again (start of a filter row, K = 7/9
//    filters, accumulation passes).
//  * col_en: only bus column col_slot of each kernel is replaced, by the map
//    column x + 4, the new rightmost column of a window that moved one step
//    right. The new column's address is the departing column's plus 5.
//    This is the paper's one-column update; the other columns keep their
//    values and do not toggle. The w bank rotates its kernels in step.
// The register updates on the rising edge (load has priority). Synchronous
// active-low reset clears it.
module assign_xbus
  import dn_pkg::*;
#(
  parameter int CH = FM_CH,
  parameter int H  = FM_H,
  parameter int W  = FM_W
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic [X_W-1:0]      fmap [CH][H][W],
  input  nt_win_t [N_NT-1:0]  win,
  input  logic [3:0]          k,
  input  logic [7:0]          in_ch,
  input  logic                load,
  input  logic                col_en,
  input  logic [2:0]          col_slot,
  output xbus_t               xbus
);

  function automatic logic [X_W-1:0] rd(input logic [X_W-1:0] m [CH][H][W],
                                        int ch, int y, int x, int nch);
    if (ch < nch && ch < CH && y < H && x < W) return m[ch][y][x];
    return '0;
  endfunction

  xbus_t full;      // every element gathered
  xbus_t colv;      // new column placed into slot col_slot

  always_comb begin
    full = '0;
    colv = xbus;
    for (int n = 0; n < N_NT; n++)
      for (int c = 0; c < NT_CH; c++) begin
        automatic int ch = int'(win[n].ch_base) + c;
        for (int e = 0; e < KN; e++) begin
          automatic int f  = int'(win[n].chunk) * KN + e;
          automatic int kk = int'(k);
          if (kk != 0 && f < kk * kk)
            full[n][c][e] = rd(fmap, ch, int'(win[n].y) + f / kk,
                               int'(win[n].x) + f % kk, int'(in_ch));
        end
        for (int r = 0; r < KS; r++)
          colv[n][c][r*KS + int'(col_slot)] =
            rd(fmap, ch, int'(win[n].y) + r, int'(win[n].x) + KS - 1, int'(in_ch));
      end
  end

  always_ff @(posedge clk) begin
    if (!rst_n)      xbus <= '0;
    else if (load)   xbus <= full;
    else if (col_en) xbus <= colv;
  end

endmodule
