// moa: Multi-Operand Adder. Adds N_OPS two's-complement operands in one clock
// cycle without a tree of carry-propagate adders.
//
// How it works (follows the paper's MOA(PSUM) figure and appendix):
//  * Sign handling. The operands are not sign-extended. Only their low
//    IN_W-1 bits go into the adder tree. The sign bits are counted (NUM_P),
//    the count is negated (N_NUM_P) and added at weight 2^(IN_W-1). This
//    works because an operand's extended sign bits add up to -1 (or 0) in
//    that column and above.
//  * Reduction. Each stage groups the rows in threes and turns each group
//    into a sum row and a carry row with a row of full adders (3:2 carry-save).
//    For 75 operands the row count runs 75, 50, 34, 23, 16, 11, 8, 6, 4, 3, 2,
//    which is ten stages.
//  * N_NUM_P is ready later than the operands, because it comes through the
//    population count and the 2's complement. So it joins at the latest stage
//    where it adds no stage (for 75 operands, before stage 7).
//  * The two rows left are added by one carry-propagate adder (the paper's
//    CLA; written here as '+').
// The reduction works on whole rows, not bit by bit. Every row is OUT_W bits
// wide and the result is modulo 2^OUT_W. Purely combinational.
module moa #(
  parameter int N_OPS = 75,
  parameter int IN_W  = 16,
  parameter int OUT_W = 23
) (
  input  logic [N_OPS-1:0][IN_W-1:0] ops,
  output logic [OUT_W-1:0]           sum
);

  // rows left after one 3:2 stage
  function automatic int after(int r);
    return (r / 3) * 2 + (r % 3);
  endfunction

  function automatic int stages(int r);
    int s = 0;
    while (r > 2) begin r = after(r); s++; end
    return s;
  endfunction

  // rows present after s stages without the extra N_NUM_P row
  function automatic int plain_rows(int s);
    int r = N_OPS;
    for (int i = 0; i < s; i++) r = after(r);
    return r;
  endfunction

  localparam int S_TOT = stages(N_OPS + 1);

  // latest stage index where the extra row can join without adding a stage
  function automatic int join_at();
    int j = 0;
    for (int s = 0; s <= stages(N_OPS); s++)
      if (s + stages(plain_rows(s) + 1) == S_TOT) j = s;
    return j;
  endfunction

  localparam int J     = join_at();
  localparam int MAXR  = N_OPS + 1;
  localparam int T_W   = $clog2(N_OPS + 1);   // width of NUM_P
  localparam int NN_W  = OUT_W - (IN_W - 1);  // width of N_NUM_P

  // row count entering stage s (after the join)
  function automatic int rows_in(int s);
    int r = N_OPS + ((J == 0) ? 1 : 0);
    for (int i = 0; i < s; i++) r = after(r) + ((i + 1 == J) ? 1 : 0);
    return r;
  endfunction

  logic [T_W-1:0]   num_p;
  logic [NN_W-1:0]  n_num_p;
  logic [OUT_W-1:0] nrow;

  always_comb begin
    num_p = '0;
    for (int i = 0; i < N_OPS; i++) num_p = num_p + T_W'(ops[i][IN_W-1]);
  end

  assign n_num_p = ~NN_W'(num_p) + 1'b1;           // 2's Comp block
  assign nrow    = {n_num_p, {(IN_W-1){1'b0}}};

  logic [OUT_W-1:0] rows [S_TOT+1][MAXR];

  always_comb begin
    for (int s = 0; s <= S_TOT; s++)
      for (int r = 0; r < MAXR; r++) rows[s][r] = '0;
    for (int i = 0; i < N_OPS; i++)
      rows[0][i] = OUT_W'(ops[i][IN_W-2:0]);
    if (J == 0) rows[0][N_OPS] = nrow;
    for (int s = 0; s < S_TOT; s++) begin
      automatic int cin = rows_in(s);
      automatic int g   = cin / 3;
      for (int k = 0; k < g; k++) begin
        automatic logic [OUT_W-1:0] a = rows[s][3*k];
        automatic logic [OUT_W-1:0] b = rows[s][3*k+1];
        automatic logic [OUT_W-1:0] c = rows[s][3*k+2];
        rows[s+1][2*k]   = a ^ b ^ c;                          // sum
        rows[s+1][2*k+1] = ((a & b) | (a & c) | (b & c)) << 1; // carry
      end
      for (int k = 0; k < cin % 3; k++)
        rows[s+1][2*g+k] = rows[s][3*g+k];
      if (s + 1 == J) rows[s+1][after(cin)] = nrow;
    end
  end

  assign sum = rows[S_TOT][0] + rows[S_TOT][1];              // final CLA

endmodule
