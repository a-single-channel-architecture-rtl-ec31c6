// bbt_crosswire: the multiplexers and cross-wiring of the B(.)B^T block.
//
// For output row i (half h = i/4) the Q registers hold rows 4h..4h+3 of Y,
// Y row r sitting in slot 3 - (r mod 4). Left multiplication by B_p picks,
// for row i, the single row b_sel(p,i) of Y with sign b_sgn(p,i) (or zero).
// That choice changes with i, so it is made by 32 multiplexers, one per
// (p, column): each selects among the four slots and their negations, eight
// inputs, or gives zero. Right multiplication by B_q^T is then fixed wiring:
// element c of B_p*Y*B_q^T is element b_sel(q,c) of the selected row, times
// b_sgn(q,c). The paper gives the count and width of the multiplexers and
// says the rest is wiring; the slot mapping follows from its timing diagram.
// The constant sign b_sgn(q,c) is not applied here: it is folded into the
// constant coefficients of the reconstruction stage, so this block has no
// adders other than the shared negation of the Q outputs.
//
// Interface (combinational): q[s][j] and row index i in; t[p][q][c] out,
// W+1 bits, equal to b_sgn(p,i) * Y[b_sel(p,i)][b_sel(q,c)], so that
// (B_p*Y*B_q^T)[i][c] = b_sgn(q,c) * t[p][q][c].
module bbt_crosswire
  import aidct_pkg::*;
#(
  parameter int W = 14
) (
  input  logic signed [W-1:0] q [4][8],
  input  logic [2:0]          i,
  output logic signed [W:0]   t [4][4][8]
);
  logic signed [W:0] qp [4][8];   // slot values, widened
  logic signed [W:0] qn [4][8];   // their negations
  logic signed [W:0] r  [4][8];   // multiplexer outputs: row i of B_p*Y

  always_comb begin
    for (int s = 0; s < 4; s++)
      for (int j = 0; j < 8; j++) begin
        qp[s][j] = (W+1)'(q[s][j]);
        qn[s][j] = -qp[s][j];
      end
    // 32 multiplexers, select decoded from the row index i
    for (int p = 0; p < 4; p++)
      for (int j = 0; j < 8; j++) begin
        logic [1:0] slot;
        int         sg;
        slot = 2'(3 - (b_sel(p, int'(i)) % 4));
        sg   = b_sgn(p, int'(i));
        if (sg > 0)      r[p][j] = qp[slot][j];
        else if (sg < 0) r[p][j] = qn[slot][j];
        else             r[p][j] = '0;
      end
    // fixed cross-wiring for B_q^T
    for (int p = 0; p < 4; p++)
      for (int qq = 0; qq < 4; qq++)
        for (int c = 0; c < 8; c++)
          t[p][qq][c] = r[p][b_sel(qq, c)];
  end

endmodule
