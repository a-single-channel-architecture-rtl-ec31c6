// frs: final reconstruction step for one output column c = COL. It turns the
// exact, doubly AI-encoded value of X[i][c] into a fixed-point number.
//
// Input: the sixteen selected terms t[p][q] (p, q = 0..3) from the
// cross-wiring, with (B_p*Y*B_q^T)[i][c] = b_sgn(q,COL) * t[p][q]. The value
// is X = sum_pq (B_p*Y*B_q^T)[i][c] * beta_p * beta_q over the basis
// beta = {1, z1, z2, z1z2}.
//
// Step 1 (exact, adders and shifts only): each product beta_p*beta_q is
// rewritten as an integer combination of the basis (prod_coef), giving four
// integer AI components (a, b, c, d) with X = a + b*z1 + c*z2 + d*z1z2.
// Step 2 (expansion factor): with alpha*[z1 z2 z1z2] ~ [M1 M2 M3],
// X ~ a + (M1*b + M2*c + M3*d) / alpha. The sum is formed exactly in
// integers; the one multiplication by 1/alpha uses the constant
// round(2^INV_BITS / alpha), and the result is rounded to OUT_FRAC
// fractional bits.
//
// The paper uses an expansion-factor FRS from earlier work without
// describing its insides here; it gives the two integer sets (12,5,13) with
// alpha = 4.5958 and (437,181,473) with alpha = 167.2309. Step 1, INV_BITS
// and OUT_FRAC are this design's choices. Combinational; the caller registers
// the outputs.
module frs
  import aidct_pkg::*;
#(
  parameter int  TW       = 15,        // width of the t inputs
  parameter int  COL      = 4,         // output column served, 0..7
  parameter int  M1       = 437,
  parameter int  M2       = 181,
  parameter int  M3       = 473,
  parameter real ALPHA    = 167.2309,
  parameter int  INV_BITS = 36,        // precision of the 1/alpha constant
  parameter int  OUT_FRAC = 8,         // fractional bits of x_fix
  parameter int  OUT_W    = TW + OUT_FRAC + 7  // width of x_fix, covers any t
) (
  input  logic signed [TW-1:0]    t [4][4],
  output logic signed [TW+4:0]    comp [4],   // exact AI components a,b,c,d
  output logic signed [OUT_W-1:0] x_fix       // X * 2^OUT_FRAC, rounded
);
  localparam int CW = TW + 5;
  localparam longint INV_Q = longint'((2.0 ** INV_BITS) / ALPHA);
  localparam int SH = INV_BITS - OUT_FRAC;

  // constant coefficient of t[p][q] in component k
  function automatic int coef(input int unsigned p, input int unsigned q,
                              input int unsigned k);
    return prod_coef(p, q, k) * b_sgn(q, COL);
  endfunction

  longint s, prod;

  always_comb begin
    for (int k = 0; k < 4; k++) begin
      comp[k] = '0;
      for (int p = 0; p < 4; p++)
        for (int qq = 0; qq < 4; qq++)
          comp[k] = comp[k] + CW'(coef(p, qq, k)) * CW'(t[p][qq]);
    end
    s     = longint'(M1) * longint'(comp[1]) + longint'(M2) * longint'(comp[2])
          + longint'(M3) * longint'(comp[3]);
    prod  = s * INV_Q + (longint'(1) <<< (SH - 1));
    x_fix = OUT_W'((longint'(comp[0]) <<< OUT_FRAC) + (prod >>> SH));
  end

endmodule
