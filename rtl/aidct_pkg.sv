// aidct_pkg: constants and helper functions shared by the algebraic-integer
// (AI) 8x8 2-D DCT datapath.
//
// Numbers are carried in the AI basis beta = {1, z1, z2, z1*z2} with
// z1 = sqrt(2+sqrt2) + sqrt(2-sqrt2) and z2 = sqrt(2+sqrt2) - sqrt(2-sqrt2).
// The reconstruction matrix B splits as B = B0 + B1*z1 + B2*z2 + B3*z1*z2,
// where each Bp is sparse: row i of Bp has at most one non-zero entry, +1 or
// -1. b_sel()/b_sgn() return that entry's column and sign; they are the
// matrices printed in the source paper, written as tables.
//
// The product of two basis elements is again an integer combination of the
// basis (z1^2 = 4 + z1z2, z2^2 = 4 - z1z2, z1^2*z2 = 2z1 + 2z2,
// z1*z2^2 = 2z1 - 2z2, (z1z2)^2 = 8). prod_coef() returns those integers;
// the reduction of the 2-D terms to four AI components with them is a choice
// of this implementation, made so that the output stage is a 1-D
// expansion-factor reconstruction.
package aidct_pkg;

  // Column index of the single non-zero entry in row i of B_p.
  function automatic int unsigned b_sel(input int unsigned p, input int unsigned i);
    case (p)
      0: case (i) 0: return 0; 1: return 1; 2, 3: return 2; default: return 7; endcase
      1: case (i) 4, 5: return 6; 6, 7: return 4; default: return 0; endcase
      2: case (i) 4, 5: return 4; 6, 7: return 6; default: return 0; endcase
      default: case (i) 2, 3: return 3; 4, 5, 6, 7: return 5; default: return 0; endcase
    endcase
  endfunction

  // Sign (+1, -1, or 0 when row i of B_p is all zero) of that entry.
  function automatic int b_sgn(input int unsigned p, input int unsigned i);
    case (p)
      0: return 1;
      1: case (i) 4, 6: return -1; 5, 7: return 1; default: return 0; endcase
      2: case (i) 4, 7: return -1; 5, 6: return 1; default: return 0; endcase
      default: case (i) 3, 4, 5: return -1; 2, 6, 7: return 1; default: return 0; endcase
    endcase
  endfunction

  // Integer coefficient of basis element k in the product beta_p * beta_q.
  function automatic int prod_coef(input int unsigned p, input int unsigned q,
                                   input int unsigned k);
    int unsigned lo, hi;
    lo = (p < q) ? p : q;
    hi = (p < q) ? q : p;
    if (lo == 0) return (k == hi) ? 1 : 0;       // 1 * beta_hi
    case ({lo[1:0], hi[1:0]})
      4'b01_01: return (k == 0) ? 4 : (k == 3) ? 1 : 0;             // z1*z1
      4'b01_10: return (k == 3) ? 1 : 0;                            // z1*z2
      4'b01_11: return (k == 1 || k == 2) ? 2 : 0;                  // z1*z1z2
      4'b10_10: return (k == 0) ? 4 : (k == 3) ? -1 : 0;            // z2*z2
      4'b10_11: return (k == 1) ? 2 : (k == 2) ? -2 : 0;            // z2*z1z2
      default:  return (k == 0) ? 8 : 0;                            // z1z2*z1z2
    endcase
  endfunction

endpackage
