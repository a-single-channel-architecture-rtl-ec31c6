// aidct_ref_pkg: reference model for the testbenches of the AI 2-D DCT.
//
// Written from the matrices alone, without the RTL's tables: A and B are
// entered as full 8x8 matrices (B with entries in the basis {1, z1, z2,
// z1z2}), Y = A*x*A^T is formed by plain integer matrix products, and
// X = B*Y*B^T both exactly (AI arithmetic with the multiplication rules
// z1^2 = 4 + z1z2, z2^2 = 4 - z1z2, z1*z1z2 = 2z1 + 2z2, z2*z1z2 = 2z1 - 2z2,
// (z1z2)^2 = 8) and in double precision with the real values of z1 and z2.
package aidct_ref_pkg;

  typedef longint ai_t [4];   // components on 1, z1, z2, z1z2

  function automatic real z1();
    return $sqrt(2.0 + $sqrt(2.0)) + $sqrt(2.0 - $sqrt(2.0));
  endfunction
  function automatic real z2();
    return $sqrt(2.0 + $sqrt(2.0)) - $sqrt(2.0 - $sqrt(2.0));
  endfunction

  function automatic int amat(input int r, input int c);
    int a [8][8] = '{
      '{ 1,  1,  1,  1,  1,  1,  1,  1},
      '{ 1, -1, -1,  1,  1, -1, -1,  1},
      '{ 1,  1, -1, -1, -1, -1,  1,  1},
      '{ 1,  0,  0, -1, -1,  0,  0,  1},
      '{ 1,  1,  1,  1, -1, -1, -1, -1},
      '{ 0, -1, -1,  0,  0,  1,  1,  0},
      '{-1, -1,  1,  1, -1, -1,  1,  1},
      '{ 1,  0,  0,  0,  0,  0,  0, -1}};
    return a[r][c];
  endfunction

  // B[r][c] as an algebraic integer, components on 1, z1, z2, z1z2
  function automatic void bmat(input int r, input int c, output ai_t v);
    // each entry written as {1, z1, z2, z1z2}
    int b [8][8][4] = '{
      '{'{1,0,0,0}, '{0,0,0,0}, '{0,0,0,0}, '{0,0,0,0}, '{0,0,0,0}, '{0,0,0,0}, '{0,0,0,0}, '{0,0,0,0}},
      '{'{0,0,0,0}, '{1,0,0,0}, '{0,0,0,0}, '{0,0,0,0}, '{0,0,0,0}, '{0,0,0,0}, '{0,0,0,0}, '{0,0,0,0}},
      '{'{0,0,0,0}, '{0,0,0,0}, '{1,0,0,0}, '{0,0,0,1}, '{0,0,0,0}, '{0,0,0,0}, '{0,0,0,0}, '{0,0,0,0}},
      '{'{0,0,0,0}, '{0,0,0,0}, '{1,0,0,0}, '{0,0,0,-1},'{0,0,0,0}, '{0,0,0,0}, '{0,0,0,0}, '{0,0,0,0}},
      '{'{0,0,0,0}, '{0,0,0,0}, '{0,0,0,0}, '{0,0,0,0}, '{0,0,-1,0},'{0,0,0,-1},'{0,-1,0,0},'{1,0,0,0}},
      '{'{0,0,0,0}, '{0,0,0,0}, '{0,0,0,0}, '{0,0,0,0}, '{0,0,1,0}, '{0,0,0,-1},'{0,1,0,0}, '{1,0,0,0}},
      '{'{0,0,0,0}, '{0,0,0,0}, '{0,0,0,0}, '{0,0,0,0}, '{0,-1,0,0},'{0,0,0,1}, '{0,0,1,0}, '{1,0,0,0}},
      '{'{0,0,0,0}, '{0,0,0,0}, '{0,0,0,0}, '{0,0,0,0}, '{0,1,0,0}, '{0,0,0,1}, '{0,0,-1,0},'{1,0,0,0}}};
    for (int k = 0; k < 4; k++) v[k] = b[r][c][k];
  endfunction

  function automatic void ai_mul(input ai_t u, input ai_t v, output ai_t o);
    // (u0 + u1 z1 + u2 z2 + u3 w)(v0 + v1 z1 + v2 z2 + v3 w)
    o[0] = u[0]*v[0] + 4*u[1]*v[1] + 4*u[2]*v[2] + 8*u[3]*v[3];
    o[1] = u[0]*v[1] + u[1]*v[0] + 2*(u[1]*v[3] + u[3]*v[1])
         + 2*(u[2]*v[3] + u[3]*v[2]);
    o[2] = u[0]*v[2] + u[2]*v[0] + 2*(u[1]*v[3] + u[3]*v[1])
         - 2*(u[2]*v[3] + u[3]*v[2]);
    o[3] = u[0]*v[3] + u[3]*v[0] + u[1]*v[1] + u[1]*v[2] + u[2]*v[1]
         - u[2]*v[2];
  endfunction

  function automatic real ai_val(input ai_t u);
    return real'(u[0]) + real'(u[1]) * z1() + real'(u[2]) * z2()
         + real'(u[3]) * z1() * z2();
  endfunction

  // Y = A * x * A^T
  function automatic void ref_y(input int x [8][8], output longint y [8][8]);
    longint t [8][8];
    for (int r = 0; r < 8; r++)
      for (int c = 0; c < 8; c++) begin
        t[r][c] = 0;
        for (int n = 0; n < 8; n++) t[r][c] += amat(r, n) * x[n][c];
      end
    for (int r = 0; r < 8; r++)
      for (int c = 0; c < 8; c++) begin
        y[r][c] = 0;
        for (int n = 0; n < 8; n++) y[r][c] += t[r][n] * amat(c, n);
      end
  endfunction

  // X = B * Y * B^T, exact (AI components) and in double precision
  function automatic void ref_x(input longint y [8][8], output ai_t xa [8][8],
                                output real xr [8][8]);
    ai_t  t [8][8];
    ai_t  b, m;
    real  br [8][8];
    real  tr [8][8];
    for (int i = 0; i < 8; i++)
      for (int j = 0; j < 8; j++) begin
        bmat(i, j, b);
        br[i][j] = ai_val(b);
      end
    for (int i = 0; i < 8; i++)
      for (int j = 0; j < 8; j++) begin
        for (int k = 0; k < 4; k++) t[i][j][k] = 0;
        tr[i][j] = 0.0;
        for (int r = 0; r < 8; r++) begin
          bmat(i, r, b);
          for (int k = 0; k < 4; k++) t[i][j][k] += b[k] * y[r][j];
          tr[i][j] += br[i][r] * real'(y[r][j]);
        end
      end
    for (int i = 0; i < 8; i++)
      for (int c = 0; c < 8; c++) begin
        for (int k = 0; k < 4; k++) xa[i][c][k] = 0;
        xr[i][c] = 0.0;
        for (int j = 0; j < 8; j++) begin
          bmat(c, j, b);
          ai_mul(t[i][j], b, m);
          for (int k = 0; k < 4; k++) xa[i][c][k] += m[k];
          xr[i][c] += tr[i][j] * br[c][j];
        end
      end
  endfunction

  function automatic real rabs(input real v);
    return (v < 0.0) ? -v : v;
  endfunction

  // value the expansion-factor reconstruction aims at
  function automatic real ef_val(input ai_t u, input int m1, input int m2,
                                 input int m3, input real alpha);
    return real'(u[0]) + (real'(m1) * real'(u[1]) + real'(m2) * real'(u[2])
         + real'(m3) * real'(u[3])) / alpha;
  endfunction

endpackage
