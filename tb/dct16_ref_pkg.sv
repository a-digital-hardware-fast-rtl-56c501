// dct16_ref_pkg -- reference model for the testbenches of the 16-point
// approximate DCT.
//
// Holds the matrices of the transform as plain integer tables, written out
// entry by entry rather than derived from the butterfly factorisation the
// RTL uses, and a matrix-vector product over them. T is the full 16x16
// transform, E the 4x4 Block A matrix, O the 8x8 odd part (Block B) and
// M the 8x8 second level of Block C. Test vectors are 32-bit ints.
package dct16_ref_pkg;

  localparam int T_MAT [16][16] = '{
    '{ 1, 1, 1, 1, 1, 1, 1, 1, 1, 1, 1, 1, 1, 1, 1, 1},
    '{ 1, 1, 1, 1, 1, 0, 1, 1,-1,-1, 0,-1,-1,-1,-1,-1},
    '{ 1, 1, 1, 0, 0,-1,-1,-1,-1,-1,-1, 0, 0, 1, 1, 1},
    '{ 1, 1, 1, 0,-1,-1,-1,-1, 1, 1, 1, 1, 0,-1,-1,-1},
    '{ 1, 1,-1,-1,-1,-1, 1, 1, 1, 1,-1,-1,-1,-1, 1, 1},
    '{ 1, 1,-1,-1,-1, 1, 1, 0, 0,-1,-1, 1, 1, 1,-1,-1},
    '{ 1, 0,-1,-1, 1, 1, 0,-1,-1, 0, 1, 1,-1,-1, 0, 1},
    '{ 1, 0,-1, 1, 1, 1,-1,-1, 1, 1,-1,-1,-1, 1, 0,-1},
    '{ 1,-1,-1, 1, 1,-1,-1, 1, 1,-1,-1, 1, 1,-1,-1, 1},
    '{ 1,-1,-1, 1,-1,-1, 0, 1,-1, 0, 1, 1,-1, 1, 1,-1},
    '{ 1,-1, 0, 1,-1, 0, 1,-1,-1, 1, 0,-1, 1, 0,-1, 1},
    '{ 0,-1, 1, 1,-1, 1, 1,-1, 1,-1,-1, 1,-1,-1, 1, 0},
    '{ 1,-1, 1,-1,-1, 1,-1, 1, 1,-1, 1,-1,-1, 1,-1, 1},
    '{ 1,-1, 1,-1, 0, 1,-1, 1,-1, 1,-1, 0, 1,-1, 1,-1},
    '{ 0,-1, 1,-1, 1,-1, 1, 0, 0, 1,-1, 1,-1, 1,-1, 0},
    '{ 1,-1, 0,-1, 1,-1, 1,-1, 1,-1, 1,-1, 1, 0, 1,-1}
  };

  localparam int E_MAT [4][4] = '{
    '{ 0, 1, 1, 1},
    '{-1,-1, 0, 1},
    '{ 1, 0,-1, 1},
    '{-1, 1,-1, 0}
  };

  localparam int O_MAT [8][8] = '{
    '{ 1, 1, 0, 1, 1, 1, 1, 1},
    '{-1,-1,-1,-1, 0, 1, 1, 1},
    '{ 0, 1, 1,-1,-1,-1, 1, 1},
    '{-1,-1, 1, 1, 1,-1, 0, 1},
    '{ 1, 0,-1,-1, 1,-1,-1, 1},
    '{-1, 1, 1,-1, 1, 1,-1, 0},
    '{ 1,-1, 1, 0,-1, 1,-1, 1},
    '{-1, 1,-1, 1,-1, 0,-1, 1}
  };

  localparam int M_MAT [8][8] = '{
    '{ 1, 0, 0, 0, 1, 0, 1, 0},
    '{-1, 0,-1, 0, 0, 0, 1, 0},
    '{ 0, 0, 0, 1,-1, 0, 1, 0},
    '{-1, 0, 1, 0, 0, 1, 0, 0},
    '{ 0, 0,-1, 0, 0, 1, 0,-1},
    '{ 0,-1, 0, 1, 1, 0, 0, 0},
    '{ 0, 1, 0, 0, 0,-1, 0,-1},
    '{ 0,-1, 0,-1, 0, 0, 0,-1}
  };

  // y = T x
  function automatic void mul_t(input int x [16], output int y [16]);
    for (int r = 0; r < 16; r++) begin
      y[r] = 0;
      for (int c = 0; c < 16; c++) y[r] += T_MAT[r][c] * x[c];
    end
  endfunction

  // y = E x
  function automatic void mul_e(input int x [4], output int y [4]);
    for (int r = 0; r < 4; r++) begin
      y[r] = 0;
      for (int c = 0; c < 4; c++) y[r] += E_MAT[r][c] * x[c];
    end
  endfunction

  // y = O x
  function automatic void mul_o(input int x [8], output int y [8]);
    for (int r = 0; r < 8; r++) begin
      y[r] = 0;
      for (int c = 0; c < 8; c++) y[r] += O_MAT[r][c] * x[c];
    end
  endfunction

  // y = M (I_4 kron B_2) x, with B_2 = [1 1; 1 -1]
  function automatic void mul_oprime(input int x [8], output int y [8]);
    int u [8];
    for (int k = 0; k < 4; k++) begin
      u[2*k]   = x[2*k] + x[2*k+1];
      u[2*k+1] = x[2*k] - x[2*k+1];
    end
    for (int r = 0; r < 8; r++) begin
      y[r] = 0;
      for (int c = 0; c < 8; c++) y[r] += M_MAT[r][c] * u[c];
    end
  endfunction

  // A random signed value of w bits; every 8th draw is an extreme.
  function automatic int rand_signed(int w);
    int unsigned sel = $urandom % 16;
    if (sel == 0) return -(1 <<< (w-1));
    if (sel == 1) return (1 <<< (w-1)) - 1;
    return int'($urandom % (1 << w)) - (1 <<< (w-1));
  endfunction

endpackage
