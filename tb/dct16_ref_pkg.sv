// dct16_ref_pkg: reference matrices for the testbenches.
//
// T is the 16x16 approximate DCT matrix, entered row by row. M1..M4 are the
// sparse factors of T, built here from their block definitions:
//   M1 = [[I8, J8], [J8, -I8]], M2 = diag(B8, B8), B8 = [[I4, J4], [J4, -I4]],
//   M3 = diag(A, B, C, D) (4x4 blocks below), M4 = diag(H, I6, H, I6),
// where I is the identity, J the counter-identity and H = [[1,1],[1,-1]].
// Results are computed with plain integer matrix-vector products, so they do
// not depend on how the RTL arranges its adders.
package dct16_ref_pkg;
  typedef int mat_t [16][16];
  typedef int vec_t [16];

  localparam mat_t T = '{
    '{ 1, 1, 1, 1, 1, 1, 1, 1, 1, 1, 1, 1, 1, 1, 1, 1},
    '{ 1, 1, 1, 1, 1, 1, 1, 1,-1,-1,-1,-1,-1,-1,-1,-1},
    '{ 1, 1, 1, 0, 0,-1,-1,-1,-1,-1,-1, 0, 0, 1, 1, 1},
    '{ 1, 1, 0, 0, 0, 0,-1,-1, 1, 1, 0, 0, 0, 0,-1,-1},
    '{ 1, 0, 0,-1,-1, 0, 0, 1, 1, 0, 0,-1,-1, 0, 0, 1},
    '{ 1, 1,-1,-1,-1,-1, 1, 1,-1,-1, 1, 1, 1, 1,-1,-1},
    '{ 1, 0,-1,-1, 1, 1, 0,-1,-1, 0, 1, 1,-1,-1, 0, 1},
    '{ 0, 0,-1, 1, 1,-1,-1, 1,-1, 1, 1,-1,-1, 1, 0, 0},
    '{ 1,-1,-1, 1, 1,-1,-1, 1, 1,-1,-1, 1, 1,-1,-1, 1},
    '{ 1,-1,-1, 1, 0, 0, 1,-1, 1,-1, 0, 0,-1, 1, 1,-1},
    '{ 1,-1, 0, 1,-1, 0, 1,-1,-1, 1, 0,-1, 1, 0,-1, 1},
    '{ 0, 0, 1, 1,-1,-1, 0, 0, 0, 0, 1, 1,-1,-1, 0, 0},
    '{ 0,-1, 1, 0, 0, 1,-1, 0, 0,-1, 1, 0, 0, 1,-1, 0},
    '{ 1,-1, 1,-1, 1,-1, 0, 0, 0, 0, 1,-1, 1,-1, 1,-1},
    '{ 0,-1, 1,-1, 1,-1, 1, 0, 0, 1,-1, 1,-1, 1,-1, 0},
    '{ 1,-1, 0, 0,-1, 1,-1, 1,-1, 1,-1, 1, 0, 0, 1,-1}
  };

  typedef int blk4_t [4][4];
  localparam blk4_t M3A = '{'{1,0,0,1}, '{0,1,1,0}, '{0,-1,1,0}, '{1,0,0,-1}};
  localparam blk4_t M3B = '{'{0,1,1,1}, '{-1,-1,0,1}, '{-1,1,-1,0}, '{1,0,-1,1}};
  localparam blk4_t M3C = '{'{1,0,0,1}, '{0,1,1,0}, '{0,-1,1,0}, '{-1,0,0,1}};
  localparam blk4_t M3D = '{'{0,1,1,1}, '{1,1,0,-1}, '{1,-1,1,0}, '{1,0,-1,1}};

  // Butterfly [[I, J], [J, -I]] of size n placed at offset b.
  function automatic void put_bfly(ref mat_t m, input int b, input int n);
    for (int i = 0; i < n; i++) begin
      if (i < n/2) begin
        m[b+i][b+i]     += 1;
        m[b+i][b+n-1-i] += 1;
      end else begin
        m[b+i][b+n-1-i] += 1;
        m[b+i][b+i]     -= 1;
      end
    end
  endfunction

  function automatic mat_t zero();
    mat_t m;
    foreach (m[r, c]) m[r][c] = 0;
    return m;
  endfunction

  function automatic mat_t m1();
    mat_t m = zero();
    put_bfly(m, 0, 16);
    return m;
  endfunction

  function automatic mat_t m2();
    mat_t m = zero();
    put_bfly(m, 0, 8);
    put_bfly(m, 8, 8);
    return m;
  endfunction

  function automatic mat_t m3();
    mat_t m = zero();
    for (int r = 0; r < 4; r++)
      for (int c = 0; c < 4; c++) begin
        m[r][c]       = M3A[r][c];
        m[4+r][4+c]   = M3B[r][c];
        m[8+r][8+c]   = M3C[r][c];
        m[12+r][12+c] = M3D[r][c];
      end
    return m;
  endfunction

  function automatic mat_t m4();
    mat_t m = zero();
    for (int i = 0; i < 16; i++) m[i][i] = 1;
    m[0][1] = 1;  m[1][0] = 1;  m[1][1] = -1;
    m[8][9] = 1;  m[9][8] = 1;  m[9][9] = -1;
    return m;
  endfunction

  function automatic vec_t mul(mat_t m, vec_t v);
    vec_t r;
    foreach (r[i]) begin
      r[i] = 0;
      for (int j = 0; j < 16; j++) r[i] += m[i][j] * v[j];
    end
    return r;
  endfunction

  // Uniform random value in [-2^(w-1), 2^(w-1)-1]; every 8th draw is an
  // extreme value to exercise the word-width bounds.
  function automatic int rnd_signed(int w);
    int lo = -(1 << (w-1));
    int hi = (1 << (w-1)) - 1;
    case ($urandom_range(15))
      0: return lo;
      1: return hi;
      default: return lo + int'($urandom_range(hi - lo));
    endcase
  endfunction
endpackage
