// tb_ref_pkg -- reference arithmetic for the testbenches of the scaled DCT-II datapath.
//
// Everything here is computed from first principles, independently of the RTL: the
// 8-point core matrices from cosines (round(2*C_8) and sign(C_8)), the parameter matrices
// B_hat and G_hat as explicit products of I, Ibar, J and Z, and the scaled transform as
// the matrix product P_2N * diag(I,B_hat) * diag(T_N,T_N) * diag(I,G_hat) * butterfly.
package tb_ref_pkg;

  localparam int N  = 8;
  localparam int N2 = 16;

  typedef real rmat_t  [N][N];
  typedef real rmat2_t [N2][N2];

  // Orthonormal DCT-II entry C_N[k][n].
  function automatic real dct_entry(int k, int n);
    real beta = (k == 0) ? 1.0 / $sqrt(2.0) : 1.0;
    return $sqrt(2.0 / N) * beta * $cos(k * (2 * n + 1) * 3.14159265358979323846 / (2 * N));
  endfunction

  // round(2*C_8) (rounded DCT) when kind == 0, sign(C_8) (signed DCT) when kind == 1.
  function automatic rmat_t core_matrix(int kind);
    rmat_t m;
    for (int k = 0; k < N; k++)
      for (int n = 0; n < N; n++) begin
        real c = dct_entry(k, n);
        if (kind == 0) m[k][n] = $floor(2.0 * c + 0.5);
        else           m[k][n] = (c >= 0.0) ? 1.0 : -1.0;
      end
    return m;
  endfunction

  function automatic rmat_t mul(rmat_t a, rmat_t b);
    rmat_t r;
    for (int i = 0; i < N; i++)
      for (int j = 0; j < N; j++) begin
        r[i][j] = 0.0;
        for (int k = 0; k < N; k++) r[i][j] += a[i][k] * b[k][j];
      end
    return r;
  endfunction

  function automatic rmat_t eye();
    rmat_t r;
    for (int i = 0; i < N; i++) for (int j = 0; j < N; j++) r[i][j] = (i == j) ? 1.0 : 0.0;
    return r;
  endfunction

  function automatic rmat_t counter_eye();
    rmat_t r;
    for (int i = 0; i < N; i++) for (int j = 0; j < N; j++) r[i][j] = (i + j == N - 1) ? 1.0 : 0.0;
    return r;
  endfunction

  function automatic rmat_t jmat();
    rmat_t r = eye();
    for (int i = 0; i < N; i++) r[i][i] = (i % 2 == 0) ? 1.0 : -1.0;
    return r;
  endfunction

  function automatic rmat_t zmat();
    rmat_t r = eye();
    r[0][0] = 0.5;
    return r;
  endfunction

  function automatic rmat_t neg(rmat_t a);
    rmat_t r;
    for (int i = 0; i < N; i++) for (int j = 0; j < N; j++) r[i][j] = -a[i][j];
    return r;
  endfunction

  // B_hat of method m (0 = JAM, 1..7 = Methods I..VII), from Table of methods.
  function automatic rmat_t bmat(int m);
    case (m % 4)
      0: return eye();
      1: return counter_eye();
      2: return neg(mul(counter_eye(), jmat()));
      default: return neg(mul(mul(counter_eye(), zmat()), jmat()));
    endcase
  endfunction

  // G_hat of method m.
  function automatic rmat_t gmat(int m);
    return (m >= 4) ? jmat() : eye();
  endfunction

  // Full T_2N as a real matrix for method m and core kind.
  function automatic rmat2_t t2n_matrix(int m, int kind);
    rmat2_t bf, mid, r;
    rmat_t t = core_matrix(kind);
    rmat_t tg = mul(t, gmat(m));
    rmat_t btg = mul(bmat(m), tg);
    // butterfly [I Ibar; Ibar -I]
    for (int i = 0; i < N2; i++) for (int j = 0; j < N2; j++) bf[i][j] = 0.0;
    for (int n = 0; n < N; n++) begin
      bf[n][n] = 1.0;         bf[n][N2-1-n] = 1.0;
      bf[N+n][N-1-n] = 1.0;   bf[N+n][N+n] = -1.0;
    end
    // middle = diag(T, B*T*G)
    for (int i = 0; i < N2; i++) for (int j = 0; j < N2; j++) mid[i][j] = 0.0;
    for (int i = 0; i < N; i++) for (int j = 0; j < N; j++) begin
      mid[i][j] = t[i][j];
      mid[N+i][N+j] = btg[i][j];
    end
    // r = P * mid * bf, with P moving row n to p_n (2n, or 2(n-N)+1)
    for (int i = 0; i < N2; i++) begin
      int dst = (i < N) ? 2 * i : 2 * (i - N) + 1;
      for (int j = 0; j < N2; j++) begin
        r[dst][j] = 0.0;
        for (int k = 0; k < N2; k++) r[dst][j] += mid[i][k] * bf[k][j];
      end
    end
    return r;
  endfunction

  // Integer reference of the datapath for one input vector: the stages as matrices, with
  // the one halving of Z rounded toward minus infinity (as the hardware shifts).
  function automatic void t2n_apply(int m, int kind, int x [N2], output int y [N2]);
    rmat_t t = core_matrix(kind);
    rmat_t g = gmat(m);
    rmat_t b = bmat(m);
    real  u [N], v [N], w [N], a [N], bb [N];
    for (int n = 0; n < N; n++) begin
      u[n] = x[n] + x[N2-1-n];
      v[n] = x[N-1-n] - x[N+n];
    end
    for (int i = 0; i < N; i++) begin
      w[i] = 0.0;
      for (int k = 0; k < N; k++) w[i] += g[i][k] * v[k];
    end
    for (int i = 0; i < N; i++) begin
      a[i] = 0.0; bb[i] = 0.0;
      for (int k = 0; k < N; k++) begin
        a[i]  += t[i][k] * u[k];
        bb[i] += t[i][k] * w[k];
      end
    end
    for (int i = 0; i < N; i++) begin
      real c = 0.0;
      for (int k = 0; k < N; k++)
        if (b[i][k] != 0.0) c += b[i][k] * bb[k];
      y[2*i]   = int'(a[i]);
      y[2*i+1] = int'($floor(c));   // exact except for the halved entry
      for (int k = 0; k < N; k++)
        if (b[i][k] == -0.5) y[2*i+1] = -int'($floor(bb[k] / 2.0));
        else if (b[i][k] == 0.5) y[2*i+1] = int'($floor(bb[k] / 2.0));
    end
  endfunction

endpackage
