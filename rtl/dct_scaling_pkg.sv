// dct_scaling_pkg -- shared sizes, types and constants of the scaled DCT-II datapath.
//
// The datapath computes T_2N * x, the 2N-point low-complexity transform built from two
// N-point transforms T_N by the factorisation
//   T_2N = P_2N * diag(I_N, B_hat) * diag(T_N, T_N) * diag(I_N, G_hat) * [I Ibar; Ibar -I].
// N = 8 (16-point output) and the 8-bit input word are the sizes of the published FPGA
// build. The eight scaling methods (JAM and Methods I..VII) differ only in the choice of
// the two parameter matrices B_hat and G_hat, which this package decodes from a method
// enum. The default 8-point core matrix is the rounded DCT, round(2*C_8), because the
// coefficients of the angle-based core used in the published build are not reproduced here;
// any 8-point matrix with entries in {0,+-1,+-2} and DCT-II even/odd symmetry can be used.
package dct_scaling_pkg;

  // Transform size of one core (N) and of the scaled transform (2N).
  localparam int N     = 8;
  localparam int TWO_N = 2 * N;

  // Input word length of the scaled transform (8 bits in the published build).
  localparam int IN_W  = 8;

  // Word growth of the N-point core: one bit for its internal even/odd butterfly and
  // three bits for a sum of N/2 = 4 terms with coefficient magnitude at most 2.
  localparam int TN_GROWTH = 4;

  // Word lengths along the scaled datapath.
  localparam int BF_W  = IN_W + 1;          // after the 2N-point butterfly
  localparam int OUT_W = BF_W + TN_GROWTH;  // after T_N, B_hat and the output shuffle

  // Latency of the N-point core and of the whole scaled transform, in clock cycles.
  localparam int TN_LATENCY  = 2;
  localparam int T2N_LATENCY = TN_LATENCY + 2;

  // Scaling methods of the family (JAM is the special case B_hat = G_hat = I).
  typedef enum logic [2:0] {
    METHOD_JAM = 3'd0,
    METHOD_I   = 3'd1,
    METHOD_II  = 3'd2,
    METHOD_III = 3'd3,
    METHOD_IV  = 3'd4,
    METHOD_V   = 3'd5,
    METHOD_VI  = 3'd6,
    METHOD_VII = 3'd7
  } method_e;

  // Choices of B_hat: I_N, Ibar_N, -Ibar_N*J_N, -Ibar_N*Z_N*J_N with Z_N = diag(1/2,1,...,1).
  typedef enum logic [1:0] {
    B_IDENT      = 2'd0,
    B_REV        = 2'd1,
    B_NEG_REV_J  = 2'd2,
    B_NEG_REV_ZJ = 2'd3
  } b_sel_e;

  // Choices of G_hat: I_N or J_N = diag((-1)^n).
  typedef enum logic {
    G_IDENT = 1'b0,
    G_ALT   = 1'b1
  } g_sel_e;

  function automatic b_sel_e b_sel_of(method_e m);
    case (m)
      METHOD_I,  METHOD_V:   return B_REV;
      METHOD_II, METHOD_VI:  return B_NEG_REV_J;
      METHOD_III, METHOD_VII: return B_NEG_REV_ZJ;
      default:               return B_IDENT;      // JAM, IV
    endcase
  endfunction

  function automatic g_sel_e g_sel_of(method_e m);
    return (m >= METHOD_IV) ? G_ALT : G_IDENT;    // Methods IV..VII use J_N
  endfunction

  // N x N integer matrix of a multiplierless core, indexed [k][n] (row k, column n);
  // entries lie in {-2,...,2}. Ascending ranges so that literals read row 0 first.
  typedef logic signed [2:0] coef_t;
  typedef coef_t     [0:N-1] coef_row_t;
  typedef coef_row_t [0:N-1] coef_mat_t;

  // Rounded DCT, round(2 * C_8^II), with C_8^II the orthonormal 8-point DCT-II.
  localparam coef_mat_t RDCT_8 = '{
    '{ 3'sd1,  3'sd1,  3'sd1,  3'sd1,  3'sd1,  3'sd1,  3'sd1,  3'sd1},  // k = 0
    '{ 3'sd1,  3'sd1,  3'sd1,  3'sd0,  3'sd0, -3'sd1, -3'sd1, -3'sd1},  // k = 1
    '{ 3'sd1,  3'sd0,  3'sd0, -3'sd1, -3'sd1,  3'sd0,  3'sd0,  3'sd1},  // k = 2
    '{ 3'sd1,  3'sd0, -3'sd1, -3'sd1,  3'sd1,  3'sd1,  3'sd0, -3'sd1},  // k = 3
    '{ 3'sd1, -3'sd1, -3'sd1,  3'sd1,  3'sd1, -3'sd1, -3'sd1,  3'sd1},  // k = 4
    '{ 3'sd1, -3'sd1,  3'sd0,  3'sd1, -3'sd1,  3'sd0,  3'sd1, -3'sd1},  // k = 5
    '{ 3'sd0, -3'sd1,  3'sd1,  3'sd0,  3'sd0,  3'sd1, -3'sd1,  3'sd0},  // k = 6
    '{ 3'sd0, -3'sd1,  3'sd1, -3'sd1,  3'sd1, -3'sd1,  3'sd1,  3'sd0}   // k = 7
  };

  // Signed DCT, sign(C_8^II); every entry is +-1.
  localparam coef_mat_t SDCT_8 = '{
    '{ 3'sd1,  3'sd1,  3'sd1,  3'sd1,  3'sd1,  3'sd1,  3'sd1,  3'sd1},  // k = 0
    '{ 3'sd1,  3'sd1,  3'sd1,  3'sd1, -3'sd1, -3'sd1, -3'sd1, -3'sd1},  // k = 1
    '{ 3'sd1,  3'sd1, -3'sd1, -3'sd1, -3'sd1, -3'sd1,  3'sd1,  3'sd1},  // k = 2
    '{ 3'sd1, -3'sd1, -3'sd1, -3'sd1,  3'sd1,  3'sd1,  3'sd1, -3'sd1},  // k = 3
    '{ 3'sd1, -3'sd1, -3'sd1,  3'sd1,  3'sd1, -3'sd1, -3'sd1,  3'sd1},  // k = 4
    '{ 3'sd1, -3'sd1,  3'sd1,  3'sd1, -3'sd1, -3'sd1,  3'sd1, -3'sd1},  // k = 5
    '{ 3'sd1, -3'sd1,  3'sd1, -3'sd1, -3'sd1,  3'sd1, -3'sd1,  3'sd1},  // k = 6
    '{ 3'sd1, -3'sd1,  3'sd1, -3'sd1,  3'sd1, -3'sd1,  3'sd1, -3'sd1}   // k = 7
  };

  // True when every even row is symmetric, every odd row antisymmetric and every entry
  // lies in {-2,...,2}: the structure the core's even/odd butterfly relies on.
  function automatic bit has_dct_symmetry(coef_mat_t m);
    for (int k = 0; k < N; k++) begin
      for (int n = 0; n < N; n++) begin
        int a, b;
        a = int'($signed(m[k][n]));
        b = int'($signed(m[k][N-1-n]));
        if (a < -2) return 1'b0;
        if ((k % 2) == 0 && a != b)  return 1'b0;
        if ((k % 2) == 1 && a != -b) return 1'b0;
      end
    end
    return 1'b1;
  endfunction

  // True when the even rows also split one level further, as in the exact DCT: on
  // the half-length vector s, rows k = 0 mod 4 are symmetric and rows k = 2 mod 4 are
  // antisymmetric. A core can then share a second butterfly among the even rows.
  function automatic bit has_even_split(coef_mat_t m);
    for (int k = 0; k < N; k += 2) begin
      for (int n = 0; n < N / 2; n++) begin
        int a, b;
        a = int'($signed(m[k][n]));
        b = int'($signed(m[k][N/2-1-n]));
        if ((k % 4) == 0 && a != b)  return 1'b0;
        if ((k % 4) == 2 && a != -b) return 1'b0;
      end
    end
    return 1'b1;
  endfunction

endpackage
