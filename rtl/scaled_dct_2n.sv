// scaled_dct_2n -- 2N-point (16-point) scaled low-complexity DCT-II transform T_2N.
//
// Builds the 2N-point transform from two N-point cores following
//   T_2N = P_2N * diag(I_N, B_hat) * diag(T_N, T_N) * diag(I_N, G_hat) * [I Ibar; Ibar -I]
// which is the Hou recursion of the exact DCT-II with its two non-trivial factors B_N
// and G_N replaced by low-complexity parameter matrices. METHOD selects the pair
// (B_hat, G_hat) of one member of the family:
//   JAM (I,I)  I (Ibar,I)  II (-Ibar J,I)  III (-Ibar Z J,I)
//   IV (I,J)   V (Ibar,J)  VI (-Ibar J,J)  VII (-Ibar Z J,J)
// JAM is the earlier Jridi-Alfalou-Meher scaling; VI (the default) and VII give the
// lowest approximation error of the family, and VI needs no halving.
// Dataflow and timing (latency T2N_LATENCY = 4 cycles, one 2N-vector per cycle):
//   cycle 1: 2N-point butterfly and G_hat (combinational), registered;
//   cycles 2-3: two tn_core instances, upper on u, lower on G_hat * v;
//   cycle 4: B_hat on the lower core output and the perfect shuffle P_2N, registered:
//            y[2k] = upper[k], y[2k+1] = (B_hat * lower)[k].
// The orthonormalising diagonal Sigma_2N is not applied: as usual for such
// approximations it is left to a later scaling stage (e.g. quantisation).
// The factorisation and method table are the published ones; the pipeline registers,
// word lengths and handshake (a valid bit travelling with the data) are this design's.
module scaled_dct_2n
  import dct_scaling_pkg::*;
#(
  parameter method_e   METHOD    = METHOD_VI,
  parameter coef_mat_t TN_MATRIX = RDCT_8
) (
  input  logic                    clk,
  input  logic                    rst,          // synchronous, active high
  input  logic                    in_valid,
  input  logic signed [IN_W-1:0]  x [TWO_N],    // input block x[0..2N-1]
  output logic                    out_valid,
  output logic signed [OUT_W-1:0] y [TWO_N]     // coefficients X[0..2N-1] in natural order
);

  // ---- 2N-point butterfly and G_hat ------------------------------------------------
  logic signed [BF_W-1:0] u [N];
  logic signed [BF_W-1:0] v [N];
  logic signed [BF_W-1:0] w [N];

  butterfly_2n #(.N(N), .W(IN_W)) u_bfly (.x(x), .u(u), .v(v));

  g_hat #(.SEL(g_sel_of(METHOD)), .N(N), .W(BF_W)) u_g (.v(v), .w(w));

  logic signed [BF_W-1:0] u_q [N];
  logic signed [BF_W-1:0] w_q [N];
  logic                   v0_q;

  always_ff @(posedge clk) begin
    u_q <= u;
    w_q <= w;
    if (rst) v0_q <= 1'b0;
    else     v0_q <= in_valid;
  end

  // ---- two N-point cores --------------------------------------------------------------
  logic signed [OUT_W-1:0] a [N];     // T_N * u
  logic signed [OUT_W-1:0] b [N];     // T_N * G_hat * v
  logic                    va, vb;

  tn_core #(.MATRIX(TN_MATRIX), .IW(BF_W)) u_tn_upper (
    .clk, .rst, .in_valid(v0_q), .x(u_q), .out_valid(va), .y(a)
  );

  tn_core #(.MATRIX(TN_MATRIX), .IW(BF_W)) u_tn_lower (
    .clk, .rst, .in_valid(v0_q), .x(w_q), .out_valid(vb), .y(b)
  );

  // ---- B_hat and perfect shuffle ------------------------------------------------------
  logic signed [OUT_W-1:0] c [N];

  b_hat #(.SEL(b_sel_of(METHOD)), .N(N), .W(OUT_W)) u_b (.b(b), .c(c));

  always_ff @(posedge clk) begin
    for (int k = 0; k < N; k++) begin
      y[2*k]   <= a[k];
      y[2*k+1] <= c[k];
    end
    if (rst) out_valid <= 1'b0;
    else     out_valid <= va;
  end

  // The two cores run in lock step.
  a_cores_in_step: assert property (@(posedge clk) disable iff (rst) va == vb);

endmodule
