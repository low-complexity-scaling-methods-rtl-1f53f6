// b_hat -- parameter matrix B_hat on the output of the lower N-point core.
//
// B_hat approximates the dense matrix B_N = -Ibar_N * tril(U_N) * J_N of the exact
// recursion by a generalised permutation (one nonzero per row and column), so it is only
// wiring, sign changes and, for Z_N, one shift. With b the core output and c = B_hat * b:
//   SEL = B_IDENT      : c[k] = b[k]                              (I_N; JAM, Method IV)
//   SEL = B_REV        : c[k] = b[N-1-k]                          (Ibar_N; Methods I, V)
//   SEL = B_NEG_REV_J  : c[k] = -(-1)^(N-1-k) * b[N-1-k]          (-Ibar_N*J_N; II, VI)
//   SEL = B_NEG_REV_ZJ : as B_NEG_REV_J, but c[N-1] = -(b[0] >>> 1) (-Ibar_N*Z_N*J_N; III, VII)
// where Z_N = diag(1/2, 1, ..., 1). The halving is an arithmetic shift, i.e. it rounds
// toward minus infinity before the sign change; this rounding is this design's choice.
// Combinational. The word length is kept. Negation is safe as long as the core output
// never equals the most negative value of its word; that holds for every core matrix
// without a row made only of +-2 entries (the default rounded DCT reaches at most 2^11).
module b_hat #(
  parameter dct_scaling_pkg::b_sel_e SEL = dct_scaling_pkg::B_NEG_REV_J,      // -Ibar_N * J_N, as in the default Method VI
  parameter int     N   = dct_scaling_pkg::N,
  parameter int     W   = dct_scaling_pkg::OUT_W
) (
  input  logic signed [W-1:0] b [N],
  output logic signed [W-1:0] c [N]
);

  always_comb begin
    for (int k = 0; k < N; k++) begin
      case (SEL)
        dct_scaling_pkg::B_IDENT: c[k] = b[k];
        dct_scaling_pkg::B_REV:   c[k] = b[N-1-k];
        dct_scaling_pkg::B_NEG_REV_J: begin
          // (-1)^(N-1-k): a minus sign when N-1-k is odd, cancelled by the leading minus
          if (((N-1-k) % 2) == 1) c[k] =  b[N-1-k];
          else                    c[k] = -b[N-1-k];
        end
        default: begin                      // B_NEG_REV_ZJ
          if (k == N-1)                c[k] = -(b[0] >>> 1);
          else if (((N-1-k) % 2) == 1) c[k] =  b[N-1-k];
          else                         c[k] = -b[N-1-k];
        end
      endcase
    end
  end

endmodule
