// g_hat -- diagonal parameter matrix G_hat on the lower butterfly half.
//
// G_hat approximates G_N = diag(2(-1)^n cos((2n+1)pi/4N)) of the exact recursion by a
// matrix with entries +-1, so that it costs no multiplier:
//   SEL = G_IDENT : w[n] = v[n]              (G_hat = I_N; JAM and Methods I-III)
//   SEL = G_ALT   : w[n] = (-1)^n * v[n]     (G_hat = J_N; Methods IV-VII)
// Combinational. The word length is kept: the input is a difference of two words one bit
// narrower, so it never holds the most negative value and its negation cannot overflow.
// The two choices of G_hat are those of the method table; the coding is this design's.
module g_hat #(
  parameter dct_scaling_pkg::g_sel_e SEL = dct_scaling_pkg::G_ALT,            // G_hat = J_N, as in the default Method VI
  parameter int     N   = dct_scaling_pkg::N,
  parameter int     W   = dct_scaling_pkg::BF_W
) (
  input  logic signed [W-1:0] v [N],
  output logic signed [W-1:0] w [N]
);

  always_comb begin
    for (int n = 0; n < N; n++) begin
      if (SEL == dct_scaling_pkg::G_ALT && (n % 2) == 1) w[n] = -v[n];
      else                              w[n] =  v[n];
    end
  end

endmodule
