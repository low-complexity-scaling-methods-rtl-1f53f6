// butterfly_2n -- input butterfly of the scaled 2N-point transform.
//
// Computes the rightmost factor of the factorisation, [I_N Ibar_N; Ibar_N -I_N] * x:
//   u[n] = x[n] + x[2N-1-n]          (upper half, feeds the first N-point core)
//   v[n] = x[N-1-n] - x[N+n]         (lower half, feeds G_hat and the second core)
// for n = 0 .. N-1. The two halves are the even/odd split of the DCT-II: u carries the
// part of the input that is even about the block centre, v the part that is odd.
// The block is purely combinational (2N adders); the register after it sits in
// scaled_dct_2n. Each output is one bit wider than the input, so nothing overflows.
// The butterfly itself is fixed by the factorisation; the word lengths are this design's.
module butterfly_2n #(
  parameter int N = dct_scaling_pkg::N,      // half size; the butterfly takes 2N inputs
  parameter int W = dct_scaling_pkg::IN_W    // input word length
) (
  input  logic signed [W-1:0] x [2*N],       // input vector x[0..2N-1]
  output logic signed [W:0]   u [N],         // x[n] + x[2N-1-n]
  output logic signed [W:0]   v [N]          // x[N-1-n] - x[N+n]
);

  always_comb begin
    for (int n = 0; n < N; n++) begin
      u[n] = (W+1)'(x[n])       + (W+1)'(x[2*N-1-n]);
      v[n] = (W+1)'(x[N-1-n])   - (W+1)'(x[N+n]);
    end
  end

endmodule
