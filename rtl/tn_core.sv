// tn_core -- pipelined, multiplierless N-point low-complexity DCT-II approximation T_N.
//
// Computes y = T_N * x for an N x N integer matrix MATRIX with entries in {0,+-1,+-2}.
// Two of these cores sit side by side in the scaled 2N-point transform. The published
// build uses the angle-based 8-point approximation (ABDCT) with its own fast algorithm;
// its coefficients are not reproduced here, so the core is written for any matrix that
// has the DCT-II symmetry (even rows symmetric, odd rows antisymmetric), and the default
// is the rounded DCT round(2*C_8). The structure is this design's own:
//   stage 1: even/odd butterfly  s[n] = x[n] + x[N-1-n],  d[n] = x[n] - x[N-1-n]
//            (n < N/2), registered;
//   stage 2: odd rows   y[k] = sum_n MATRIX[k][n] * d[n],   n < N/2;
//            even rows, when the matrix allows it (SPLIT, see has_even_split), go
//            through a shared second butterfly e[n] = s[n] + s[N/2-1-n],
//            f[n] = s[n] - s[N/2-1-n] (n < N/4): y[k] = sum_n MATRIX[k][n] * e[n] for
//            k = 0 mod 4 and sum_n MATRIX[k][n] * f[n] for k = 2 mod 4; otherwise
//            y[k] = sum_n MATRIX[k][n] * s[n]; all registered.
// A coefficient of magnitude 2 is a left shift, a sign is a subtraction, a zero costs
// nothing; there are no multipliers. With the rounded DCT this is 22 additions, the
// count of its usual fast algorithm. Latency TN_LATENCY = 2 cycles, one vector per
// cycle, in_valid travels with the data. Only the valid bits are reset (synchronous,
// active high).
module tn_core
  import dct_scaling_pkg::*;
#(
  parameter coef_mat_t MATRIX = RDCT_8,               // T_N, indexed [k][n]
  parameter int        IW     = dct_scaling_pkg::BF_W // input word length
) (
  input  logic                           clk,
  input  logic                           rst,
  input  logic                           in_valid,
  input  logic signed [IW-1:0]           x [N],
  output logic                           out_valid,
  output logic signed [IW+TN_GROWTH-1:0] y [N]
);

  localparam int OW = IW + TN_GROWTH;
  localparam int H  = N / 2;
  localparam int Q  = N / 4;
  localparam bit SPLIT = has_even_split(MATRIX);

  if (!has_dct_symmetry(MATRIX)) begin : g_bad_matrix
    $error("tn_core: MATRIX lacks DCT-II even/odd symmetry or has an entry below -2");
  end

  // Product of a word by a coefficient in {-2..2}, done with a shift and a sign change.
  function automatic logic signed [OW-1:0] times(logic signed [OW-1:0] a, coef_t c);
    case (c)
      3'sd1:   return a;
      -3'sd1:  return -a;
      3'sd2:   return a <<< 1;
      -3'sd2:  return -(a <<< 1);
      default: return '0;
    endcase
  endfunction

  logic signed [IW:0] s_q [H];
  logic signed [IW:0] d_q [H];
  logic               v1_q;

  always_ff @(posedge clk) begin
    for (int n = 0; n < H; n++) begin
      s_q[n] <= (IW+1)'(x[n]) + (IW+1)'(x[N-1-n]);
      d_q[n] <= (IW+1)'(x[n]) - (IW+1)'(x[N-1-n]);
    end
    if (rst) v1_q <= 1'b0;
    else     v1_q <= in_valid;
  end

  logic signed [IW+1:0] e [Q];
  logic signed [IW+1:0] f [Q];
  logic signed [OW-1:0] y_d [N];

  always_comb begin
    for (int n = 0; n < Q; n++) begin
      e[n] = (IW+2)'(s_q[n]) + (IW+2)'(s_q[H-1-n]);
      f[n] = (IW+2)'(s_q[n]) - (IW+2)'(s_q[H-1-n]);
    end
    for (int k = 0; k < N; k++) begin
      y_d[k] = '0;
      if ((k % 2) == 1) begin
        for (int n = 0; n < H; n++) y_d[k] = y_d[k] + times(OW'(d_q[n]), MATRIX[k][n]);
      end else if (SPLIT && (k % 4) == 0) begin
        for (int n = 0; n < Q; n++) y_d[k] = y_d[k] + times(OW'(e[n]), MATRIX[k][n]);
      end else if (SPLIT) begin
        for (int n = 0; n < Q; n++) y_d[k] = y_d[k] + times(OW'(f[n]), MATRIX[k][n]);
      end else begin
        for (int n = 0; n < H; n++) y_d[k] = y_d[k] + times(OW'(s_q[n]), MATRIX[k][n]);
      end
    end
  end

  always_ff @(posedge clk) begin
    y <= y_d;
    if (rst) out_valid <= 1'b0;
    else     out_valid <= v1_q;
  end

endmodule
