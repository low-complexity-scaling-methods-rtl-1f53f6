// tb_g_hat -- self-checking test of the G_hat stage for both choices, I_N and J_N.
// The expected outputs are the product with the explicit diagonal matrix.
module tb_g_hat;
  import dct_scaling_pkg::*;
  localparam int W = BF_W;
  logic signed [W-1:0] v  [N];
  logic signed [W-1:0] wi [N];
  logic signed [W-1:0] wj [N];
  int checks = 0, failures = 0;

  g_hat #(.SEL(G_IDENT)) dut_i (.v(v), .w(wi));
  g_hat #(.SEL(G_ALT))   dut_j (.v(v), .w(wj));

  initial begin : watchdog
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 300; t++) begin
      for (int n = 0; n < N; n++) v[n] = W'(int'($urandom_range(0, 510)) - 255);
      #1;
      for (int n = 0; n < N; n++) begin
        automatic int jn = (n % 2 == 0) ? 1 : -1;    // J_N = diag((-1)^n)
        checks += 2;
        if (int'(wi[n]) != int'(v[n]))      failures++;
        if (int'(wj[n]) != jn * int'(v[n])) begin
          failures++;
          if (failures < 10) $display("J mismatch n=%0d got %0d v %0d", n, wj[n], v[n]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
