// tb_b_hat -- self-checking test of the B_hat stage for its four choices
// (I, Ibar, -Ibar*J, -Ibar*Z*J). Expected outputs come from the explicit matrix
// products built in tb_ref_pkg; the halved entry is rounded toward minus infinity.
module tb_b_hat;
  import dct_scaling_pkg::*;
  import tb_ref_pkg::rmat_t, tb_ref_pkg::bmat;
  localparam int W = OUT_W;
  logic signed [W-1:0] b [N];
  logic signed [W-1:0] c [4][N];
  int checks = 0, failures = 0;

  b_hat #(.SEL(B_IDENT))      dut0 (.b(b), .c(c[0]));
  b_hat #(.SEL(B_REV))        dut1 (.b(b), .c(c[1]));
  b_hat #(.SEL(B_NEG_REV_J))  dut2 (.b(b), .c(c[2]));
  b_hat #(.SEL(B_NEG_REV_ZJ)) dut3 (.b(b), .c(c[3]));

  initial begin : watchdog
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 300; t++) begin
      for (int n = 0; n < N; n++) b[n] = W'(int'($urandom_range(0, 4000)) - 2000);
      if (t == 0) b[0] = -W'(7);      // odd negative value: exercises the rounding of Z
      #1;
      for (int s = 0; s < 4; s++) begin
        automatic rmat_t m = bmat(s);           // methods 0..3 carry the four B_hat choices
        for (int k = 0; k < N; k++) begin
          automatic int expv = 0;
          for (int j = 0; j < N; j++) begin
            if (m[k][j] == 0.5)       expv = int'($floor(real'(b[j]) / 2.0));
            else if (m[k][j] == -0.5) expv = -int'($floor(real'(b[j]) / 2.0));
            else if (m[k][j] != 0.0)  expv = int'(m[k][j]) * int'(b[j]);
          end
          checks++;
          if (int'(c[s][k]) != expv) begin
            failures++;
            if (failures < 10) $display("B%0d mismatch k=%0d got %0d exp %0d", s, k, c[s][k], expv);
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
