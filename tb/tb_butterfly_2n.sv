// tb_butterfly_2n -- self-checking test of the 2N-point input butterfly.
// Drives random and extreme 8-bit vectors and compares u and v with the rows of
// [I Ibar; Ibar -I] computed here from the index rule of the counter-identity.
module tb_butterfly_2n;
  localparam int N = 8, W = 8;
  logic signed [W-1:0] x [2*N];
  logic signed [W:0]   u [N];
  logic signed [W:0]   v [N];
  int checks = 0, failures = 0;

  butterfly_2n #(.N(N), .W(W)) dut (.x(x), .u(u), .v(v));

  initial begin : watchdog
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 500; t++) begin
      for (int i = 0; i < 2*N; i++) begin
        case (t)
          0: x[i] = -8'sd128;
          1: x[i] = 8'sd127;
          2: x[i] = (i < N) ? 8'sd127 : -8'sd128;
          default: x[i] = W'($urandom);
        endcase
      end
      #1;
      for (int r = 0; r < 2*N; r++) begin
        automatic int expv = 0;
        // row r of [I Ibar; Ibar -I]
        for (int c = 0; c < 2*N; c++) begin
          automatic int coef = 0;
          if (r < N) coef = (c == r || c == 2*N-1-r) ? 1 : 0;
          else if (c < N) coef = (c == 2*N-1-r) ? 1 : 0;     // Ibar block
          else coef = (c == r) ? -1 : 0;                    // -I block
          expv += coef * int'(x[c]);
        end
        checks++;
        if (r < N ? (int'(u[r]) != expv) : (int'(v[r-N]) != expv)) begin
          failures++;
          if (failures < 10) $display("mismatch row %0d: got %0d exp %0d", r,
                                      r < N ? int'(u[r]) : int'(v[r-N]), expv);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
