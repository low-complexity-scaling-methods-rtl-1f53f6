// tb_tn_core -- self-checking test of the pipelined N-point core.
// Four instances, with the rounded DCT, the signed DCT, a test matrix holding +-2
// entries, and a test matrix whose even rows do not split a second time (so the core
// takes its direct even-row path), are fed a new random vector on most cycles (with idle
// gaps). Each result is compared with the product by round(2*C_8) or sign(C_8), computed
// here from cosines, or by the test matrix, and must appear exactly TN_LATENCY = 2
// cycles after its input.
module tb_tn_core;
  import dct_scaling_pkg::*;
  import tb_ref_pkg::rmat_t, tb_ref_pkg::core_matrix;
  localparam int IW = BF_W;
  localparam int OW = IW + TN_GROWTH;

  logic clk = 0, rst = 1, in_valid = 0;
  logic signed [IW-1:0] x [N];
  logic               ov [4];
  logic signed [OW-1:0] y [4][N];

  // A DCT-symmetric matrix with coefficients of magnitude 2, to exercise the shifts.
  localparam coef_mat_t TWOS = '{
    '{ 3'sd1,  3'sd1,  3'sd1,  3'sd1,  3'sd1,  3'sd1,  3'sd1,  3'sd1},
    '{ 3'sd2,  3'sd2,  3'sd1,  3'sd0,  3'sd0, -3'sd1, -3'sd2, -3'sd2},
    '{ 3'sd2,  3'sd1, -3'sd1, -3'sd2, -3'sd2, -3'sd1,  3'sd1,  3'sd2},
    '{ 3'sd2,  3'sd0, -3'sd2, -3'sd1,  3'sd1,  3'sd2,  3'sd0, -3'sd2},
    '{ 3'sd1, -3'sd1, -3'sd1,  3'sd1,  3'sd1, -3'sd1, -3'sd1,  3'sd1},
    '{ 3'sd1, -3'sd2,  3'sd0,  3'sd2, -3'sd2,  3'sd0,  3'sd2, -3'sd1},
    '{ 3'sd1, -3'sd2,  3'sd2, -3'sd1, -3'sd1,  3'sd2, -3'sd2,  3'sd1},
    '{ 3'sd0, -3'sd1,  3'sd2, -3'sd2,  3'sd2, -3'sd2,  3'sd1,  3'sd0}
  };
  // DCT-symmetric, but rows 0 and 2 break the second-level even symmetry.
  localparam coef_mat_t NOSPLIT = '{
    '{ 3'sd1,  3'sd2,  3'sd0,  3'sd1,  3'sd1,  3'sd0,  3'sd2,  3'sd1},
    '{ 3'sd2,  3'sd2,  3'sd1,  3'sd0,  3'sd0, -3'sd1, -3'sd2, -3'sd2},
    '{ 3'sd2,  3'sd1,  3'sd0, -3'sd1, -3'sd1,  3'sd0,  3'sd1,  3'sd2},
    '{ 3'sd2,  3'sd0, -3'sd2, -3'sd1,  3'sd1,  3'sd2,  3'sd0, -3'sd2},
    '{ 3'sd1, -3'sd1, -3'sd1,  3'sd1,  3'sd1, -3'sd1, -3'sd1,  3'sd1},
    '{ 3'sd1, -3'sd2,  3'sd0,  3'sd2, -3'sd2,  3'sd0,  3'sd2, -3'sd1},
    '{-3'sd1, -3'sd2,  3'sd2, -3'sd1, -3'sd1,  3'sd2, -3'sd2, -3'sd1},
    '{ 3'sd0, -3'sd1,  3'sd2, -3'sd2,  3'sd2, -3'sd2,  3'sd1,  3'sd0}
  };
  int checks = 0, failures = 0, cycle = 0;

  tn_core #(.MATRIX(RDCT_8), .IW(IW)) dut_r (.clk, .rst, .in_valid, .x, .out_valid(ov[0]), .y(y[0]));
  tn_core #(.MATRIX(SDCT_8), .IW(IW)) dut_s (.clk, .rst, .in_valid, .x, .out_valid(ov[1]), .y(y[1]));
  tn_core #(.MATRIX(TWOS),   .IW(IW)) dut_t (.clk, .rst, .in_valid, .x, .out_valid(ov[2]), .y(y[2]));
  tn_core #(.MATRIX(NOSPLIT), .IW(IW)) dut_n (.clk, .rst, .in_valid, .x, .out_valid(ov[3]), .y(y[3]));

  always #5 clk = ~clk;
  always @(posedge clk) cycle++;

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // expected outputs queued with the cycle they must appear at
  int exp_mem [8192][N*4];
  int due_mem [8192];
  int wr_ptr = 0, rd_ptr = 0;
  rmat_t mr, ms;

  initial begin
    mr = core_matrix(0);
    ms = core_matrix(1);
    // the first three cores must take the shared-butterfly path, the fourth must not
    checks += 4;
    if (!has_even_split(RDCT_8) || !has_even_split(SDCT_8) || !has_even_split(TWOS)) failures++;
    if (has_even_split(NOSPLIT)) failures++;
    repeat (3) @(posedge clk);
    rst <= 0;
    for (int t = 0; t < 4000; t++) begin
      @(negedge clk);
      in_valid = ($urandom_range(0, 3) != 0);
      for (int n = 0; n < N; n++) begin
        if (t < 4) x[n] = (t % 2 == 1) ? IW'(255) : -IW'(255);
        else       x[n] = IW'(int'($urandom_range(0, 510)) - 255);
      end
      if (in_valid) begin
        for (int k = 0; k < N; k++) begin
          real sr, ss;
          int st, sn;
          sr = 0.0;
          ss = 0.0;
          st = 0;
          sn = 0;
          for (int n = 0; n < N; n++) begin
            sr += mr[k][n] * real'(x[n]);
            ss += ms[k][n] * real'(x[n]);
            st += int'($signed(TWOS[k][n])) * int'(x[n]);
            sn += int'($signed(NOSPLIT[k][n])) * int'(x[n]);
          end
          exp_mem[wr_ptr][2*N+k] = st;
          exp_mem[wr_ptr][3*N+k] = sn;
          exp_mem[wr_ptr][k]   = int'(sr);
          exp_mem[wr_ptr][N+k] = int'(ss);
        end
        due_mem[wr_ptr] = cycle + TN_LATENCY;
        wr_ptr++;
      end
    end
    @(negedge clk) in_valid = 0;
    repeat (5) @(posedge clk);
    checks++;
    if (rd_ptr != wr_ptr) begin
      failures++;
      $display("%0d results never appeared", wr_ptr - rd_ptr);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) begin
    #1;
    if (!rst) begin
      checks++;
      if (ov[0] != ov[1] || ov[0] != ov[2] || ov[0] != ov[3]) failures++;
      if (ov[0]) begin
        if (rd_ptr == wr_ptr) begin
          failures++;
          $display("unexpected output at cycle %0d", cycle);
        end else begin
          checks++;
          if (due_mem[rd_ptr] != cycle) begin
            failures++;
            $display("latency wrong: due %0d now %0d", due_mem[rd_ptr], cycle);
          end
          for (int k = 0; k < N; k++) begin
            checks += 2;
            if (int'(y[0][k]) != exp_mem[rd_ptr][k]) begin
              failures++;
              if (failures < 10) $display("RDCT k=%0d got %0d exp %0d", k, y[0][k], exp_mem[rd_ptr][k]);
            end
            if (int'(y[1][k]) != exp_mem[rd_ptr][N+k]) begin
              failures++;
              if (failures < 10) $display("SDCT k=%0d got %0d exp %0d", k, y[1][k], exp_mem[rd_ptr][N+k]);
            end
            checks++;
            if (int'(y[2][k]) != exp_mem[rd_ptr][2*N+k]) begin
              failures++;
              if (failures < 10) $display("TWOS k=%0d got %0d exp %0d", k, y[2][k], exp_mem[rd_ptr][2*N+k]);
            end
            checks++;
            if (int'(y[3][k]) != exp_mem[rd_ptr][3*N+k]) begin
              failures++;
              if (failures < 10) $display("NOSPLIT k=%0d got %0d exp %0d", k, y[3][k], exp_mem[rd_ptr][3*N+k]);
            end
          end
          rd_ptr++;
        end
      end
    end
  end
endmodule
