// tb_scaled_dct_2n -- self-checking test of the 16-point scaled transform, all methods.
//
// Eight instances, one per method (JAM, I..VII), all with the rounded-DCT core, share
// one input stream. Three kinds of check:
//   1. streaming: random and extreme 8-bit blocks on most cycles; every output block is
//      compared with the stage-by-stage matrix reference of tb_ref_pkg and must appear
//      exactly T2N_LATENCY = 4 cycles after its input;
//   2. matrix: impulses 64*e_j recover every column of T_16, which must equal the real
//      matrix product P * diag(I,B_hat) * diag(T,T) * diag(I,G_hat) * butterfly;
//   3. orthogonality: T_16 * T_16^T must be diagonal for every method, the condition
//      under which the orthonormalised approximation is orthogonal.
module tb_scaled_dct_2n;
  import dct_scaling_pkg::*;
  import tb_ref_pkg::rmat2_t, tb_ref_pkg::t2n_matrix, tb_ref_pkg::t2n_apply;
  localparam int M = 8;          // number of methods

  logic clk = 0, rst = 1, in_valid = 0;
  logic signed [IN_W-1:0]  x [TWO_N];
  logic                    ov [M];
  logic signed [OUT_W-1:0] y  [M][TWO_N];
  int checks = 0, failures = 0, cycle = 0;

  for (genvar m = 0; m < M; m++) begin : g_dut
    scaled_dct_2n #(.METHOD(method_e'(m)), .TN_MATRIX(RDCT_8)) dut (
      .clk, .rst, .in_valid, .x, .out_valid(ov[m]), .y(y[m])
    );
  end

  always #5 clk = ~clk;
  always @(posedge clk) cycle++;

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  localparam int DEPTH = 4096;
  int in_mem  [DEPTH][TWO_N];
  int due_mem [DEPTH];
  int wr_ptr = 0, rd_ptr = 0;
  bit impulse_phase = 0;
  int col_mat [M][TWO_N][TWO_N];   // [method][row][column] recovered from impulses

  task automatic send(input int v [TWO_N]);
    @(negedge clk);
    in_valid = 1;
    for (int i = 0; i < TWO_N; i++) x[i] = IN_W'(v[i]);
    in_mem[wr_ptr] = v;
    due_mem[wr_ptr] = cycle + T2N_LATENCY;
    wr_ptr++;
  endtask

  task automatic idle();
    @(negedge clk);
    in_valid = 0;
    for (int i = 0; i < TWO_N; i++) x[i] = IN_W'($urandom);
  endtask

  initial begin
    int v [TWO_N];
    repeat (3) @(posedge clk);
    rst <= 0;
    // impulses first: block j is 64 * e_j
    impulse_phase = 1;
    for (int j = 0; j < TWO_N; j++) begin
      for (int i = 0; i < TWO_N; i++) v[i] = (i == j) ? 64 : 0;
      send(v);
    end
    idle();
    repeat (6) @(posedge clk);
    impulse_phase = 0;
    for (int t = 0; t < 3000; t++) begin
      for (int i = 0; i < TWO_N; i++) begin
        if (t == 0)      v[i] = -128;
        else if (t == 1) v[i] = 127;
        else if (t == 2) v[i] = (i % 2 == 1) ? 127 : -128;
        else if (t == 3) v[i] = (i < 8) ? 127 : -128;
        else             v[i] = int'($urandom_range(0, 255)) - 128;
      end
      if ($urandom_range(0, 4) == 0) idle();
      send(v);
    end
    idle();
    repeat (8) @(posedge clk);
    checks++;
    if (rd_ptr != wr_ptr) begin
      failures++;
      $display("%0d blocks never came out", wr_ptr - rd_ptr);
    end
    check_matrices();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // output monitor
  always @(posedge clk) begin
    #1;
    if (!rst) begin
      for (int m = 1; m < M; m++) begin
        checks++;
        if (ov[m] != ov[0]) failures++;
      end
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
          for (int m = 0; m < M; m++) begin
            int e [TWO_N];
            t2n_apply(m, 0, in_mem[rd_ptr], e);
            for (int k = 0; k < TWO_N; k++) begin
              checks++;
              if (int'(y[m][k]) != e[k]) begin
                failures++;
                if (failures < 12)
                  $display("method %0d block %0d X[%0d]: got %0d exp %0d", m, rd_ptr, k, y[m][k], e[k]);
              end
              if (rd_ptr < TWO_N) col_mat[m][k][rd_ptr] = int'(y[m][k]);
            end
          end
          rd_ptr++;
        end
      end
    end
  end

  task automatic check_matrices();
    for (int m = 0; m < M; m++) begin
      rmat2_t r = t2n_matrix(m, 0);
      int offdiag = 0;
      for (int i = 0; i < TWO_N; i++)
        for (int j = 0; j < TWO_N; j++) begin
          // hardware column is 64 * T_16[:, j]; 64 keeps the halved entry exact
          checks++;
          if (real'(col_mat[m][i][j]) != 64.0 * r[i][j]) begin
            failures++;
            if (failures < 12) $display("method %0d T[%0d][%0d] hw %0d/64 ref %f", m, i, j,
                                        col_mat[m][i][j], r[i][j]);
          end
        end
      for (int i = 0; i < TWO_N; i++)
        for (int j = 0; j < TWO_N; j++)
          if (i != j) begin
            longint dot = 0;
            for (int k = 0; k < TWO_N; k++) dot += longint'(col_mat[m][i][k]) * col_mat[m][j][k];
            if (dot != 0) offdiag++;
          end
      checks++;
      if (offdiag != 0) begin
        failures++;
        $display("method %0d: T*T^T has %0d nonzero off-diagonal entries", m, offdiag);
      end
    end
  endtask
endmodule
