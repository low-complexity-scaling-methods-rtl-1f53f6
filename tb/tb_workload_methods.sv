// tb_workload_methods -- the hardware experiment for all eight scaling methods.
//
// One complete test setup (controller, 16-point transform, behavioural UART) is built
// for each method: JAM and Methods I..VII, all with the rounded-DCT 8-point core. For
// every method a host process sends 16 impulse blocks (64 * e_j) followed by random
// blocks over the UART path and checks every returned coefficient against the matrix
// reference. The impulse responses give the 16 x 16 integer matrix T_16 the hardware
// realises; the test normalises its rows (the diagonal Sigma_16 applied outside the
// hardware) and reports the Frobenius distance to the exact 16-point DCT-II. It checks
// that T_16 * T_16^T is diagonal for every method and that Methods VI and VII end up
// closer to the exact DCT than the JAM method, as the analysis of the family predicts.
module tb_workload_methods;
  import dct_scaling_pkg::*;
  import tb_ref_pkg::t2n_apply;
  localparam int M = 8;
  localparam int RANDOM_BLOCKS = 8;
  localparam int BLOCKS = TWO_N + RANDOM_BLOCKS;

  logic clk = 0, rst = 1;
  int   checks = 0, failures = 0;
  real  frob [M];
  bit   done [M];

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (300000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic real dct16(int k, int n);
    real beta = (k == 0) ? 1.0 / $sqrt(2.0) : 1.0;
    return $sqrt(2.0 / TWO_N) * beta * $cos(k * (2 * n + 1) * 3.14159265358979323846 / (2 * TWO_N));
  endfunction

  for (genvar m = 0; m < M; m++) begin : g_setup
    logic [3:0]  awaddr, araddr;
    logic        awvalid, awready, wvalid, wready, bvalid, bready;
    logic        arvalid, arready, rvalid, rready;
    logic [31:0] wdata, rdata;
    logic [3:0]  wstrb;
    logic [1:0]  bresp, rresp;
    logic [15:0] block_count;
    logic        resp_error;
    logic        rx_push = 0, rx_full, tx_valid;
    logic [7:0]  rx_byte = 0, tx_byte;
    int          rx_empty_polls, tx_full_polls;
    int          sent [BLOCKS][TWO_N];
    logic [7:0]  got [BLOCKS*TWO_N*2];
    int          got_bytes = 0;
    int          tmat [TWO_N][TWO_N];

    dct_testbed_top #(.METHOD(method_e'(m))) dut (
      .clk, .rst,
      .m_awaddr(awaddr), .m_awvalid(awvalid), .m_awready(awready), .m_wdata(wdata),
      .m_wstrb(wstrb), .m_wvalid(wvalid), .m_wready(wready), .m_bresp(bresp),
      .m_bvalid(bvalid), .m_bready(bready), .m_araddr(araddr), .m_arvalid(arvalid),
      .m_arready(arready), .m_rdata(rdata), .m_rresp(rresp), .m_rvalid(rvalid),
      .m_rready(rready), .block_count, .resp_error
    );

    uart_lite_model #(.TX_GAP(4)) uart (
      .clk, .rst,
      .s_awaddr(awaddr), .s_awvalid(awvalid), .s_awready(awready), .s_wdata(wdata),
      .s_wstrb(wstrb), .s_wvalid(wvalid), .s_wready(wready), .s_bresp(bresp),
      .s_bvalid(bvalid), .s_bready(bready), .s_araddr(araddr), .s_arvalid(arvalid),
      .s_arready(arready), .s_rdata(rdata), .s_rresp(rresp), .s_rvalid(rvalid),
      .s_rready(rready), .rx_push, .rx_byte, .rx_full, .tx_valid, .tx_byte,
      .rx_empty_polls, .tx_full_polls
    );

    always @(posedge clk) if (!rst && tx_valid) begin
      got[got_bytes] = tx_byte;
      got_bytes++;
    end

    initial begin
      repeat (4) @(posedge clk);
      for (int b = 0; b < BLOCKS; b++)
        for (int i = 0; i < TWO_N; i++)
          sent[b][i] = (b < TWO_N) ? ((i == b) ? 64 : 0) : int'($urandom_range(0, 255)) - 128;
      for (int b = 0; b < BLOCKS; b++)
        for (int i = 0; i < TWO_N; i++) begin
          @(negedge clk);
          while (rx_full) @(negedge clk);
          rx_push = 1;
          rx_byte = 8'(sent[b][i]);
          @(negedge clk);
          rx_push = 0;
        end
      wait (got_bytes == BLOCKS * TWO_N * 2);
      $display("method %0d: %0d bytes back at %0t", m, got_bytes, $time);
      // compare every coefficient with the reference
      for (int b = 0; b < BLOCKS; b++) begin
        int e [TWO_N];
        t2n_apply(m, 0, sent[b], e);
        for (int k = 0; k < TWO_N; k++) begin
          automatic int g = int'($signed({got[(b*TWO_N+k)*2+1], got[(b*TWO_N+k)*2]}));
          checks++;
          if (g != e[k]) begin
            failures++;
            if (failures < 10) $display("method %0d block %0d X[%0d]: got %0d exp %0d", m, b, k, g, e[k]);
          end
          if (b < TWO_N) tmat[k][b] = g;   // column b of 64 * T_16
        end
      end
      // orthogonality and distance to the exact DCT after row normalisation
      begin
        automatic int offdiag = 0;
        automatic real f = 0.0;
        for (int i = 0; i < TWO_N; i++) begin
          automatic real nrm = 0.0;
          for (int k = 0; k < TWO_N; k++) nrm += real'(tmat[i][k] * tmat[i][k]);
          nrm = $sqrt(nrm);
          for (int k = 0; k < TWO_N; k++) begin
            automatic real dlt = real'(tmat[i][k]) / nrm - dct16(i, k);
            f += dlt * dlt;
          end
          for (int j = 0; j < TWO_N; j++)
            if (i != j) begin
              automatic longint dot = 0;
              for (int k = 0; k < TWO_N; k++) dot += longint'(tmat[i][k]) * tmat[j][k];
              if (dot != 0) offdiag++;
            end
        end
        checks++;
        if (offdiag != 0) begin
          failures++;
          $display("method %0d: T*T^T not diagonal (%0d entries)", m, offdiag);
        end
        frob[m] = $sqrt(f);
      end
      checks++;
      if (block_count != 16'(BLOCKS) || resp_error) failures++;
      done[m] = 1;
    end
  end

  initial begin
    repeat (2) @(posedge clk);
    rst <= 0;
    for (int m = 0; m < M; m++) wait (done[m]);
    for (int m = 0; m < M; m++)
      $display("method %s: ||C16_hat - C16||_F = %0.3f", m == 0 ? "JAM" : $sformatf("%0d", m), frob[m]);
    checks += 2;
    if (!(frob[6] < frob[0])) begin failures++; $display("Method VI not better than JAM"); end
    if (!(frob[7] < frob[0])) begin failures++; $display("Method VII not better than JAM"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
