// tb_dct_testbed_top -- end-to-end test of the whole design at its default parameters.
//
// A host process pushes blocks of 16 signed bytes into the behavioural UART model at an
// uneven pace; the design fetches them over AXI4-Lite, transforms them with the default
// method and returns 32 bytes per block, which the UART model drains slowly. Every
// returned coefficient is compared with the stage-by-stage matrix reference of the
// scaled transform. The test also counts the mechanisms the exchange relies on and fails
// if one of them never happened: polling an empty receive FIFO, polling a full transmit
// FIFO, a block that follows another without a reset, and extreme input blocks.
module tb_dct_testbed_top;
  import dct_scaling_pkg::*;
  import tb_ref_pkg::t2n_apply;
  localparam int BLOCKS = 24;

  logic clk = 0, rst = 1;
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
  int checks = 0, failures = 0;

  dct_testbed_top dut (
    .clk, .rst,
    .m_awaddr(awaddr), .m_awvalid(awvalid), .m_awready(awready), .m_wdata(wdata),
    .m_wstrb(wstrb), .m_wvalid(wvalid), .m_wready(wready), .m_bresp(bresp),
    .m_bvalid(bvalid), .m_bready(bready), .m_araddr(araddr), .m_arvalid(arvalid),
    .m_arready(arready), .m_rdata(rdata), .m_rresp(rresp), .m_rvalid(rvalid),
    .m_rready(rready), .block_count, .resp_error
  );

  uart_lite_model #(.TX_GAP(16)) uart (
    .clk, .rst,
    .s_awaddr(awaddr), .s_awvalid(awvalid), .s_awready(awready), .s_wdata(wdata),
    .s_wstrb(wstrb), .s_wvalid(wvalid), .s_wready(wready), .s_bresp(bresp),
    .s_bvalid(bvalid), .s_bready(bready), .s_araddr(araddr), .s_arvalid(arvalid),
    .s_arready(arready), .s_rdata(rdata), .s_rresp(rresp), .s_rvalid(rvalid),
    .s_rready(rready), .rx_push, .rx_byte, .rx_full, .tx_valid, .tx_byte,
    .rx_empty_polls, .tx_full_polls
  );

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired: %0d bytes back, %0d blocks, ctrl state %0d", got_bytes, block_count, dut.u_ctrl.state);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int sent [BLOCKS][TWO_N];
  int got_bytes = 0;
  logic [7:0] got [BLOCKS*TWO_N*2];
  int extreme_blocks = 0;

  always @(posedge clk) if (!rst && tx_valid) begin
    got[got_bytes] = tx_byte;
    got_bytes++;
  end

  initial begin
    repeat (4) @(posedge clk);
    rst <= 0;
    for (int b = 0; b < BLOCKS; b++) begin
      for (int i = 0; i < TWO_N; i++) begin
        case (b)
          0: sent[b][i] = 127;
          1: sent[b][i] = -128;
          2: sent[b][i] = (i % 2) ? -128 : 127;
          3: sent[b][i] = (i < TWO_N / 2) ? 127 : -128;
          default: sent[b][i] = int'($urandom_range(0, 255)) - 128;
        endcase
      end
      if (b < 4) extreme_blocks++;
      for (int i = 0; i < TWO_N; i++) begin
        // bursts for some blocks, a slow trickle for others
        if (b % 3 == 1) repeat ($urandom_range(10, 40)) @(posedge clk);
        else            repeat ($urandom_range(0, 2)) @(posedge clk);
        @(negedge clk);
        while (rx_full) @(negedge clk);
        rx_push = 1;
        rx_byte = 8'(sent[b][i]);
        @(negedge clk);
        rx_push = 0;
      end
    end
    wait (got_bytes == BLOCKS * TWO_N * 2);
    repeat (20) @(posedge clk);
    for (int b = 0; b < BLOCKS; b++) begin
      int e [TWO_N];
      t2n_apply(int'(dut.METHOD), 0, sent[b], e);
      for (int k = 0; k < TWO_N; k++) begin
        automatic int g = int'($signed({got[(b*TWO_N+k)*2+1], got[(b*TWO_N+k)*2]}));
        checks++;
        if (g != e[k]) begin
          failures++;
          if (failures < 10) $display("block %0d X[%0d]: got %0d exp %0d", b, k, g, e[k]);
        end
      end
    end
    checks++;
    if (block_count != 16'(BLOCKS) || resp_error) begin
      failures++;
      $display("block_count %0d resp_error %0d", block_count, resp_error);
    end
    // every mechanism must have occurred at least once
    checks++; if (rx_empty_polls == 0) begin failures++; $display("no receive-empty poll"); end
    checks++; if (tx_full_polls == 0)  begin failures++; $display("no transmit-full poll"); end
    checks++; if (block_count < 2)     begin failures++; $display("no back-to-back blocks"); end
    checks++; if (extreme_blocks == 0) begin failures++; $display("no extreme blocks"); end
    $display("method %0d: blocks %0d, receive-empty polls %0d, transmit-full polls %0d, extreme blocks %0d",
             int'(dut.METHOD), block_count, rx_empty_polls, tx_full_polls, extreme_blocks);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
