// tb_testbed_ctrl -- self-checking test of the controller state machine.
//
// The controller talks to the behavioural UART model; in place of the transform a
// simple stand-in with a different latency (y[k] = 3*x[15-k] - k after 7 cycles) is used,
// so that the check concerns only the controller: every received byte must reach the
// right transform input, every coefficient must come back as two bytes, low byte first,
// sign-extended, and blocks must follow one another. The host pushes bytes slowly and the
// UART drains slowly, so both "receive FIFO empty" and "transmit FIFO full" polling occur.
module tb_testbed_ctrl;
  import dct_scaling_pkg::*;
  localparam int BLOCKS = 6;
  localparam int LAT = 7;

  logic clk = 0, rst = 1;
  logic [3:0]  awaddr, araddr;
  logic        awvalid, awready, wvalid, wready, bvalid, bready;
  logic        arvalid, arready, rvalid, rready;
  logic [31:0] wdata, rdata;
  logic [3:0]  wstrb;
  logic [1:0]  bresp, rresp;
  logic        t_in_valid, t_out_valid;
  logic signed [IN_W-1:0]  t_x [TWO_N];
  logic signed [OUT_W-1:0] t_y [TWO_N];
  logic [15:0] block_count;
  logic        resp_error;
  logic        rx_push = 0, rx_full, tx_valid;
  logic [7:0]  rx_byte = 0, tx_byte;
  int          rx_empty_polls, tx_full_polls;
  int checks = 0, failures = 0;

  testbed_ctrl dut (
    .clk, .rst,
    .m_awaddr(awaddr), .m_awvalid(awvalid), .m_awready(awready), .m_wdata(wdata),
    .m_wstrb(wstrb), .m_wvalid(wvalid), .m_wready(wready), .m_bresp(bresp),
    .m_bvalid(bvalid), .m_bready(bready), .m_araddr(araddr), .m_arvalid(arvalid),
    .m_arready(arready), .m_rdata(rdata), .m_rresp(rresp), .m_rvalid(rvalid),
    .m_rready(rready), .t_in_valid, .t_x, .t_out_valid, .t_y, .block_count, .resp_error
  );

  uart_lite_model #(.TX_GAP(20)) uart (
    .clk, .rst,
    .s_awaddr(awaddr), .s_awvalid(awvalid), .s_awready(awready), .s_wdata(wdata),
    .s_wstrb(wstrb), .s_wvalid(wvalid), .s_wready(wready), .s_bresp(bresp),
    .s_bvalid(bvalid), .s_bready(bready), .s_araddr(araddr), .s_arvalid(arvalid),
    .s_arready(arready), .s_rdata(rdata), .s_rresp(rresp), .s_rvalid(rvalid),
    .s_rready(rready), .rx_push, .rx_byte, .rx_full, .tx_valid, .tx_byte,
    .rx_empty_polls, .tx_full_polls
  );

  // stand-in transform: fixed latency, easily predicted outputs
  logic                    sv [LAT];
  logic signed [OUT_W-1:0] sy [LAT][TWO_N];
  always_ff @(posedge clk) begin
    sv[0] <= rst ? 1'b0 : t_in_valid;
    for (int k = 0; k < TWO_N; k++) sy[0][k] <= OUT_W'(3 * int'(t_x[TWO_N-1-k]) - k);
    for (int i = 1; i < LAT; i++) begin
      sv[i] <= rst ? 1'b0 : sv[i-1];
      sy[i] <= sy[i-1];
    end
  end
  assign t_out_valid = sv[LAT-1];
  assign t_y = sy[LAT-1];

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int sent [BLOCKS][TWO_N];
  int got_bytes = 0;
  logic [7:0] got [BLOCKS*TWO_N*2];

  always @(posedge clk) if (!rst && tx_valid) begin
    got[got_bytes] = tx_byte;
    got_bytes++;
  end

  initial begin
    repeat (4) @(posedge clk);
    rst <= 0;
    for (int b = 0; b < BLOCKS; b++) begin
      for (int i = 0; i < TWO_N; i++) begin
        sent[b][i] = (b == 0) ? ((i % 2) ? 127 : -128) : int'($urandom_range(0, 255)) - 128;
        repeat ($urandom_range(1, 12)) @(posedge clk);
        @(negedge clk);
        while (rx_full) @(negedge clk);
        rx_push = 1;
        rx_byte = 8'(sent[b][i]);
        @(negedge clk);
        rx_push = 0;
      end
    end
    wait (got_bytes == BLOCKS * TWO_N * 2);
    repeat (10) @(posedge clk);
    for (int b = 0; b < BLOCKS; b++)
      for (int k = 0; k < TWO_N; k++) begin
        automatic int e = 3 * sent[b][TWO_N-1-k] - k;
        automatic int g = int'($signed({got[(b*TWO_N+k)*2+1], got[(b*TWO_N+k)*2]}));
        checks++;
        if (g != e) begin
          failures++;
          if (failures < 10) $display("block %0d coef %0d: got %0d exp %0d", b, k, g, e);
        end
      end
    checks++;
    if (block_count != 16'(BLOCKS)) begin
      failures++;
      $display("block_count %0d, expected %0d", block_count, BLOCKS);
    end
    checks++;
    if (got_bytes != BLOCKS * TWO_N * 2 || resp_error) failures++;
    checks++;
    if (rx_empty_polls == 0) begin failures++; $display("receive-empty polling never happened"); end
    checks++;
    if (tx_full_polls == 0) begin failures++; $display("transmit-full polling never happened"); end
    $display("receive-empty polls %0d, transmit-full polls %0d", rx_empty_polls, tx_full_polls);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
