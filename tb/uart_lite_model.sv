// uart_lite_model -- behavioural model of the UART core seen by the controller.
//
// Not synthesizable logic: a simulation model of an AXI4-Lite UART peripheral with the
// usual four registers (0x0 receive FIFO, 0x4 transmit FIFO, 0x8 status, 0xC control).
// Status bit 0 = receive FIFO holds data, bit 3 = transmit FIFO full.
// The serial line is not modelled: bytes "arrive from the host" through rx_push/rx_byte
// and "leave toward the host" on tx_valid/tx_byte, one every TX_GAP cycles, which is
// what makes the transmit FIFO fill up. AXI ready/valid responses are given after random
// delays. It also counts the status reads that found nothing to receive and the ones
// that found the transmit FIFO full.
module uart_lite_model #(
  parameter int FIFO_DEPTH = 16,
  parameter int TX_GAP     = 6
) (
  input  logic        clk,
  input  logic        rst,
  input  logic [3:0]  s_awaddr,
  input  logic        s_awvalid,
  output logic        s_awready,
  input  logic [31:0] s_wdata,
  input  logic [3:0]  s_wstrb,
  input  logic        s_wvalid,
  output logic        s_wready,
  output logic [1:0]  s_bresp,
  output logic        s_bvalid,
  input  logic        s_bready,
  input  logic [3:0]  s_araddr,
  input  logic        s_arvalid,
  output logic        s_arready,
  output logic [31:0] s_rdata,
  output logic [1:0]  s_rresp,
  output logic        s_rvalid,
  input  logic        s_rready,
  // host side
  input  logic        rx_push,
  input  logic [7:0]  rx_byte,
  output logic        rx_full,
  output logic        tx_valid,
  output logic [7:0]  tx_byte,
  // statistics
  output int          rx_empty_polls,
  output int          tx_full_polls
);

  logic [7:0] rxf [FIFO_DEPTH];
  logic [7:0] txf [FIFO_DEPTH];
  int rx_cnt, rx_rd, rx_wr;
  int tx_cnt, tx_rd, tx_wr;
  int gap;
  logic [3:0] wa;
  logic       have_aw, have_w;
  logic [7:0] wd;

  assign rx_full = (rx_cnt == FIFO_DEPTH);

  always_ff @(posedge clk) begin
    tx_valid <= 1'b0;
    if (rst) begin
      rx_cnt <= 0; rx_rd <= 0; rx_wr <= 0;
      tx_cnt <= 0; tx_rd <= 0; tx_wr <= 0; gap <= 0;
      s_awready <= 0; s_wready <= 0; s_bvalid <= 0; s_arready <= 0; s_rvalid <= 0;
      s_bresp <= 2'b00; s_rresp <= 2'b00; s_rdata <= '0;
      have_aw <= 0; have_w <= 0;
      rx_empty_polls <= 0; tx_full_polls <= 0;
    end else begin
      automatic int rxc = rx_cnt;
      automatic int txc = tx_cnt;
      // host pushes a received byte
      if (rx_push && rxc < FIFO_DEPTH) begin
        rxf[rx_wr] <= rx_byte;
        rx_wr <= (rx_wr + 1) % FIFO_DEPTH;
        rxc++;
      end
      // serial side drains the transmit FIFO
      if (gap > 0) gap <= gap - 1;
      else if (txc > 0) begin
        tx_valid <= 1'b1;
        tx_byte  <= txf[tx_rd];
        tx_rd    <= (tx_rd + 1) % FIFO_DEPTH;
        txc--;
        gap      <= TX_GAP;
      end
      // read channel
      s_arready <= 1'b0;
      if (s_rvalid && s_rready) s_rvalid <= 1'b0;
      if (s_arvalid && !s_arready && !s_rvalid && ($urandom_range(0, 2) == 0)) begin
        s_arready <= 1'b1;
        s_rvalid  <= 1'b1;
        s_rresp   <= 2'b00;
        case (s_araddr)
          4'h0: begin
            if (rx_cnt > 0) begin
              s_rdata <= {24'h0, rxf[rx_rd]};
              rx_rd   <= (rx_rd + 1) % FIFO_DEPTH;
              rxc--;
            end else s_rdata <= '0;
          end
          4'h8: begin
            s_rdata <= {28'h0, (txc == FIFO_DEPTH), 1'b0, 1'b0, (rx_cnt > 0)};
            if (rx_cnt == 0) rx_empty_polls <= rx_empty_polls + 1;
            if (txc == FIFO_DEPTH) tx_full_polls <= tx_full_polls + 1;
          end
          default: s_rdata <= '0;
        endcase
      end
      // write channels, accepted independently
      s_awready <= 1'b0;
      s_wready  <= 1'b0;
      if (s_awvalid && !s_awready && !have_aw && ($urandom_range(0, 1) == 0)) begin
        s_awready <= 1'b1; have_aw <= 1'b1; wa <= s_awaddr;
      end
      if (s_wvalid && !s_wready && !have_w && ($urandom_range(0, 1) == 0)) begin
        s_wready <= 1'b1; have_w <= 1'b1; wd <= s_wdata[7:0];
      end
      if (s_bvalid && s_bready) s_bvalid <= 1'b0;
      if (have_aw && have_w && !s_bvalid) begin
        have_aw <= 1'b0; have_w <= 1'b0;
        s_bvalid <= 1'b1;
        s_bresp  <= 2'b00;
        if (wa == 4'h4 && txc < FIFO_DEPTH) begin
          txf[tx_wr] <= wd;
          tx_wr <= (tx_wr + 1) % FIFO_DEPTH;
          txc++;
        end
      end
      rx_cnt <= rxc;
      tx_cnt <= txc;
    end
  end

endmodule
