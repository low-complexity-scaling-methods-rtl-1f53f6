// testbed_ctrl -- controller state machine between a UART core and the scaled transform.
//
// A host sends blocks of TWO_N = 16 input samples, one signed byte each, over a UART.
// This controller fetches them from the UART core's receive FIFO over an AXI4-Lite
// master port, presents the block to the transform for one cycle, waits for the 16
// coefficients and writes them back into the UART core's transmit FIFO, two bytes per
// coefficient (sign-extended to 16 bits, low byte first). Then it waits for the next block.
//
// The UART core is addressed as a four-register AXI4-Lite slave (receive FIFO, transmit
// FIFO, status, control); the offsets and status bits are parameters whose defaults
// follow the common "UART Lite" register map. The controller polls the status register:
// it reads the receive FIFO only when the "receive data valid" bit is set and writes the
// transmit FIFO only when the "transmit FIFO full" bit is clear, so a slow UART simply
// stretches the exchange. One AXI transaction is outstanding at a time; the write address
// and write data channels are offered together and may complete in either order.
//
// What the controller does (receive 16 coefficients, pass them through the transform,
// send 16 results back) is the published testbed's; the register map, the polling, the
// 2-byte result format and the state sequence are this design's choices.
// Reset is synchronous and active high.
module testbed_ctrl
  import dct_scaling_pkg::*;
#(
  parameter int              ADDR_W       = 4,
  parameter logic [ADDR_W-1:0] RX_FIFO_ADDR = 4'h0,
  parameter logic [ADDR_W-1:0] TX_FIFO_ADDR = 4'h4,
  parameter logic [ADDR_W-1:0] STAT_ADDR    = 4'h8,
  parameter int              STAT_RX_VALID = 0,   // status bit: receive FIFO holds data
  parameter int              STAT_TX_FULL  = 3    // status bit: transmit FIFO is full
) (
  input  logic                    clk,
  input  logic                    rst,
  // AXI4-Lite master toward the UART core
  output logic [ADDR_W-1:0]       m_awaddr,
  output logic                    m_awvalid,
  input  logic                    m_awready,
  output logic [31:0]             m_wdata,
  output logic [3:0]              m_wstrb,
  output logic                    m_wvalid,
  input  logic                    m_wready,
  input  logic [1:0]              m_bresp,
  input  logic                    m_bvalid,
  output logic                    m_bready,
  output logic [ADDR_W-1:0]       m_araddr,
  output logic                    m_arvalid,
  input  logic                    m_arready,
  input  logic [31:0]             m_rdata,
  input  logic [1:0]              m_rresp,
  input  logic                    m_rvalid,
  output logic                    m_rready,
  // transform side
  output logic                    t_in_valid,
  output logic signed [IN_W-1:0]  t_x [TWO_N],
  input  logic                    t_out_valid,
  input  logic signed [OUT_W-1:0] t_y [TWO_N],
  // status
  output logic [15:0]             block_count,   // blocks fully returned since reset
  output logic                    resp_error     // sticky: a slave answered SLVERR/DECERR
);

  localparam int OUT_BYTES = 2;                       // bytes sent per coefficient
  localparam int TX_TOTAL  = TWO_N * OUT_BYTES;       // 32 bytes per block

  typedef enum logic [3:0] {
    S_RX_STAT_AR, S_RX_STAT_R,    // poll status until a received byte is there
    S_RX_DATA_AR, S_RX_DATA_R,    // read one byte from the receive FIFO
    S_START,                      // hand the block to the transform
    S_WAIT,                       // wait for its coefficients
    S_TX_STAT_AR, S_TX_STAT_R,    // poll status until the transmit FIFO has room
    S_TX_WRITE,                   // write address and data
    S_TX_RESP                     // write response
  } state_e;

  state_e state;
  logic [$clog2(TWO_N)-1:0]    rx_idx;
  logic [$clog2(TX_TOTAL)-1:0] tx_idx;
  logic                        aw_done, w_done;
  logic signed [OUT_W-1:0]     y_buf [TWO_N];
  logic signed [15:0]          tx_word;

  // Byte tx_idx of the result block: coefficient tx_idx/2, low byte first.
  assign tx_word = 16'(y_buf[tx_idx[$clog2(TX_TOTAL)-1:1]]);

  always_comb begin
    m_arvalid = (state == S_RX_STAT_AR) || (state == S_RX_DATA_AR) || (state == S_TX_STAT_AR);
    m_araddr  = (state == S_RX_DATA_AR) ? RX_FIFO_ADDR : STAT_ADDR;
    m_rready  = (state == S_RX_STAT_R) || (state == S_RX_DATA_R) || (state == S_TX_STAT_R);
    m_awvalid = (state == S_TX_WRITE) && !aw_done;
    m_awaddr  = TX_FIFO_ADDR;
    m_wvalid  = (state == S_TX_WRITE) && !w_done;
    m_wdata   = {24'h0, tx_idx[0] ? tx_word[15:8] : tx_word[7:0]};
    m_wstrb   = 4'b0001;
    m_bready  = (state == S_TX_RESP);
    t_in_valid = (state == S_START);
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      state       <= S_RX_STAT_AR;
      rx_idx      <= '0;
      tx_idx      <= '0;
      aw_done     <= 1'b0;
      w_done      <= 1'b0;
      block_count <= '0;
      resp_error  <= 1'b0;
    end else begin
      case (state)
        S_RX_STAT_AR: if (m_arready) state <= S_RX_STAT_R;
        S_RX_STAT_R: if (m_rvalid) begin
          if (m_rresp[1]) resp_error <= 1'b1;
          state <= m_rdata[STAT_RX_VALID] ? S_RX_DATA_AR : S_RX_STAT_AR;
        end
        S_RX_DATA_AR: if (m_arready) state <= S_RX_DATA_R;
        S_RX_DATA_R: if (m_rvalid) begin
          if (m_rresp[1]) resp_error <= 1'b1;
          t_x[rx_idx] <= $signed(m_rdata[IN_W-1:0]);
          rx_idx      <= rx_idx + 1'b1;
          state       <= (rx_idx == $bits(rx_idx)'(TWO_N - 1)) ? S_START : S_RX_STAT_AR;
        end
        S_START: state <= S_WAIT;
        S_WAIT: if (t_out_valid) begin
          y_buf  <= t_y;
          tx_idx <= '0;
          state  <= S_TX_STAT_AR;
        end
        S_TX_STAT_AR: if (m_arready) state <= S_TX_STAT_R;
        S_TX_STAT_R: if (m_rvalid) begin
          if (m_rresp[1]) resp_error <= 1'b1;
          state <= m_rdata[STAT_TX_FULL] ? S_TX_STAT_AR : S_TX_WRITE;
        end
        S_TX_WRITE: begin
          if (m_awready) aw_done <= 1'b1;
          if (m_wready)  w_done  <= 1'b1;
          if ((aw_done || m_awready) && (w_done || m_wready)) state <= S_TX_RESP;
        end
        S_TX_RESP: if (m_bvalid) begin
          if (m_bresp[1]) resp_error <= 1'b1;
          aw_done <= 1'b0;
          w_done  <= 1'b0;
          tx_idx  <= tx_idx + 1'b1;
          if (tx_idx == $bits(tx_idx)'(TX_TOTAL - 1)) begin
            block_count <= block_count + 1'b1;
            state       <= S_RX_STAT_AR;
          end else begin
            state <= S_TX_STAT_AR;
          end
        end
        default: state <= S_RX_STAT_AR;
      endcase
    end
  end

  // AXI rule: a valid, once raised, stays up with its payload until the handshake.
  a_ar_stable: assert property (@(posedge clk) disable iff (rst)
    m_arvalid && !m_arready |=> m_arvalid && $stable(m_araddr));
  a_aw_stable: assert property (@(posedge clk) disable iff (rst)
    m_awvalid && !m_awready |=> m_awvalid && $stable(m_awaddr));
  a_w_stable: assert property (@(posedge clk) disable iff (rst)
    m_wvalid && !m_wready |=> m_wvalid && $stable(m_wdata));
  // The transform answers only while a block is expected.
  a_result_expected: assert property (@(posedge clk) disable iff (rst)
    t_out_valid |-> state == S_WAIT);

endmodule
