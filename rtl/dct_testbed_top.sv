// dct_testbed_top -- FPGA top of the scaled DCT-II test setup.
//
// Joins the controller state machine (testbed_ctrl) to the 16-point scaled transform
// (scaled_dct_2n, two pipelined 8-point cores). The UART core that links the board to a
// host computer is external: the controller's AXI4-Lite master port is brought out to
// connect to it. A host streams 16-byte blocks in and reads 32-byte result blocks
// (16 coefficients, 16 bits each, low byte first) back.
// METHOD picks the scaling method (default Method VI); all eight of the family build.
// Reset is synchronous and active high.
module dct_testbed_top
  import dct_scaling_pkg::*;
#(
  parameter method_e METHOD = METHOD_VI
) (
  input  logic        clk,
  input  logic        rst,
  // AXI4-Lite master toward the UART core
  output logic [3:0]  m_awaddr,
  output logic        m_awvalid,
  input  logic        m_awready,
  output logic [31:0] m_wdata,
  output logic [3:0]  m_wstrb,
  output logic        m_wvalid,
  input  logic        m_wready,
  input  logic [1:0]  m_bresp,
  input  logic        m_bvalid,
  output logic        m_bready,
  output logic [3:0]  m_araddr,
  output logic        m_arvalid,
  input  logic        m_arready,
  input  logic [31:0] m_rdata,
  input  logic [1:0]  m_rresp,
  input  logic        m_rvalid,
  output logic        m_rready,
  // status
  output logic [15:0] block_count,
  output logic        resp_error
);

  logic                    t_in_valid, t_out_valid;
  logic signed [IN_W-1:0]  t_x [TWO_N];
  logic signed [OUT_W-1:0] t_y [TWO_N];

  testbed_ctrl u_ctrl (
    .clk, .rst,
    .m_awaddr, .m_awvalid, .m_awready, .m_wdata, .m_wstrb, .m_wvalid, .m_wready,
    .m_bresp, .m_bvalid, .m_bready,
    .m_araddr, .m_arvalid, .m_arready, .m_rdata, .m_rresp, .m_rvalid, .m_rready,
    .t_in_valid, .t_x, .t_out_valid, .t_y,
    .block_count, .resp_error
  );

  scaled_dct_2n #(.METHOD(METHOD)) u_t2n (
    .clk, .rst, .in_valid(t_in_valid), .x(t_x), .out_valid(t_out_valid), .y(t_y)
  );

endmodule
