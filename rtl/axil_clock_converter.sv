// axil_clock_converter: AXI4-Lite clock domain crossing.
//
// Carries the host's control accesses from the PCIe direct slave interface
// (PCIe clock) to the kernels' control ports (kernel clock), as the block
// between the PCIe interface and the control interconnect does in the board
// design. Same structure as axi_clock_converter: one async_fifo per channel.
//
// Timing: a few cycles of each clock per crossing; FIFO_DEPTH beats of each
// channel can be in flight.
module axil_clock_converter
  import monc_pkg::*;
#(
  parameter int unsigned FIFO_DEPTH = 8
) (
  input  logic     s_clk,
  input  logic     s_rst_n,
  input  axil_req_t s_req,
  output axil_rsp_t s_rsp,
  input  logic     m_clk,
  input  logic     m_rst_n,
  output axil_req_t m_req,
  input  axil_rsp_t m_rsp
);

  logic    aw_rdy, w_rdy, ar_rdy, b_rdy, r_rdy;
  logic    aw_v, w_v, ar_v, b_v, r_v;
  axil_a_t aw_d, ar_d;
  axil_w_t  w_d;
  axil_b_t  b_d;
  axil_r_t  r_d;

  async_fifo #(.T(axil_a_t), .DEPTH(FIFO_DEPTH)) u_aw (
    .wclk(s_clk), .wrst_n(s_rst_n), .w_valid(s_req.aw_valid), .w_ready(aw_rdy), .w_data(s_req.aw),
    .rclk(m_clk), .rrst_n(m_rst_n), .r_valid(aw_v), .r_ready(m_rsp.aw_ready), .r_data(aw_d));
  async_fifo #(.T(axil_w_t), .DEPTH(FIFO_DEPTH)) u_w (
    .wclk(s_clk), .wrst_n(s_rst_n), .w_valid(s_req.w_valid), .w_ready(w_rdy), .w_data(s_req.w),
    .rclk(m_clk), .rrst_n(m_rst_n), .r_valid(w_v), .r_ready(m_rsp.w_ready), .r_data(w_d));
  async_fifo #(.T(axil_a_t), .DEPTH(FIFO_DEPTH)) u_ar (
    .wclk(s_clk), .wrst_n(s_rst_n), .w_valid(s_req.ar_valid), .w_ready(ar_rdy), .w_data(s_req.ar),
    .rclk(m_clk), .rrst_n(m_rst_n), .r_valid(ar_v), .r_ready(m_rsp.ar_ready), .r_data(ar_d));
  async_fifo #(.T(axil_b_t), .DEPTH(FIFO_DEPTH)) u_b (
    .wclk(m_clk), .wrst_n(m_rst_n), .w_valid(m_rsp.b_valid), .w_ready(b_rdy), .w_data(m_rsp.b),
    .rclk(s_clk), .rrst_n(s_rst_n), .r_valid(b_v), .r_ready(s_req.b_ready), .r_data(b_d));
  async_fifo #(.T(axil_r_t), .DEPTH(FIFO_DEPTH)) u_r (
    .wclk(m_clk), .wrst_n(m_rst_n), .w_valid(m_rsp.r_valid), .w_ready(r_rdy), .w_data(m_rsp.r),
    .rclk(s_clk), .rrst_n(s_rst_n), .r_valid(r_v), .r_ready(s_req.r_ready), .r_data(r_d));

  always_comb begin
    s_rsp = '0;
    m_req = '0;
    s_rsp.aw_ready = aw_rdy;
    s_rsp.w_ready  = w_rdy;
    s_rsp.ar_ready = ar_rdy;
    s_rsp.b_valid  = b_v;
    s_rsp.b        = b_d;
    s_rsp.r_valid  = r_v;
    s_rsp.r        = r_d;
    m_req.aw_valid = aw_v;
    m_req.aw       = aw_d;
    m_req.w_valid  = w_v;
    m_req.w        = w_d;
    m_req.ar_valid = ar_v;
    m_req.ar       = ar_d;
    m_req.b_ready  = b_rdy;
    m_req.r_ready  = r_rdy;
  end

endmodule
