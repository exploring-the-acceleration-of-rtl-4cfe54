// axi_register_slice: AXI4 register slice.
//
// Sits between each kernel's m_axi_gmem port and its memory interconnect,
// and on each DMA channel, as in the board design. All five channels (AW, W
// and AR forward, B and R back) pass through an axi_skid, so every signal
// between the two sides is registered and full throughput is kept. The paper
// names the block; its insides here are the usual two-entry skid buffers.
//
// Timing: one cycle of latency in each direction.
module axi_register_slice
  import monc_pkg::*;
(
  input  logic     clk,
  input  logic     rst_n,
  input  axi_req_t s_req,
  output axi_rsp_t s_rsp,
  output axi_req_t m_req,
  input  axi_rsp_t m_rsp
);

  logic    aw_rdy, w_rdy, ar_rdy, b_rdy, r_rdy;
  logic    aw_v, w_v, ar_v, b_v, r_v;
  axi_ax_t aw_d, ar_d;
  axi_w_t  w_d;
  axi_b_t  b_d;
  axi_r_t  r_d;

  axi_skid #(.T(axi_ax_t)) u_aw (.clk, .rst_n,
    .in_valid(s_req.aw_valid), .in_ready(aw_rdy), .in_data(s_req.aw),
    .out_valid(aw_v), .out_ready(m_rsp.aw_ready), .out_data(aw_d));
  axi_skid #(.T(axi_w_t)) u_w (.clk, .rst_n,
    .in_valid(s_req.w_valid), .in_ready(w_rdy), .in_data(s_req.w),
    .out_valid(w_v), .out_ready(m_rsp.w_ready), .out_data(w_d));
  axi_skid #(.T(axi_ax_t)) u_ar (.clk, .rst_n,
    .in_valid(s_req.ar_valid), .in_ready(ar_rdy), .in_data(s_req.ar),
    .out_valid(ar_v), .out_ready(m_rsp.ar_ready), .out_data(ar_d));
  axi_skid #(.T(axi_b_t)) u_b (.clk, .rst_n,
    .in_valid(m_rsp.b_valid), .in_ready(b_rdy), .in_data(m_rsp.b),
    .out_valid(b_v), .out_ready(s_req.b_ready), .out_data(b_d));
  axi_skid #(.T(axi_r_t)) u_r (.clk, .rst_n,
    .in_valid(m_rsp.r_valid), .in_ready(r_rdy), .in_data(m_rsp.r),
    .out_valid(r_v), .out_ready(s_req.r_ready), .out_data(r_d));

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
