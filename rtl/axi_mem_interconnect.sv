// axi_mem_interconnect: N-to-1 AXI4 interconnect in front of a memory port.
//
// In the board design one of these gathers the data ports of a group of
// kernels, another pair joins two DMA channels, and one per DDR4 bank merges
// a kernel group with its DMA channels in front of the memory controller.
// The paper names these blocks and why they are split per bank (to avoid
// congestion); the arbitration below is this design's own.
//
// Reads: a round-robin arbiter picks one valid AR per cycle. The index of the
// winning slave port is appended to the low end of the AXI ID (the ID is
// shifted up by IDX_W bits), and R beats are routed back by those bits, so
// any number of read bursts from different ports can be in flight.
// Writes: a round-robin arbiter picks one AW; W beats are then taken only
// from that port until WLAST, after which the next AW can be granted. B
// responses are routed back by ID like R.
//
// Timing: no added latency; valid to ready paths are combinational.
module axi_mem_interconnect
  import monc_pkg::*;
#(
  parameter int unsigned N = 2,
  localparam int unsigned IDX_W = (N > 1) ? $clog2(N) : 1
) (
  input  logic     clk,
  input  logic     rst_n,
  input  axi_req_t s_req [N],
  output axi_rsp_t s_rsp [N],
  output axi_req_t m_req,
  input  axi_rsp_t m_rsp
);

  logic [IDX_W-1:0] ar_ptr, aw_ptr, ar_sel, aw_sel, w_sel;
  logic             ar_any, aw_any, w_lock;

  // Round-robin choice: first valid port at or after the pointer.
  always_comb begin
    ar_any = 1'b0; ar_sel = ar_ptr;
    aw_any = 1'b0; aw_sel = aw_ptr;
    for (int n = N - 1; n >= 0; n--) begin
      // Ports before the pointer lose to ports at or after it.
      logic [IDX_W-1:0] idx;
      idx = IDX_W'((int'(ar_ptr) + n) % N);
      if (s_req[idx].ar_valid) begin ar_any = 1'b1; ar_sel = idx; end
      idx = IDX_W'((int'(aw_ptr) + n) % N);
      if (s_req[idx].aw_valid) begin aw_any = 1'b1; aw_sel = idx; end
    end
  end

  wire ar_fire = ar_any && m_rsp.ar_ready;
  wire aw_fire = aw_any && !w_lock && m_rsp.aw_ready;
  wire w_fire  = w_lock && s_req[w_sel].w_valid && m_rsp.w_ready;

  logic [IDX_W-1:0] r_idx, b_idx;
  assign r_idx = m_rsp.r.id[IDX_W-1:0];
  assign b_idx = m_rsp.b.id[IDX_W-1:0];

  always_comb begin
    m_req = '0;
    m_req.ar_valid = ar_any;
    m_req.ar       = s_req[ar_sel].ar;
    m_req.ar.id    = (s_req[ar_sel].ar.id << IDX_W) | AXI_ID_W'(ar_sel);
    m_req.aw_valid = aw_any && !w_lock;
    m_req.aw       = s_req[aw_sel].aw;
    m_req.aw.id    = (s_req[aw_sel].aw.id << IDX_W) | AXI_ID_W'(aw_sel);
    m_req.w_valid  = w_lock && s_req[w_sel].w_valid;
    m_req.w        = s_req[w_sel].w;
    m_req.r_ready  = s_req[r_idx].r_ready;
    m_req.b_ready  = s_req[b_idx].b_ready;
    for (int n = 0; n < N; n++) begin
      s_rsp[n] = '0;
      s_rsp[n].ar_ready = ar_fire && (ar_sel == IDX_W'(n));
      s_rsp[n].aw_ready = aw_fire && (aw_sel == IDX_W'(n));
      s_rsp[n].w_ready  = w_lock && (w_sel == IDX_W'(n)) && m_rsp.w_ready;
      s_rsp[n].r        = m_rsp.r;
      s_rsp[n].r.id     = m_rsp.r.id >> IDX_W;
      s_rsp[n].r_valid  = m_rsp.r_valid && (r_idx == IDX_W'(n));
      s_rsp[n].b        = m_rsp.b;
      s_rsp[n].b.id     = m_rsp.b.id >> IDX_W;
      s_rsp[n].b_valid  = m_rsp.b_valid && (b_idx == IDX_W'(n));
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ar_ptr <= '0;
      aw_ptr <= '0;
      w_sel  <= '0;
      w_lock <= 1'b0;
    end else begin
      if (ar_fire) ar_ptr <= (ar_sel == IDX_W'(N - 1)) ? '0 : ar_sel + IDX_W'(1);
      if (aw_fire) begin
        aw_ptr <= (aw_sel == IDX_W'(N - 1)) ? '0 : aw_sel + IDX_W'(1);
        w_sel  <= aw_sel;
        w_lock <= 1'b1;
      end
      if (w_fire && s_req[w_sel].w.last) w_lock <= 1'b0;
    end
  end

endmodule
