// axil_ctrl_interconnect: 1-to-N AXI4-Lite interconnect for kernel control.
//
// The host's direct slave accesses reach every kernel's control port through
// this block, which "splits the direct slave data according to its address"
// (the paper's words for the control interconnect). Kernel n owns the
// 2^ADDR_SHIFT-byte window starting at n * 2^ADDR_SHIFT; the address is
// passed on unchanged and the kernel decodes the low bits. An access outside
// every window is answered with DECERR. The window size is this design's
// choice; in the board design it is set in the address editor.
//
// One write and one read are handled at a time. A write is accepted when
// address and data are both valid, forwarded to the target, and its response
// returned; reads likewise. All outputs are registered.
module axil_ctrl_interconnect
  import monc_pkg::*;
#(
  parameter int unsigned N          = 12,
  parameter int unsigned ADDR_SHIFT = 16,
  localparam int unsigned IDX_W = (N > 1) ? $clog2(N) : 1
) (
  input  logic      clk,
  input  logic      rst_n,
  input  axil_req_t s_req,
  output axil_rsp_t s_rsp,
  output axil_req_t m_req [N],
  input  axil_rsp_t m_rsp [N]
);

  typedef enum logic [1:0] {T_IDLE, T_FWD, T_WAIT, T_RESP} txn_t;

  txn_t             wst, rst;
  logic [IDX_W-1:0] wsel, rsel;
  logic             aw_done, w_done;
  axil_a_t          aw_q, ar_q;
  axil_w_t          w_q;
  logic [1:0]       b_resp;
  axil_r_t          r_q;

  // Window index of an address; out of range when above N-1.
  function automatic logic [31:0] window(logic [AXIL_ADDR_W-1:0] a);
    return 32'(a >> ADDR_SHIFT);
  endfunction

  wire w_accept = (wst == T_IDLE) && s_req.aw_valid && s_req.w_valid;
  wire r_accept = (rst == T_IDLE) && s_req.ar_valid;

  always_comb begin
    s_rsp = '0;
    s_rsp.aw_ready = w_accept;
    s_rsp.w_ready  = w_accept;
    s_rsp.b_valid  = (wst == T_RESP);
    s_rsp.b.resp   = b_resp;
    s_rsp.ar_ready = r_accept;
    s_rsp.r_valid  = (rst == T_RESP);
    s_rsp.r        = r_q;
    for (int n = 0; n < N; n++) begin
      m_req[n] = '0;
      m_req[n].aw       = aw_q;
      m_req[n].w        = w_q;
      m_req[n].ar       = ar_q;
      m_req[n].aw_valid = (wst == T_FWD) && (wsel == IDX_W'(n)) && !aw_done;
      m_req[n].w_valid  = (wst == T_FWD) && (wsel == IDX_W'(n)) && !w_done;
      m_req[n].b_ready  = (wst == T_WAIT) && (wsel == IDX_W'(n));
      m_req[n].ar_valid = (rst == T_FWD) && (rsel == IDX_W'(n));
      m_req[n].r_ready  = (rst == T_WAIT) && (rsel == IDX_W'(n));
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wst <= T_IDLE; rst <= T_IDLE;
      wsel <= '0; rsel <= '0;
      aw_done <= 1'b0; w_done <= 1'b0;
      aw_q <= '0; ar_q <= '0; w_q <= '0;
      b_resp <= '0; r_q <= '0;
    end else begin
      // Write path.
      unique case (wst)
        T_IDLE: if (w_accept) begin
          aw_q    <= s_req.aw;
          w_q     <= s_req.w;
          aw_done <= 1'b0;
          w_done  <= 1'b0;
          if (window(s_req.aw.addr) < 32'(N)) begin
            wsel <= IDX_W'(window(s_req.aw.addr));
            wst  <= T_FWD;
          end else begin
            b_resp <= AXI_RESP_DECERR;
            wst    <= T_RESP;
          end
        end
        T_FWD: begin
          logic a_ok, d_ok;
          a_ok = aw_done || m_rsp[wsel].aw_ready;
          d_ok = w_done  || m_rsp[wsel].w_ready;
          aw_done <= a_ok;
          w_done  <= d_ok;
          if (a_ok && d_ok) wst <= T_WAIT;
        end
        T_WAIT: if (m_rsp[wsel].b_valid) begin
          b_resp <= m_rsp[wsel].b.resp;
          wst    <= T_RESP;
        end
        T_RESP: if (s_req.b_ready) wst <= T_IDLE;
        default: wst <= T_IDLE;
      endcase
      // Read path.
      unique case (rst)
        T_IDLE: if (r_accept) begin
          ar_q <= s_req.ar;
          if (window(s_req.ar.addr) < 32'(N)) begin
            rsel <= IDX_W'(window(s_req.ar.addr));
            rst  <= T_FWD;
          end else begin
            r_q.data <= '0;
            r_q.resp <= AXI_RESP_DECERR;
            rst      <= T_RESP;
          end
        end
        T_FWD:  if (m_rsp[rsel].ar_ready) rst <= T_WAIT;
        T_WAIT: if (m_rsp[rsel].r_valid) begin
          r_q <= m_rsp[rsel].r;
          rst <= T_RESP;
        end
        T_RESP: if (s_req.r_ready) rst <= T_IDLE;
        default: rst <= T_IDLE;
      endcase
    end
  end

endmodule
