// axi_mem_model: behavioural model of one DDR4 bank behind its memory
// controller, as seen on the controller's AXI4 slave port.
//
// Not synthesizable. Storage is a sparse array of 64-bit words indexed by
// byte address / 8, so gigabyte address ranges cost only what is touched.
// Address, data and response handshakes stall at random (STALL_PCT percent
// of cycles) so that masters see back-pressure; read bursts are queued and
// answered in order, so any number of read bursts may be outstanding. Write
// data is accepted only for an address already received. Testbenches fill
// and inspect the memory directly through mem[].
module axi_mem_model
  import monc_pkg::*;
#(
  parameter int unsigned STALL_PCT = 20
) (
  input  logic     clk,
  input  logic     rst_n,
  input  axi_req_t s_axi,
  output axi_rsp_t s_axi_rsp
);

  logic [63:0] mem [longint unsigned];

  axi_ax_t arq [$];
  axi_ax_t awq [$];
  axi_b_t  bq  [$];
  int unsigned r_beat, w_beat;
  int unsigned max_ar_outstanding, reads, writes;

  logic ar_rdy, aw_rdy, w_rdy, r_go, b_go;

  // Snapshot of the queue heads, refreshed at the end of every clock edge.
  // The response logic reads only these plain variables, never the queues.
  logic    ar_pending, aw_pending, b_pending;
  axi_r_t  r_head;
  axi_b_t  b_head;

  function automatic logic [63:0] peek(longint unsigned word);
    return mem.exists(word) ? mem[word] : 64'd0;
  endfunction

  always_ff @(posedge clk) begin
    ar_rdy <= ($urandom_range(99) >= STALL_PCT);
    aw_rdy <= ($urandom_range(99) >= STALL_PCT);
    w_rdy  <= ($urandom_range(99) >= STALL_PCT);
    r_go   <= ($urandom_range(99) >= STALL_PCT);
    b_go   <= ($urandom_range(99) >= STALL_PCT);
  end

  always_comb begin
    s_axi_rsp = '0;
    s_axi_rsp.ar_ready = ar_rdy;
    s_axi_rsp.aw_ready = aw_rdy;
    s_axi_rsp.w_ready  = w_rdy && aw_pending;
    s_axi_rsp.r_valid  = r_go && ar_pending;
    s_axi_rsp.r        = r_head;
    s_axi_rsp.b_valid  = b_go && b_pending;
    s_axi_rsp.b        = b_head;
  end

  always @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      arq.delete(); awq.delete(); bq.delete();
      r_beat = 0; w_beat = 0;
      max_ar_outstanding = 0; reads = 0; writes = 0;
    end else begin
      if (s_axi_rsp.r_valid && s_axi.r_ready) begin
        if (r_beat == int'(arq[0].len)) begin
          void'(arq.pop_front());
          r_beat = 0;
        end else r_beat++;
        reads++;
      end
      if (s_axi.w_valid && s_axi_rsp.w_ready) begin
        // The write data beat count must match the burst length announced.
        assert (s_axi.w.last == (w_beat == int'(awq[0].len)))
          else $error("axi_mem_model: WLAST does not match AWLEN");
        mem[longint'(awq[0].addr >> 3) + longint'(w_beat)] = s_axi.w.data;
        writes++;
        if (w_beat == int'(awq[0].len)) begin
          bq.push_back('{id: awq[0].id, resp: AXI_RESP_OKAY});
          void'(awq.pop_front());
          w_beat = 0;
        end else w_beat++;
      end
      if (s_axi.ar_valid && ar_rdy) begin
        arq.push_back(s_axi.ar);
        if (arq.size() > max_ar_outstanding) max_ar_outstanding = arq.size();
      end
      if (s_axi.aw_valid && aw_rdy) awq.push_back(s_axi.aw);
      if (s_axi_rsp.b_valid && s_axi.b_ready) void'(bq.pop_front());
    end
    ar_pending <= (arq.size() != 0);
    aw_pending <= (awq.size() != 0);
    b_pending  <= (bq.size() != 0);
    if (arq.size() != 0)
      r_head <= '{id: arq[0].id, data: peek(longint'(arq[0].addr >> 3) + longint'(r_beat)),
                  resp: AXI_RESP_OKAY, last: (r_beat == int'(arq[0].len))};
    else
      r_head <= '0;
    b_head <= (bq.size() != 0) ? bq[0] : '0;
  end

endmodule
