// pw_ctrl_regs: the kernel's AXI4-Lite control port (s_axi_CTRL_BUS).
//
// The host reaches this register block over the card's direct slave
// interface. It follows the usual layout of an HLS control bus: word 0
// (AP_CTRL) holds ap_start (bit 0, written by the host, cleared when the
// kernel accepts the start), ap_done (bit 1, set when the kernel finishes,
// cleared when AP_CTRL is read), ap_idle (bit 2) and ap_ready (bit 3); then
// the global interrupt enable, the interrupt enable and the interrupt status
// register (bits toggle when written with 1), and from 0x10 the kernel's
// arguments, 64-bit ones as two 32-bit words, low word first (offsets in
// monc_pkg). The exact offsets are this design's own; the paper only says
// that the host writes and reads "the appropriate bit".
//
// Timing: one write is accepted when address and data are both valid and no
// write response is pending; the response follows one cycle later. A read
// returns data one cycle after its address is accepted.
module pw_ctrl_regs
  import monc_pkg::*;
(
  input  logic      clk,
  input  logic      rst_n,
  input  axil_req_t s_axi,
  output axil_rsp_t s_axi_rsp,
  // To and from the kernel core.
  output logic      ap_start,     // level; stays set until core_start
  input  logic      core_start,   // the core accepted ap_start
  input  logic      core_done,    // one-cycle pulse at the end of a run
  input  logic      core_idle,
  output logic [31:0] args [32],  // register words, index = byte offset / 4
  output logic      interrupt
);

  logic [31:0] regs [32];
  logic        start_q, done_q, gie_q;
  logic [1:0]  ier_q, isr_q;
  logic        b_valid_q, r_valid_q;
  logic [31:0] r_data_q;

  wire wr_fire = s_axi.aw_valid && s_axi.w_valid && !b_valid_q;
  wire rd_fire = s_axi.ar_valid && !r_valid_q;
  wire [4:0] wr_idx = s_axi.aw.addr[6:2];
  wire [4:0] rd_idx = s_axi.ar.addr[6:2];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      start_q   <= 1'b0;
      done_q    <= 1'b0;
      gie_q     <= 1'b0;
      ier_q     <= '0;
      isr_q     <= '0;
      b_valid_q <= 1'b0;
      r_valid_q <= 1'b0;
      r_data_q  <= '0;
      for (int n = 0; n < 32; n++) regs[n] <= '0;
    end else begin
      if (core_start) start_q <= 1'b0;
      if (core_done) begin
        done_q <= 1'b1;
        if (ier_q[0]) isr_q[0] <= 1'b1;
      end
      if (core_start && ier_q[1]) isr_q[1] <= 1'b1;

      if (wr_fire) begin
        b_valid_q <= 1'b1;
        unique case ({wr_idx, 2'b00})
          7'(REG_AP_CTRL): if (s_axi.w.strb[0] && s_axi.w.data[0]) start_q <= 1'b1;
          7'(REG_GIE):     if (s_axi.w.strb[0]) gie_q <= s_axi.w.data[0];
          7'(REG_IER):     if (s_axi.w.strb[0]) ier_q <= s_axi.w.data[1:0];
          7'(REG_ISR):     if (s_axi.w.strb[0]) isr_q <= isr_q ^ s_axi.w.data[1:0];
          default: begin
            for (int bn = 0; bn < 4; bn++)
              if (s_axi.w.strb[bn]) regs[wr_idx][8*bn +: 8] <= s_axi.w.data[8*bn +: 8];
          end
        endcase
      end else if (b_valid_q && s_axi.b_ready) begin
        b_valid_q <= 1'b0;
      end

      if (rd_fire) begin
        r_valid_q <= 1'b1;
        unique case ({rd_idx, 2'b00})
          7'(REG_AP_CTRL): begin
            r_data_q <= {28'd0, core_idle && !start_q, core_idle && !start_q, done_q, start_q};
            done_q   <= core_done;   // clear on read
          end
          7'(REG_GIE): r_data_q <= {31'd0, gie_q};
          7'(REG_IER): r_data_q <= {30'd0, ier_q};
          7'(REG_ISR): r_data_q <= {30'd0, isr_q};
          default:     r_data_q <= regs[rd_idx];
        endcase
      end else if (r_valid_q && s_axi.r_ready) begin
        r_valid_q <= 1'b0;
      end
    end
  end

  always_comb begin
    s_axi_rsp          = '0;
    s_axi_rsp.aw_ready = wr_fire;
    s_axi_rsp.w_ready  = wr_fire;
    s_axi_rsp.b_valid  = b_valid_q;
    s_axi_rsp.b.resp   = AXI_RESP_OKAY;
    s_axi_rsp.ar_ready = rd_fire;
    s_axi_rsp.r_valid  = r_valid_q;
    s_axi_rsp.r.data   = r_data_q;
    s_axi_rsp.r.resp   = AXI_RESP_OKAY;
  end

  assign ap_start  = start_q;
  assign args      = regs;
  assign interrupt = gie_q && (isr_q != 2'b00);

endmodule
