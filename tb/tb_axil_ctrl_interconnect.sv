// tb_axil_ctrl_interconnect: self-checking test of the control interconnect
// that fans the host's AXI4-Lite accesses out to the kernels.
//
// Four behavioural register slaves (a reduced count, with 256-byte windows)
// sit behind the interconnect. Each accepts address and data independently
// with random stalls, answers after a random delay, and records the address
// it saw. The host side issues a few hundred random writes and reads, some
// to addresses beyond the last window. The test checks that every access
// reaches exactly the slave whose window holds its address, with the address
// unchanged; that reads return what was last written there; that accesses
// outside every window get DECERR and touch no slave; and that a plain
// write or read completes in a bounded number of cycles.
module tb_axil_ctrl_interconnect;
  import monc_pkg::*;

  localparam int N = 4;
  localparam int SHIFT = 8;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  axil_req_t s_req;
  axil_rsp_t s_rsp;
  axil_req_t m_req [N];
  axil_rsp_t m_rsp [N];

  axil_ctrl_interconnect #(.N(N), .ADDR_SHIFT(SHIFT)) dut (
    .clk, .rst_n, .s_req, .s_rsp, .m_req, .m_rsp);

  int checks = 0, failures = 0;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL: %s", what);
    end
  endtask

  // ------------------------------------------------- behavioural slaves
  logic [31:0] sreg [N][64];
  logic [31:0] seen_addr [N];
  int          hits [N];

  for (genvar n = 0; n < N; n++) begin : g_slave
    logic aw_rdy, w_rdy, ar_rdy, got_aw, got_w, b_v, r_v;
    logic [31:0] a_q, d_q, r_d;
    int b_wait, r_wait;

    always_comb begin
      m_rsp[n] = '0;
      m_rsp[n].aw_ready = aw_rdy && !got_aw && !b_v;
      m_rsp[n].w_ready  = w_rdy && !got_w && !b_v;
      m_rsp[n].b_valid  = b_v && b_wait == 0;
      m_rsp[n].b.resp   = AXI_RESP_OKAY;
      m_rsp[n].ar_ready = ar_rdy && !r_v;
      m_rsp[n].r_valid  = r_v && r_wait == 0;
      m_rsp[n].r.data   = r_d;
      m_rsp[n].r.resp   = AXI_RESP_OKAY;
    end

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        aw_rdy <= 1'b0; w_rdy <= 1'b0; ar_rdy <= 1'b0;
        got_aw <= 1'b0; got_w <= 1'b0; b_v <= 1'b0; r_v <= 1'b0;
        a_q <= '0; d_q <= '0; r_d <= '0; b_wait <= 0; r_wait <= 0;
        for (int i = 0; i < 64; i++) sreg[n][i] <= '0;
      end else begin
        aw_rdy <= ($urandom_range(3) != 0);
        w_rdy  <= ($urandom_range(3) != 0);
        ar_rdy <= ($urandom_range(3) != 0);
        if (m_req[n].aw_valid && m_rsp[n].aw_ready) begin
          got_aw <= 1'b1; a_q <= m_req[n].aw.addr;
        end
        if (m_req[n].w_valid && m_rsp[n].w_ready) begin
          got_w <= 1'b1; d_q <= m_req[n].w.data;
        end
        if (got_aw && got_w && !b_v) begin
          sreg[n][a_q[7:2]] <= d_q;
          seen_addr[n] <= a_q;
          hits[n] <= hits[n] + 1;
          b_v <= 1'b1; b_wait <= int'($urandom_range(4));
          got_aw <= 1'b0; got_w <= 1'b0;
        end
        if (b_v && b_wait != 0) b_wait <= b_wait - 1;
        if (m_rsp[n].b_valid && m_req[n].b_ready) b_v <= 1'b0;
        if (m_req[n].ar_valid && m_rsp[n].ar_ready) begin
          r_v <= 1'b1; r_wait <= int'($urandom_range(4));
          r_d <= sreg[n][m_req[n].ar.addr[7:2]];
          seen_addr[n] <= m_req[n].ar.addr;
          hits[n] <= hits[n] + 1;
        end
        if (r_v && r_wait != 0) r_wait <= r_wait - 1;
        if (m_rsp[n].r_valid && m_req[n].r_ready) r_v <= 1'b0;
      end
    end
  end

  // --------------------------------------------------------------- host
  int cyc = 0;
  always @(posedge clk) cyc++;

  task automatic host_write(logic [31:0] addr, logic [31:0] data, output logic [1:0] resp, output int lat);
    int t0;
    @(negedge clk);
    t0 = cyc;
    s_req.aw.addr = addr; s_req.aw_valid = 1'b1;
    s_req.w.data = data; s_req.w.strb = 4'hF; s_req.w_valid = 1'b1;
    forever begin #1; if (s_rsp.aw_ready) break; @(negedge clk); end
    @(negedge clk);
    s_req.aw_valid = 1'b0; s_req.w_valid = 1'b0; s_req.b_ready = 1'b1;
    forever begin #1; if (s_rsp.b_valid) break; @(negedge clk); end
    resp = s_rsp.b.resp;
    lat = cyc - t0;
    @(negedge clk);
    s_req.b_ready = 1'b0;
  endtask

  task automatic host_read(logic [31:0] addr, output logic [31:0] data, output logic [1:0] resp, output int lat);
    int t0;
    @(negedge clk);
    t0 = cyc;
    s_req.ar.addr = addr; s_req.ar_valid = 1'b1;
    forever begin #1; if (s_rsp.ar_ready) break; @(negedge clk); end
    @(negedge clk);
    s_req.ar_valid = 1'b0; s_req.r_ready = 1'b1;
    forever begin #1; if (s_rsp.r_valid) break; @(negedge clk); end
    data = s_rsp.r.data; resp = s_rsp.r.resp;
    lat = cyc - t0;
    @(negedge clk);
    s_req.r_ready = 1'b0;
  endtask

  logic [31:0] ref_mem [N][64];
  int n_decerr = 0;

  initial begin
    s_req = '0;
    for (int n = 0; n < N; n++) begin
      hits[n] = 0;
      for (int i = 0; i < 64; i++) ref_mem[n][i] = '0;
    end
    repeat (4) @(negedge clk);
    rst_n = 1'b1;
    for (int t = 0; t < 400; t++) begin
      int win, off, lat, hits0 [N];
      logic [31:0] addr, data, got;
      logic [1:0] resp;
      win = int'($urandom_range(N + 1));          // N and N+1 lie outside
      off = int'($urandom_range(63));
      addr = (32'(win) << SHIFT) | (32'(off) << 2);
      for (int n = 0; n < N; n++) hits0[n] = hits[n];
      if ($urandom_range(1)) begin
        data = $urandom;
        host_write(addr, data, resp, lat);
        if (win < N) begin
          ref_mem[win][off] = data;
          check(resp == AXI_RESP_OKAY, "write OKAY");
          check(seen_addr[win] == addr, $sformatf("slave %0d saw address %h for %h", win, seen_addr[win], addr));
          check(sreg[win][off] == data, "write reached its slave");
        end else begin
          check(resp == AXI_RESP_DECERR, "write outside every window gets DECERR");
          n_decerr++;
        end
      end else begin
        host_read(addr, got, resp, lat);
        if (win < N) begin
          check(resp == AXI_RESP_OKAY, "read OKAY");
          check(got == ref_mem[win][off], $sformatf("read %h: %h vs %h", addr, got, ref_mem[win][off]));
          check(seen_addr[win] == addr, "read address passed unchanged");
        end else begin
          check(resp == AXI_RESP_DECERR && got == '0, "read outside every window gets DECERR");
          n_decerr++;
        end
      end
      check(lat < 20, $sformatf("access took %0d cycles", lat));
      for (int n = 0; n < N; n++)
        check(hits[n] == hits0[n] + ((n == win) ? 1 : 0),
              $sformatf("slave %0d hit count after access to window %0d", n, win));
    end
    check(n_decerr > 10, "out-of-range accesses exercised");
    for (int n = 0; n < N; n++) check(hits[n] > 20, $sformatf("slave %0d exercised", n));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
