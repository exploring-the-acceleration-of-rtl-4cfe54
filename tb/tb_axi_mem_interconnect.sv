// tb_axi_mem_interconnect: self-checking test of the N-to-1 AXI4
// interconnect used for the kernel groups, the DMA crossbars and the bank
// junctions.
//
// Three masters (a reduced port count, which exercises the non-power-of-two
// round robin) share one behavioural memory that stalls at random. Each
// master runs its own sequence of write bursts (random length, random AXI
// ID) into its own address range, and reads each burst back; a fourth
// process keeps several read bursts of master 0 in flight at once. The test
// checks every read word, that each response carries the ID its master
// used, that RLAST closes each burst, that write data is never interleaved
// between masters, and that the masters really contended for the port.
module tb_axi_mem_interconnect;
  import monc_pkg::*;

  localparam int N = 3;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  axi_req_t s_req [N];
  axi_rsp_t s_rsp [N];
  axi_req_t m_req;
  axi_rsp_t m_rsp;

  axi_mem_interconnect #(.N(N)) dut (.clk, .rst_n, .s_req, .s_rsp, .m_req, .m_rsp);
  axi_mem_model u_mem (.clk, .rst_n, .s_axi(m_req), .s_axi_rsp(m_rsp));

  int checks = 0, failures = 0;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL: %s", what);
    end
  endtask

  // Masters drive on the falling edge and sample 1 time unit later.
  task automatic wr_burst(int m, logic [5:0] id, longint unsigned word, logic [63:0] d [$]);
    @(negedge clk);
    s_req[m].aw = '{id: AXI_ID_W'(id), addr: AXI_ADDR_W'(word * 8), len: 8'(d.size() - 1),
                    size: AXI_SIZE_8B, burst: AXI_BURST_INCR};
    s_req[m].aw_valid = 1'b1;
    forever begin #1; if (s_rsp[m].aw_ready) break; @(negedge clk); end
    @(negedge clk);
    s_req[m].aw_valid = 1'b0;
    foreach (d[i]) begin
      s_req[m].w = '{data: d[i], strb: '1, last: (i == d.size() - 1)};
      s_req[m].w_valid = ($urandom_range(3) != 0);
      forever begin #1; if (s_req[m].w_valid && s_rsp[m].w_ready) break; @(negedge clk); s_req[m].w_valid = 1'b1; end
      @(negedge clk);
    end
    s_req[m].w_valid = 1'b0;
    s_req[m].b_ready = 1'b1;
    forever begin #1; if (s_rsp[m].b_valid) break; @(negedge clk); end
    check(s_rsp[m].b.id == AXI_ID_W'(id), $sformatf("master %0d: B id %h vs %h", m, s_rsp[m].b.id, id));
    check(s_rsp[m].b.resp == AXI_RESP_OKAY, "B OKAY");
    @(negedge clk);
    s_req[m].b_ready = 1'b0;
  endtask

  task automatic rd_addr(int m, logic [5:0] id, longint unsigned word, int len);
    @(negedge clk);
    s_req[m].ar = '{id: AXI_ID_W'(id), addr: AXI_ADDR_W'(word * 8), len: 8'(len - 1),
                    size: AXI_SIZE_8B, burst: AXI_BURST_INCR};
    s_req[m].ar_valid = 1'b1;
    forever begin #1; if (s_rsp[m].ar_ready) break; @(negedge clk); end
    @(negedge clk);
    s_req[m].ar_valid = 1'b0;
  endtask

  task automatic rd_data(int m, logic [5:0] id, logic [63:0] d [$]);
    foreach (d[i]) begin
      s_req[m].r_ready = 1'b1;
      forever begin #1; if (s_rsp[m].r_valid) break; @(negedge clk); end
      check(s_rsp[m].r.data == d[i], $sformatf("master %0d: read word %0d %h vs %h", m, i, s_rsp[m].r.data, d[i]));
      check(s_rsp[m].r.id == AXI_ID_W'(id), $sformatf("master %0d: R id %h vs %h", m, s_rsp[m].r.id, id));
      check(s_rsp[m].r.last == (i == d.size() - 1), "RLAST");
      @(negedge clk);
      s_req[m].r_ready = 1'b0;
    end
  endtask

  task automatic master(int m, int bursts);
    for (int t = 0; t < bursts; t++) begin
      logic [63:0] d [$];
      logic [5:0] id;
      longint unsigned word;
      int len;
      len  = int'($urandom_range(1, 24));
      id   = 6'($urandom);
      word = longint'(m) * 4096 + longint'(t) * 32;
      for (int i = 0; i < len; i++) d.push_back({$urandom, $urandom});
      wr_burst(m, id, word, d);
      rd_addr(m, id, word, len);
      rd_data(m, id, d);
    end
  endtask

  // Master 0 with several reads outstanding: addresses first, data after.
  task automatic pipelined_reads();
    logic [63:0] d [4][$];
    for (int b = 0; b < 4; b++) begin
      for (int i = 0; i < 16; i++) d[b].push_back({$urandom, $urandom});
      wr_burst(0, 6'(b), 40000 + longint'(b) * 16, d[b]);
    end
    for (int b = 0; b < 4; b++) rd_addr(0, 6'(b), 40000 + longint'(b) * 16, 16);
    for (int b = 0; b < 4; b++) rd_data(0, 6'(b), d[b]);
  endtask

  // Contention and write-data integrity at the shared port.
  int n_ar_contend = 0, n_aw_contend = 0;
  always @(posedge clk) if (rst_n) begin
    int a, w;
    a = 0; w = 0;
    for (int m = 0; m < N; m++) begin
      a += int'(s_req[m].ar_valid);
      w += int'(s_req[m].aw_valid);
    end
    if (a > 1) n_ar_contend++;
    if (w > 1) n_aw_contend++;
  end

  initial begin
    for (int m = 0; m < N; m++) s_req[m] = '0;
    repeat (4) @(negedge clk);
    rst_n = 1'b1;
    fork
      master(0, 40);
      master(1, 40);
      master(2, 40);
    join
    pipelined_reads();
    $display("contention: ar=%0d aw=%0d, max reads in flight %0d",
             n_ar_contend, n_aw_contend, u_mem.max_ar_outstanding);
    check(n_ar_contend + n_aw_contend > 0, "masters contended for the port");
    check(u_mem.max_ar_outstanding >= 3, "several read bursts in flight");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
