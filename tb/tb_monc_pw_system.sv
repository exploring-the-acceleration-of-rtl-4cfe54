// tb_monc_pw_system: end-to-end test of the whole board design, with every
// parameter at its default (twelve kernels, 64-level columns, batches of 64
// columns, 256-beat bursts).
//
// The testbench plays the host and the two memory controllers (behavioural
// DDR models that stall at random), with all four clocks running at
// unrelated rates. It does what the host software does:
//   1. copies u, v, w and the four vertical coefficient columns of twelve
//      different grids into the two DDR banks over the four DMA channels,
//      all channels at once (channels 0/1 to bank 0, 2/3 to bank 1);
//   2. programs and starts all twelve kernels over the direct slave port
//      (kernel n at control address n << 16) and waits for every interrupt;
//   3. copies su, sv and sw back over the DMA channels and compares every
//      word, bit for bit, with the reference model.
// The grids are chosen so that each mechanism of the design happens: a grid
// of 66 columns in Y (two Y batches), a grid with the full 64 levels, grids
// with 2 levels, bursts split at 4 KiB boundaries, several read bursts in
// flight, kernels and DMA channels contending in the interconnects, register
// slices back-pressured, and a control access outside every kernel window
// (answered with DECERR). Each is counted and a failure is counted for any
// that never happened.
module tb_monc_pw_system;
  import monc_pkg::*;
  import pw_ref_pkg::*;

  timeunit 1ns;
  timeprecision 1ps;

  localparam int NK = 12;
  localparam int G  = NK / 2;

  logic clk_pcie = 1'b0, clk_kernel = 1'b0;
  logic ddr_clk [2];
  logic pcie_rst_n = 1'b0, clk_locked = 1'b0;
  logic ddr_ui_rst [2];

  initial begin ddr_clk[0] = 1'b0; ddr_clk[1] = 1'b0; end
  always #2.0   clk_pcie   = ~clk_pcie;     // 250 MHz
  always #1.6   clk_kernel = ~clk_kernel;   // ~310 MHz
  always #1.667 ddr_clk[0] = ~ddr_clk[0];   // 300 MHz
  always #1.9   ddr_clk[1] = ~ddr_clk[1];

  axil_req_t ds;
  axil_rsp_t ds_rsp;
  axi_req_t  dma [4];
  axi_rsp_t  dma_rsp [4];
  axi_req_t  ddr [2];
  axi_rsp_t  ddr_rsp [2];
  logic      irq [NK];

  monc_pw_system dut (
    .clk_pcie, .pcie_rst_n, .clk_kernel, .clk_locked, .ddr_clk, .ddr_ui_rst,
    .ds_axi(ds), .ds_axi_rsp(ds_rsp), .dma_axi(dma), .dma_axi_rsp(dma_rsp),
    .ddr_axi(ddr), .ddr_axi_rsp(ddr_rsp), .kernel_irq(irq));

  wire ddr0_rst_n = !ddr_ui_rst[0];
  wire ddr1_rst_n = !ddr_ui_rst[1];
  axi_mem_model u_mem0 (.clk(ddr_clk[0]), .rst_n(ddr0_rst_n), .s_axi(ddr[0]), .s_axi_rsp(ddr_rsp[0]));
  axi_mem_model u_mem1 (.clk(ddr_clk[1]), .rst_n(ddr1_rst_n), .s_axi(ddr[1]), .s_axi_rsp(ddr_rsp[1]));

  int checks = 0, failures = 0;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL: %s", what);
    end
  endtask

  // ------------------------------------------------------ host: control
  // Drive on the falling edge of the PCIe clock, sample 1 ns later.
  task automatic ds_write(logic [31:0] addr, logic [31:0] data);
    @(negedge clk_pcie);
    ds.aw.addr = addr; ds.aw_valid = 1'b1;
    ds.w.data = data; ds.w.strb = 4'hF; ds.w_valid = 1'b1;
    forever begin #1; if (ds_rsp.aw_ready) break; @(negedge clk_pcie); end
    @(negedge clk_pcie);
    ds.aw_valid = 1'b0; ds.w_valid = 1'b0; ds.b_ready = 1'b1;
    forever begin #1; if (ds_rsp.b_valid) break; @(negedge clk_pcie); end
    @(negedge clk_pcie);
    ds.b_ready = 1'b0;
  endtask

  task automatic ds_read(logic [31:0] addr, output logic [31:0] data, output logic [1:0] resp);
    @(negedge clk_pcie);
    ds.ar.addr = addr; ds.ar_valid = 1'b1;
    forever begin #1; if (ds_rsp.ar_ready) break; @(negedge clk_pcie); end
    @(negedge clk_pcie);
    ds.ar_valid = 1'b0; ds.r_ready = 1'b1;
    forever begin #1; if (ds_rsp.r_valid) break; @(negedge clk_pcie); end
    data = ds_rsp.r.data; resp = ds_rsp.r.resp;
    @(negedge clk_pcie);
    ds.r_ready = 1'b0;
  endtask

  // ---------------------------------------------------------- host: DMA
  function automatic int burst_len(longint unsigned byte_addr, int left);
    int to4k;
    to4k = int'((4096 - (byte_addr % 4096)) / 8);
    return (left < 256) ? ((left < to4k) ? left : to4k) : ((256 < to4k) ? 256 : to4k);
  endfunction

  task automatic dma_write(int ch, longint unsigned word, logic [63:0] data [$]);
    int done = 0;
    while (done < data.size()) begin
      int n;
      longint unsigned a;
      a = (word + longint'(done)) * 8;
      n = burst_len(a, data.size() - done);
      @(negedge clk_pcie);
      dma[ch].aw = '{id: AXI_ID_W'(ch), addr: AXI_ADDR_W'(a), len: 8'(n - 1),
                     size: AXI_SIZE_8B, burst: AXI_BURST_INCR};
      dma[ch].aw_valid = 1'b1;
      forever begin #1; if (dma_rsp[ch].aw_ready) break; @(negedge clk_pcie); end
      @(negedge clk_pcie);
      dma[ch].aw_valid = 1'b0;
      for (int m = 0; m < n; m++) begin
        dma[ch].w = '{data: data[done + m], strb: '1, last: (m == n - 1)};
        dma[ch].w_valid = 1'b1;
        forever begin #1; if (dma_rsp[ch].w_ready) break; @(negedge clk_pcie); end
        @(negedge clk_pcie);
      end
      dma[ch].w_valid = 1'b0;
      dma[ch].b_ready = 1'b1;
      forever begin #1; if (dma_rsp[ch].b_valid) break; @(negedge clk_pcie); end
      check(dma_rsp[ch].b.id == AXI_ID_W'(ch), "DMA write response ID");
      @(negedge clk_pcie);
      dma[ch].b_ready = 1'b0;
      done += n;
    end
  endtask

  task automatic dma_read(int ch, longint unsigned word, int count, output logic [63:0] data [$]);
    int done = 0;
    logic [63:0] got [$];
    while (done < count) begin
      int n;
      longint unsigned a;
      a = (word + longint'(done)) * 8;
      n = burst_len(a, count - done);
      @(negedge clk_pcie);
      dma[ch].ar = '{id: AXI_ID_W'(ch), addr: AXI_ADDR_W'(a), len: 8'(n - 1),
                     size: AXI_SIZE_8B, burst: AXI_BURST_INCR};
      dma[ch].ar_valid = 1'b1;
      forever begin #1; if (dma_rsp[ch].ar_ready) break; @(negedge clk_pcie); end
      @(negedge clk_pcie);
      dma[ch].ar_valid = 1'b0;
      dma[ch].r_ready = 1'b1;
      for (int m = 0; m < n; m++) begin
        forever begin #1; if (dma_rsp[ch].r_valid) break; @(negedge clk_pcie); end
        got.push_back(dma_rsp[ch].r.data);
        check(dma_rsp[ch].r.last == (m == n - 1), "DMA read RLAST");
        @(negedge clk_pcie);
      end
      dma[ch].r_ready = 1'b0;
      done += n;
    end
    data = got;
  endtask

  // ------------------------------------------------------------ problems
  int sx [NK], sy [NK], sz [NK];
  longint unsigned base [NK][10];            // word bases: u v w su sv sw tzc1..tzd2
  real fld [NK][3][$];
  real cf  [NK][4][$];
  real tcx [NK], tcy [NK];

  function automatic int npts(int k);
    return (sx[k] + 2) * (sy[k] + 2) * sz[k];
  endfunction

  // Channel of a kernel: the bank's two channels take turns.
  function automatic int chan(int k);
    return 2 * (k / G) + (k % 2);
  endfunction

  task automatic upload(int ch);
    for (int k = 0; k < NK; k++) begin
      if (chan(k) != ch) continue;
      for (int a = 0; a < 3; a++) begin
        logic [63:0] d [$];
        foreach (fld[k][a][n]) d.push_back($realtobits(fld[k][a][n]));
        dma_write(ch, base[k][a], d);
      end
      for (int a = 0; a < 4; a++) begin
        logic [63:0] d [$];
        foreach (cf[k][a][n]) d.push_back($realtobits(cf[k][a][n]));
        dma_write(ch, base[k][6+a], d);
      end
    end
  endtask

  task automatic download_and_check(int ch);
    for (int k = 0; k < NK; k++) begin
      logic [63:0] res [3][$];
      if (chan(k) != ch) continue;
      for (int a = 0; a < 3; a++) dma_read(ch, base[k][3+a], npts(k), res[a]);
      for (int i = 1; i <= sx[k]; i++)
        for (int j = 1; j <= sy[k]; j++)
          for (int kk = 0; kk < sz[k]; kk++) begin
            rst_t s3 [3];
            real r [3];
            int at;
            for (int a = 0; a < 3; a++)
              for (int dk = 0; dk < 3; dk++)
                for (int dj = 0; dj < 3; dj++)
                  for (int di = 0; di < 3; di++) begin
                    int lv, ix;
                    lv = kk + dk - 1;
                    if (lv < 0 || lv >= sz[k]) lv = kk;
                    ix = int'(widx(0, i+di-1, j+dj-1, lv, sy[k], sz[k]));
                    s3[a][dk][dj][di] = fld[k][a][ix];
                  end
            pw_point(s3[0], s3[1], s3[2], tcx[k], tcy[k], cf[k][0][kk], cf[k][1][kk],
                     cf[k][2][kk], cf[k][3][kk], kk == sz[k] - 1, kk == 0, r[0], r[1], r[2]);
            at = int'(widx(0, i, j, kk, sy[k], sz[k]));
            for (int a = 0; a < 3; a++)
              check(res[a][at] == $realtobits(r[a]),
                    $sformatf("kernel %0d field %0d (%0d,%0d,%0d): %h vs %h", k, a, i, j, kk,
                              res[a][at], $realtobits(r[a])));
          end
    end
  endtask

  // ---------------------------------------------------- mechanism counters
  int n_batch2 = 0, n_split4k = 0, n_grp_contend = 0, n_xbar_contend = 0;
  int n_bank_contend = 0, n_rs_backpressure = 0, n_decerr = 0, n_irq = 0;
  int n_full_column = 0, n_short_column = 0;

  always @(posedge clk_kernel) begin
    int v0, v1;
    if (dut.g_kernel[0].u_pw.j0_q > 32'd1) n_batch2++;
    v0 = 0; v1 = 0;
    for (int n = 0; n < G; n++) begin
      v0 += int'(dut.gmem_rs[0][n].ar_valid || dut.gmem_rs[0][n].aw_valid);
      v1 += int'(dut.gmem_rs[1][n].ar_valid || dut.gmem_rs[1][n].aw_valid);
    end
    if (v0 > 1 || v1 > 1) n_grp_contend++;
    if (dut.g_kernel[3].u_rs.u_r.skid_v || dut.g_kernel[0].u_rs.u_w.skid_v) n_rs_backpressure++;
  end

  always @(posedge clk_pcie) begin
    for (int b = 0; b < 2; b++)
      if ((dma[2*b].ar_valid || dma[2*b].aw_valid) && (dma[2*b+1].ar_valid || dma[2*b+1].aw_valid))
        n_xbar_contend++;
  end

  always @(posedge ddr_clk[0]) begin
    if (ddr[0].ar_valid && ddr_rsp[0].ar_ready && 32'(ddr[0].ar.len) + 1 < 256 &&
        ((ddr[0].ar.addr + (34'(ddr[0].ar.len) + 1) * 8) % 4096) == 0)
      n_split4k++;
    if ((dut.g_bank[0].bank_in[0].ar_valid || dut.g_bank[0].bank_in[0].aw_valid ||
         dut.g_bank[0].bank_in[0].w_valid || dut.g_bank[0].bank_in_rsp[0].r_valid) &&
        (dut.g_bank[0].bank_in[1].ar_valid || dut.g_bank[0].bank_in[1].aw_valid ||
         dut.g_bank[0].bank_in[1].w_valid || dut.g_bank[0].bank_in_rsp[1].r_valid))
      n_bank_contend++;
  end

  // ---------------------------------------------------------------- main
  initial begin
    logic [31:0] rd;
    logic [1:0]  resp;
    bit          seen [NK];
    longint      t0, t1;

    ds = '0;
    for (int c = 0; c < 4; c++) dma[c] = '0;
    ddr_ui_rst[0] = 1'b1; ddr_ui_rst[1] = 1'b1;

    // Grids. Kernel 0: two Y batches. Kernel 1: full 64 levels.
    // Kernels 5 and 10: two levels.
    for (int k = 0; k < NK; k++) begin
      sx[k] = 1 + (k % 3);
      sy[k] = 2 + (k % 4);
      sz[k] = 2 + (k % 5) * 3;
    end
    sx[0] = 1; sy[0] = 66; sz[0] = 4;
    sx[1] = 2; sy[1] = 2;  sz[1] = 64;
    for (int k = 0; k < NK; k++) begin
      if (sz[k] == 64) n_full_column++;
      if (sz[k] == 2)  n_short_column++;
      for (int a = 0; a < 10; a++)
        base[k][a] = longint'(k % G) * 131072 + longint'(a) * 8192 + longint'(13 * a + 5 * k);
      for (int a = 0; a < 3; a++)
        for (int n = 0; n < npts(k); n++) fld[k][a].push_back(rand_val());
      for (int a = 0; a < 4; a++)
        for (int n = 0; n < sz[k]; n++) cf[k][a].push_back(rand_val() / 8.0);
      tcx[k] = rand_val() / 4.0;
      tcy[k] = rand_val() / 4.0;
    end

    repeat (10) @(negedge clk_pcie);
    pcie_rst_n = 1'b1;
    clk_locked = 1'b1;
    ddr_ui_rst[0] = 1'b0; ddr_ui_rst[1] = 1'b0;
    repeat (40) @(negedge clk_pcie);

    // 1. Fields to the card, four channels at once.
    fork
      upload(0);
      upload(1);
      upload(2);
      upload(3);
    join
    for (int k = 0; k < NK; k++)
      for (int a = 0; a < 3; a++)
        for (int n = 0; n < npts(k); n++) begin
          logic [63:0] got;
          got = (k < G) ? u_mem0.peek(base[k][a] + longint'(n)) : u_mem1.peek(base[k][a] + longint'(n));
          check(got == $realtobits(fld[k][a][n]), $sformatf("upload kernel %0d field %0d word %0d: %h vs %h", k, a, n, got, $realtobits(fld[k][a][n])));
        end

    // 2. Program and start every kernel.
    for (int k = 0; k < NK; k++) begin
      logic [31:0] kb;
      kb = 32'(k) << 16;
      for (int a = 0; a < 10; a++) begin
        ds_write(kb + 32'(REG_U) + 32'(8 * a), 32'(base[k][a] * 8));
        ds_write(kb + 32'(REG_U) + 32'(8 * a) + 4, 32'((base[k][a] * 8) >> 32));
      end
      ds_write(kb + 32'(REG_TCX), $realtobits(tcx[k]) & 64'hFFFF_FFFF);
      ds_write(kb + 32'(REG_TCX) + 4, $realtobits(tcx[k]) >> 32);
      ds_write(kb + 32'(REG_TCY), $realtobits(tcy[k]) & 64'hFFFF_FFFF);
      ds_write(kb + 32'(REG_TCY) + 4, $realtobits(tcy[k]) >> 32);
      ds_write(kb + 32'(REG_SIZE_X), 32'(sx[k]));
      ds_write(kb + 32'(REG_SIZE_Y), 32'(sy[k]));
      ds_write(kb + 32'(REG_SIZE_Z), 32'(sz[k]));
      ds_write(kb + 32'(REG_GIE), 1);
      ds_write(kb + 32'(REG_IER), 1);
    end
    ds_read(32'(NK) << 16, rd, resp);
    check(resp == AXI_RESP_DECERR, "access outside every kernel window is refused");
    if (resp == AXI_RESP_DECERR) n_decerr++;
    t0 = longint'($time);
    // While the kernels start and run, the host reads back an input field
    // over DMA, so host and kernel traffic share bank 0.
    fork
      for (int k = 0; k < NK; k++) ds_write((32'(k) << 16) + 32'(REG_AP_CTRL), 1);
      begin
        logic [63:0] back [$];
        for (int a = 0; a < 3; a++) begin
          dma_read(0, base[2][a], npts(2), back);
          foreach (back[n])
            check(back[n] == $realtobits(fld[2][a][n]), $sformatf("read-back during run, word %0d", n));
        end
      end
    join

    for (int k = 0; k < NK; k++) seen[k] = 0;
    while (n_irq < NK) begin
      @(negedge clk_pcie);
      for (int k = 0; k < NK; k++) if (irq[k] && !seen[k]) begin seen[k] = 1; n_irq++; end
    end
    t1 = longint'($time);
    $display("all %0d kernels done in %0d ns", NK, t1 - t0);
    for (int k = 0; k < NK; k++) begin
      ds_read((32'(k) << 16) + 32'(REG_AP_CTRL), rd, resp);
      check(rd[1] == 1'b1, $sformatf("kernel %0d reports done", k));
    end

    // 3. Results back to the host, four channels at once, and compared.
    fork
      download_and_check(0);
      download_and_check(1);
      download_and_check(2);
      download_and_check(3);
    join

    $display("mechanisms: ybatch2=%0d split4k=%0d group_contention=%0d xbar_contention=%0d bank_contention=%0d regslice_backpressure=%0d decerr=%0d irq=%0d full_col=%0d short_col=%0d max_ar_outstanding=%0d/%0d",
             n_batch2, n_split4k, n_grp_contend, n_xbar_contend, n_bank_contend,
             n_rs_backpressure, n_decerr, n_irq, n_full_column, n_short_column,
             u_mem0.max_ar_outstanding, u_mem1.max_ar_outstanding);
    check(n_batch2 > 0, "a second Y batch was processed");
    check(n_split4k > 0, "a burst was split at a 4 KiB boundary");
    check(n_grp_contend > 0, "kernels contended in a group interconnect");
    check(n_xbar_contend > 0, "DMA channels contended in a crossbar");
    check(n_bank_contend > 0, "kernel group and DMA met in a bank interconnect");
    check(n_rs_backpressure > 0, "a register slice absorbed back-pressure");
    check(n_decerr > 0, "decode error seen");
    check(n_irq == NK, "every kernel raised its interrupt");
    check(n_full_column > 0 && n_short_column > 0, "full and two-level columns run");
    check(u_mem0.max_ar_outstanding > 1 && u_mem1.max_ar_outstanding > 1,
          "several read bursts in flight at each bank");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (300_000) @(posedge clk_pcie);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
