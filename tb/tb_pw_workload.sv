// tb_pw_workload: one PW advection kernel at its full default size on a
// slice of the 512 x 512 x 64 test grid the accelerator was tuned on.
//
// The kernel keeps every default parameter (64 levels, batches of 64
// columns, 256-beat bursts, 8 bursts in flight) and runs a grid of 2 planes
// in X by 130 columns in Y by 64 levels, so each plane needs two full
// batches of 64 columns and one of 2. The fields sit in a behavioural DDR
// model that stalls at random. The test compares every source term, bit for
// bit, with the reference model and checks the rate the design promises:
// one grid point per clock cycle, with each batch plane computed in a single
// run without bubbles (4096 cycles for a full 64 x 64 plane).
module tb_pw_workload;
  import monc_pkg::*;
  import pw_ref_pkg::*;

  localparam int YB = 64;
  localparam int SX = 2, SY = 130, SZ = 64;

  logic clk = 1'b0, rst_n = 1'b0;
  always #2 clk = ~clk;

  axil_req_t ctrl;
  axil_rsp_t ctrl_rsp;
  axi_req_t  gmem;
  axi_rsp_t  gmem_rsp;
  logic      irq;

  pw_advection dut (
    .ap_clk(clk), .ap_rst_n(rst_n), .s_axi_ctrl(ctrl), .s_axi_ctrl_rsp(ctrl_rsp),
    .m_axi_gmem(gmem), .m_axi_gmem_rsp(gmem_rsp), .interrupt(irq));

  axi_mem_model u_mem (.clk, .rst_n, .s_axi(gmem), .s_axi_rsp(gmem_rsp));

  int checks = 0, failures = 0;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL: %s", what);
    end
  endtask

  // Drive on the falling edge and sample a little later, away from the
  // rising edge the design uses.
  task automatic axil_write(logic [31:0] addr, logic [31:0] data);
    @(negedge clk);
    ctrl.aw.addr = addr; ctrl.aw_valid = 1'b1;
    ctrl.w.data = data; ctrl.w.strb = 4'hF; ctrl.w_valid = 1'b1;
    forever begin #1; if (ctrl_rsp.aw_ready) break; @(negedge clk); end
    @(negedge clk);
    ctrl.aw_valid = 1'b0; ctrl.w_valid = 1'b0;
    ctrl.b_ready = 1'b1;
    forever begin #1; if (ctrl_rsp.b_valid) break; @(negedge clk); end
    @(negedge clk);
    ctrl.b_ready = 1'b0;
  endtask

  task automatic axil_read(logic [31:0] addr, output logic [31:0] data);
    @(negedge clk);
    ctrl.ar.addr = addr; ctrl.ar_valid = 1'b1;
    forever begin #1; if (ctrl_rsp.ar_ready) break; @(negedge clk); end
    @(negedge clk);
    ctrl.ar_valid = 1'b0;
    ctrl.r_ready = 1'b1;
    forever begin #1; if (ctrl_rsp.r_valid) break; @(negedge clk); end
    data = ctrl_rsp.r.data;
    @(negedge clk);
    ctrl.r_ready = 1'b0;
  endtask

  task automatic write64(logic [7:0] off, logic [63:0] val);
    axil_write(32'(off), val[31:0]);
    axil_write(32'(off) + 32'd4, val[63:32]);
  endtask

  // Word bases of the ten arrays: u v w su sv sw tzc1 tzc2 tzd1 tzd2.
  longint unsigned base [10];
  real f [3][SX+2][SY+2][SZ];
  real coef [4][SZ];
  real tcx = 0.375, tcy = -0.8125;
  int  comp_cycles = 0;

  always @(posedge clk) if (rst_n && dut.cmp_active) comp_cycles++;
  // Compute runs: each maximal stretch of cycles with the datapath fed.
  int runs [$];
  int run_len = 0;
  bit was_active = 1'b0;
  always @(posedge clk) begin
    if (rst_n && dut.cmp_active) run_len++;
    else if (was_active) begin runs.push_back(run_len); run_len = 0; end
    was_active = rst_n && dut.cmp_active;
  end

  initial begin
    logic [31:0] rd;
    longint unsigned sentinel = 64'hDEAD_BEEF_0000_0000;
    ctrl = '0;
    for (int n = 0; n < 10; n++) base[n] = longint'(n) * 65536 + 100 + 37 * n;
    for (int a = 0; a < 3; a++)
      for (int i = 0; i < SX + 2; i++)
        for (int j = 0; j < SY + 2; j++)
          for (int k = 0; k < SZ; k++) begin
            f[a][i][j][k] = rand_val();
            u_mem.mem[widx(base[a], i, j, k, SY, SZ)] = $realtobits(f[a][i][j][k]);
          end
    for (int a = 0; a < 4; a++)
      for (int k = 0; k < SZ; k++) begin
        coef[a][k] = rand_val();
        u_mem.mem[base[6+a] + longint'(k)] = $realtobits(coef[a][k]);
      end
    for (int a = 3; a < 6; a++)
      for (int i = 0; i < SX + 2; i++)
        for (int j = 0; j < SY + 2; j++)
          for (int k = 0; k < SZ; k++)
            u_mem.mem[widx(base[a], i, j, k, SY, SZ)] = sentinel;

    repeat (5) @(posedge clk);
    rst_n = 1'b1;
    repeat (2) @(posedge clk);
    for (int n = 0; n < 10; n++) write64(REG_U + 8'(8*n), base[n] * 8);
    write64(REG_TCX, $realtobits(tcx));
    write64(REG_TCY, $realtobits(tcy));
    axil_write(32'(REG_SIZE_X), SX);
    axil_write(32'(REG_SIZE_Y), SY);
    axil_write(32'(REG_SIZE_Z), SZ);
    axil_write(32'(REG_GIE), 1);
    axil_write(32'(REG_IER), 1);
    axil_read(32'(REG_AP_CTRL), rd);
    check(rd[2] == 1'b1, "kernel idle before start");
    axil_write(32'(REG_AP_CTRL), 1);

    wait (irq);
    axil_read(32'(REG_AP_CTRL), rd);
    check(rd[1] == 1'b1, "ap_done set at the end");
    axil_read(32'(REG_AP_CTRL), rd);
    check(rd[1] == 1'b0, "ap_done cleared by the read");
    axil_write(32'(REG_ISR), 1);
    @(posedge clk);
    check(irq == 1'b0, "interrupt cleared through ISR");

    for (int i = 0; i < SX + 2; i++)
      for (int j = 0; j < SY + 2; j++)
        for (int k = 0; k < SZ; k++) begin
          bit interior;
          interior = (i >= 1 && i <= SX && j >= 1 && j <= SY);
          if (interior) begin
            rst_t su3, sv3, sw3;
            real su, sv, sw;
            for (int dk = 0; dk < 3; dk++)
              for (int dj = 0; dj < 3; dj++)
                for (int di = 0; di < 3; di++) begin
                  int kk;
                  kk = k + dk - 1;
                  if (kk < 0 || kk >= SZ) kk = k;
                  su3[dk][dj][di] = f[0][i+di-1][j+dj-1][kk];
                  sv3[dk][dj][di] = f[1][i+di-1][j+dj-1][kk];
                  sw3[dk][dj][di] = f[2][i+di-1][j+dj-1][kk];
                end
            pw_point(su3, sv3, sw3, tcx, tcy, coef[0][k], coef[1][k], coef[2][k], coef[3][k],
                     k == SZ - 1, k == 0, su, sv, sw);
            check(u_mem.mem[widx(base[3], i, j, k, SY, SZ)] == $realtobits(su),
                  $sformatf("su(%0d,%0d,%0d)", i, j, k));
            check(u_mem.mem[widx(base[4], i, j, k, SY, SZ)] == $realtobits(sv),
                  $sformatf("sv(%0d,%0d,%0d)", i, j, k));
            check(u_mem.mem[widx(base[5], i, j, k, SY, SZ)] == $realtobits(sw),
                  $sformatf("sw(%0d,%0d,%0d)", i, j, k));
          end else begin
            check(u_mem.mem[widx(base[3], i, j, k, SY, SZ)] == sentinel, "su halo untouched");
          end
        end

    // Two batches (4 and 2 columns), SX planes each, SZ cycles per column.
    check(comp_cycles == SX * SY * SZ,
          $sformatf("compute cycles %0d, expected %0d", comp_cycles, SX * SY * SZ));
    check(u_mem.max_ar_outstanding > 1, "several read bursts in flight");
    // Batch-major: every plane for a full batch, twice, then the 2-column batch.
    check(runs.size() == SX * 3, $sformatf("%0d compute runs, expected %0d", runs.size(), SX * 3));
    foreach (runs[r])
      check(runs[r] == ((r / SX == 2) ? 2 * SZ : YB * SZ),
            $sformatf("compute run %0d lasted %0d cycles", r, runs[r]));

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
