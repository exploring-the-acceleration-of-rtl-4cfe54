// tb_pw_ctrl_regs: self-checking test of the kernel's AXI4-Lite control
// register block.
//
// Plays the host on the AXI4-Lite port and the kernel core on the other
// side. Checks: every argument word can be written (with byte strobes) and
// read back and appears on the argument outputs; ap_start is set by a host
// write and cleared by the core accepting it; ap_done is set by the core and
// cleared by the host reading AP_CTRL; ap_idle follows the core; the
// interrupt is raised only with both enables set, shows in the status
// register, and is cleared by writing 1 to the status bit; and a write
// answers one cycle after it is accepted, a read one cycle after its
// address is accepted.
module tb_pw_ctrl_regs;
  import monc_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  axil_req_t   s_axi;
  axil_rsp_t   s_axi_rsp;
  logic        ap_start, core_start = 1'b0, core_done = 1'b0, core_idle = 1'b1;
  logic [31:0] args [32];
  logic        interrupt;

  pw_ctrl_regs dut (.clk, .rst_n, .s_axi, .s_axi_rsp, .ap_start, .core_start, .core_done,
                    .core_idle, .args, .interrupt);

  int checks = 0, failures = 0;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL: %s", what);
    end
  endtask

  task automatic wr(logic [7:0] addr, logic [31:0] data, logic [3:0] strb = 4'hF);
    int n;
    @(negedge clk);
    s_axi.aw.addr = 32'(addr); s_axi.aw_valid = 1'b1;
    s_axi.w.data = data; s_axi.w.strb = strb; s_axi.w_valid = 1'b1;
    s_axi.b_ready = 1'b1;
    forever begin #1; if (s_axi_rsp.aw_ready) break; @(negedge clk); end
    check(s_axi_rsp.w_ready, "address and data accepted together");
    @(negedge clk);
    s_axi.aw_valid = 1'b0; s_axi.w_valid = 1'b0;
    n = 1;
    forever begin #1; if (s_axi_rsp.b_valid) break; @(negedge clk); n++; end
    check(n == 1, $sformatf("write response after %0d cycles", n));
    check(s_axi_rsp.b.resp == AXI_RESP_OKAY, "write OKAY");
    @(negedge clk);
    s_axi.b_ready = 1'b0;
  endtask

  task automatic rd(logic [7:0] addr, output logic [31:0] data);
    int n;
    @(negedge clk);
    s_axi.ar.addr = 32'(addr); s_axi.ar_valid = 1'b1; s_axi.r_ready = 1'b1;
    forever begin #1; if (s_axi_rsp.ar_ready) break; @(negedge clk); end
    @(negedge clk);
    s_axi.ar_valid = 1'b0;
    n = 1;
    forever begin #1; if (s_axi_rsp.r_valid) break; @(negedge clk); n++; end
    check(n == 1, $sformatf("read data after %0d cycles", n));
    data = s_axi_rsp.r.data;
    @(negedge clk);
    s_axi.r_ready = 1'b0;
  endtask

  task automatic pulse(ref logic sig);
    @(negedge clk) sig = 1'b1;
    @(negedge clk) sig = 1'b0;
  endtask

  initial begin
    logic [31:0] v, ref_args [32];
    s_axi = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;

    // Arguments: 0x10 .. 0x7C.
    for (int i = 4; i < 32; i++) begin
      ref_args[i] = $urandom;
      wr(8'(4 * i), ref_args[i]);
    end
    // Partial write: only byte 1 of word 20.
    wr(8'(4 * 20), 32'hA5A5_A5A5, 4'b0010);
    ref_args[20][15:8] = 8'hA5;
    for (int i = 4; i < 32; i++) begin
      rd(8'(4 * i), v);
      check(v == ref_args[i], $sformatf("argument word %0d: %h vs %h", i, v, ref_args[i]));
      check(args[i] == ref_args[i], $sformatf("argument output %0d", i));
    end

    // Start and idle.
    rd(REG_AP_CTRL, v);
    check(v[3:0] == 4'b1100, $sformatf("idle at reset, AP_CTRL %h", v));
    wr(REG_AP_CTRL, 32'h1);
    check(ap_start == 1'b1, "ap_start set by host");
    rd(REG_AP_CTRL, v);
    check(v[0] == 1'b1 && v[2] == 1'b0, "AP_CTRL shows start, not idle");
    core_idle = 1'b0;
    pulse(core_start);
    #1 check(ap_start == 1'b0, "ap_start cleared when core accepts");

    // Done without interrupts enabled.
    core_idle = 1'b1;
    pulse(core_done);
    #1 check(interrupt == 1'b0, "no interrupt while disabled");
    rd(REG_AP_CTRL, v);
    check(v[1] == 1'b1, "ap_done set");
    rd(REG_AP_CTRL, v);
    check(v[1] == 1'b0, "ap_done cleared by reading");

    // Interrupts: IER bit 0 (done) only, then GIE.
    wr(REG_IER, 32'h1);
    pulse(core_done);
    #1 check(interrupt == 1'b0, "no interrupt without GIE");
    rd(REG_ISR, v);
    check(v[1:0] == 2'b01, "ISR records done");
    wr(REG_GIE, 32'h1);
    #1 check(interrupt == 1'b1, "interrupt with GIE and ISR");
    wr(REG_ISR, 32'h1);
    #1 check(interrupt == 1'b0, "writing 1 clears the status bit");
    rd(REG_ISR, v);
    check(v[1:0] == 2'b00, "ISR clear");
    wr(REG_IER, 32'h3);
    pulse(core_start);
    #1 check(interrupt == 1'b1, "ready interrupt (IER bit 1) on core start");
    rd(REG_ISR, v);
    check(v[1:0] == 2'b10, "ISR records ready");
    wr(REG_ISR, 32'h2);
    wr(REG_GIE, 32'h0);
    pulse(core_done);
    #1 check(interrupt == 1'b0, "GIE off masks the interrupt");
    rd(REG_GIE, v);
    check(v == 32'h0, "GIE reads back");
    rd(REG_IER, v);
    check(v == 32'h3, "IER reads back");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
