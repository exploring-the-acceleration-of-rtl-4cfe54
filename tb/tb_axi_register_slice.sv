// tb_axi_register_slice: self-checking test of the AXI4 register slice.
//
// Random traffic is driven into all five channels at once (AW, W, AR from
// the slave side, B and R from the master side) with random back-pressure at
// the far end. A scoreboard per channel checks that every beat comes out
// unchanged, in order, no earlier than one cycle after it went in, and that
// none is lost or duplicated. In a phase with every valid and ready held
// high, each channel must pass one beat per clock cycle (a register slice
// adds latency, never bandwidth loss). A phase with the far end stalled
// checks that the two-entry buffers fill and hold without loss.
module tb_axi_register_slice;
  import monc_pkg::*;

  timeunit 1ns;
  timeprecision 100ps;

  logic clk = 1'b0;
  always #5 clk = ~clk;
  wire s_clk = clk;
  wire m_clk = clk;
  logic rst_n = 1'b0;

  axi_req_t s_req, m_req;
  axi_rsp_t s_rsp, m_rsp;

  axi_register_slice dut (.clk, .rst_n, .s_req, .s_rsp, .m_req, .m_rsp);

  int checks = 0, failures = 0;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL: %s", what);
    end
  endtask

  // Channel c: 0 AW, 1 W, 2 AR (slave to master); 3 B, 4 R (master to slave).
  localparam int W [5] = '{$bits(axi_ax_t), $bits(axi_w_t), $bits(axi_ax_t), $bits(axi_b_t), $bits(axi_r_t)};

  logic [127:0] src_d [5];
  logic         src_v [5], dst_r [5];
  logic         in_rdy [5], out_v [5];
  logic [127:0] out_d [5];
  int           phase = 0;          // 0 random, 1 full rate, 2 far end stalled

  always_comb begin
    s_req = '0;
    m_rsp = '0;
    s_req.aw_valid = src_v[0]; s_req.aw = axi_ax_t'(src_d[0][W[0]-1:0]);
    s_req.w_valid  = src_v[1]; s_req.w  = axi_w_t'(src_d[1][W[1]-1:0]);
    s_req.ar_valid = src_v[2]; s_req.ar = axi_ax_t'(src_d[2][W[2]-1:0]);
    m_rsp.b_valid  = src_v[3]; m_rsp.b  = axi_b_t'(src_d[3][W[3]-1:0]);
    m_rsp.r_valid  = src_v[4]; m_rsp.r  = axi_r_t'(src_d[4][W[4]-1:0]);
    m_rsp.aw_ready = dst_r[0];
    m_rsp.w_ready  = dst_r[1];
    m_rsp.ar_ready = dst_r[2];
    s_req.b_ready  = dst_r[3];
    s_req.r_ready  = dst_r[4];
    in_rdy[0] = s_rsp.aw_ready; in_rdy[1] = s_rsp.w_ready; in_rdy[2] = s_rsp.ar_ready;
    in_rdy[3] = m_req.b_ready;  in_rdy[4] = m_req.r_ready;
    out_v[0] = m_req.aw_valid;  out_d[0] = 128'(m_req.aw);
    out_v[1] = m_req.w_valid;   out_d[1] = 128'(m_req.w);
    out_v[2] = m_req.ar_valid;  out_d[2] = 128'(m_req.ar);
    out_v[3] = s_rsp.b_valid;   out_d[3] = 128'(s_rsp.b);
    out_v[4] = s_rsp.r_valid;   out_d[4] = 128'(s_rsp.r);
  end

  logic [127:0] exp_d [5][$];
  longint       exp_t [5][$];
  int           n_in [5], n_out [5], max_fly [5], full_rate_out [5];
  bit           fired [5];
  longint       cyc_s = 0, cyc_m = 0;

  function automatic logic [127:0] rnd(int c);
    logic [127:0] x;
    x = {$urandom, $urandom, $urandom, $urandom};
    return x & ((128'd1 << W[c]) - 128'd1);
  endfunction

  // Input side of channel c is clocked by s_clk for c < 3, m_clk otherwise.
  task automatic take_in(int c, longint cyc);
    fired[c] = 1'b0;
    if (src_v[c] && in_rdy[c]) begin
      exp_d[c].push_back(src_d[c]);
      exp_t[c].push_back(cyc);
      n_in[c]++;
      fired[c] = 1'b1;
    end
  endtask

  task automatic take_out(int c, longint cyc);
    if (out_v[c] && dst_r[c]) begin
      if (exp_d[c].size() == 0) check(1'b0, $sformatf("channel %0d: beat from nowhere", c));
      else begin
        logic [127:0] e;
        longint t;
        e = exp_d[c].pop_front();
        t = exp_t[c].pop_front();
        check(out_d[c] == e, $sformatf("channel %0d: beat %0d payload %h vs %h", c, n_out[c], out_d[c], e));
        check(cyc >= t + 1, $sformatf("channel %0d: beat out after %0d cycles", c, cyc - t));
      end
      n_out[c]++;
      if (phase == 1) full_rate_out[c]++;
    end
    if (n_in[c] - n_out[c] > max_fly[c]) max_fly[c] = n_in[c] - n_out[c];
  endtask

  // Percent chance of a new beat and of the far end being ready, by phase
  // (3 drains: no new beats, every sink open).
  function automatic int prob_v();
    return (phase == 0) ? 60 : (phase == 3) ? 0 : 100;
  endfunction
  function automatic int prob_r();
    return (phase == 0) ? 60 : (phase == 2) ? 0 : 100;
  endfunction

  task automatic drive(int c);
    int pv, pr;
    pv = prob_v();
    pr = prob_r();
    if (!src_v[c] || fired[c]) begin
      src_v[c] = ($urandom_range(99) < pv);
      src_d[c] = rnd(c);
    end
    dst_r[c] = ($urandom_range(99) < pr);
  endtask

  always @(posedge s_clk) if (rst_n) begin
    cyc_s++;
    for (int c = 0; c < 3; c++) take_in(c, cyc_s);
    for (int c = 3; c < 5; c++) take_out(c, cyc_s);
  end
  always @(posedge m_clk) if (rst_n) begin
    cyc_m++;
    for (int c = 0; c < 3; c++) take_out(c, cyc_m);
    for (int c = 3; c < 5; c++) take_in(c, cyc_m);
  end
  always @(negedge s_clk) begin
    for (int c = 0; c < 3; c++) if (!rst_n) begin src_v[c] = 1'b0; src_d[c] = '0; end else drive(c);
    for (int c = 3; c < 5; c++) if (!rst_n) dst_r[c] = 1'b0; else dst_r[c] = ($urandom_range(99) < prob_r());
  end
  always @(negedge m_clk) begin
    for (int c = 3; c < 5; c++) if (!rst_n) begin src_v[c] = 1'b0; src_d[c] = '0; end else drive(c);
    for (int c = 0; c < 3; c++) if (!rst_n) dst_r[c] = 1'b0; else dst_r[c] = ($urandom_range(99) < prob_r());
  end

  initial begin
    for (int c = 0; c < 5; c++) begin
      n_in[c] = 0; n_out[c] = 0; max_fly[c] = 0; full_rate_out[c] = 0; fired[c] = 0;
      src_v[c] = 0; dst_r[c] = 0; src_d[c] = '0;
    end
    repeat (5) @(posedge s_clk);
    rst_n = 1'b1;
    repeat (2000) @(posedge s_clk);
    phase = 2;                       // far end stalled: buffers fill
    repeat (100) @(posedge s_clk);
    for (int c = 0; c < 5; c++) begin
      int fly;
      fly = n_in[c] - n_out[c];
      check(fly == 2,
            $sformatf("channel %0d holds %0d beats when stalled", c, fly));
    end
    phase = 0;
    repeat (500) @(posedge s_clk);
    phase = 1;                       // everything valid and ready
    repeat (10) @(posedge s_clk);
    for (int c = 0; c < 5; c++) full_rate_out[c] = 0;
    repeat (200) @(posedge s_clk);
    phase = 0;
    for (int c = 0; c < 5; c++) check(full_rate_out[c] >= 199, $sformatf("channel %0d passed %0d beats in 200 cycles", c, full_rate_out[c]));
    repeat (1000) @(posedge s_clk);
    // Drain: stop sources, open every sink.
    phase = 3;
    repeat (200) @(posedge s_clk);
    for (int c = 0; c < 5; c++) begin
      check(n_in[c] == n_out[c] && exp_d[c].size() == 0,
            $sformatf("channel %0d: %0d beats in, %0d out", c, n_in[c], n_out[c]));
      check(n_in[c] > 500, $sformatf("channel %0d carried only %0d beats", c, n_in[c]));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge s_clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
