// tb_pw_datapath: self-checking test of the pipelined advection arithmetic.
//
// Feeds 400 random neighbourhoods, one per cycle with occasional idle
// cycles, with random top-level and bottom-level flags and per-point
// coefficients. Each result must equal the reference model bit for bit, come
// out with its own tag, and appear exactly LATENCY cycles after it went in
// (66 cycles with the default unit latencies).
module tb_pw_datapath;
  import monc_pkg::*;
  import pw_ref_pkg::*;

  localparam int LATENCY = 14 + 14 + 8 + 14 + 8 + 8;
  localparam int N = 400;

  logic clk = 1'b0, rst_n = 1'b0;
  always #2 clk = ~clk;

  logic in_valid, is_top, is_zero, out_valid;
  logic [15:0] in_tag, out_tag;
  stencil_t u, v, w;
  fp64_t tcx, tcy, tzc1, tzc2, tzd1, tzd2, su, sv, sw;

  pw_datapath dut (.clk, .rst_n, .in_valid, .is_top, .is_zero, .in_tag, .u, .v, .w,
                   .tcx, .tcy, .tzc1, .tzc2, .tzd1, .tzd2,
                   .out_valid, .out_tag, .su, .sv, .sw);

  int checks = 0, failures = 0;
  int unsigned cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  typedef struct { int unsigned t_in; logic [15:0] tag; fp64_t su, sv, sw; } exp_t;
  exp_t q [$];

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL: %s", what);
    end
  endtask

  // Checker: sample at the falling edge.
  initial begin
    forever begin
      @(negedge clk);
      if (out_valid) begin
        if (q.size() == 0) check(1'b0, "result without input");
        else begin
          exp_t e;
          e = q.pop_front();
          check(cyc - e.t_in == LATENCY, $sformatf("latency %0d", cyc - e.t_in));
          check(out_tag == e.tag, "tag");
          check(su == e.su, $sformatf("su %h vs %h", su, e.su));
          check(sv == e.sv, $sformatf("sv %h vs %h", sv, e.sv));
          check(sw == e.sw, $sformatf("sw %h vs %h", sw, e.sw));
        end
      end
    end
  end

  initial begin
    in_valid = 1'b0; is_top = 1'b0; is_zero = 1'b0; in_tag = '0;
    u = '0; v = '0; w = '0;
    tcx = '0; tcy = '0; tzc1 = '0; tzc2 = '0; tzd1 = '0; tzd2 = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int n = 0; n < N; n++) begin
      rst_t ru, rv, rw;
      real c [6];
      exp_t e;
      real rsu, rsv, rsw;
      @(negedge clk);
      if ($urandom_range(9) == 0) begin
        in_valid = 1'b0;
        continue;
      end
      for (int a = 0; a < 3; a++)
        for (int b2 = 0; b2 < 3; b2++)
          for (int d = 0; d < 3; d++) begin
            ru[a][b2][d] = rand_val(); u[a][b2][d] = $realtobits(ru[a][b2][d]);
            rv[a][b2][d] = rand_val(); v[a][b2][d] = $realtobits(rv[a][b2][d]);
            rw[a][b2][d] = rand_val(); w[a][b2][d] = $realtobits(rw[a][b2][d]);
          end
      for (int m = 0; m < 6; m++) c[m] = rand_val();
      tcx = $realtobits(c[0]); tcy = $realtobits(c[1]);
      tzc1 = $realtobits(c[2]); tzc2 = $realtobits(c[3]);
      tzd1 = $realtobits(c[4]); tzd2 = $realtobits(c[5]);
      is_top  = ($urandom_range(5) == 0);
      is_zero = !is_top && ($urandom_range(7) == 0);
      in_tag  = 16'(n);
      in_valid = 1'b1;
      pw_point(ru, rv, rw, c[0], c[1], c[2], c[3], c[4], c[5], is_top, is_zero, rsu, rsv, rsw);
      e.t_in = cyc; e.tag = in_tag;
      e.su = $realtobits(rsu); e.sv = $realtobits(rsv); e.sw = $realtobits(rsw);
      q.push_back(e);
    end
    @(negedge clk);
    in_valid = 1'b0;
    repeat (LATENCY + 5) @(negedge clk);
    check(q.size() == 0, "every input produced a result");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (N * 2 + 1000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
