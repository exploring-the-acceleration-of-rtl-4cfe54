// pw_advection: the PW advection kernel, one of the twelve in the system.
//
// What it does. For a grid of size_x * size_y * size_z points (plus a halo of
// one column on every side in X and Y) it reads the flow fields u, v and w
// from DDR memory, computes the Piacsek-Williams advection source terms su,
// sv and sw of every interior point, and writes them back. Fields are stored
// with Z fastest, then Y, then X: the word of point (i, j, k) is at
// base + ((i*(size_y+2) + j)*size_z + k)*8, with i in 0..size_x+1 and j in
// 0..size_y+1 counting the halo. Results are written for i in 1..size_x,
// j in 1..size_y and every k; level 0, and sw on the top level, are zero.
//
// How it works, following the paper's optimised kernel:
//  * Y batches. Columns are processed in batches of up to Y_BATCH_SIZE
//    neighbouring columns in Y, so that the pipeline is fed by many columns
//    in a row rather than draining after each one.
//  * X planes reused. Within a batch the kernel walks along X. It keeps three
//    X planes of the batch (i-1, i, i+1), each with the Y halo columns, in
//    local buffers; moving to the next X step only plane i+2 comes from DDR
//    memory. The paper copies the buffers one step down; this design instead
//    renames the three buffers in a ring, which has the same effect.
//  * Duplicated buffers. Each plane buffer is kept in three identical copies,
//    read at columns j-1, j and j+1, so the 27 operands a point needs from
//    each field can be read in one cycle. Walking up a column, the values of
//    levels k-1 and k stay in registers and only level k+1 is read.
//  * Bursts. Loads and stores are AXI4 bursts of up to MAX_BURST beats (256)
//    with up to MAX_OUTSTANDING (8) bursts in flight, split so that no burst
//    crosses a 4 KiB boundary. Every plane of a batch is one contiguous
//    region per field.
//  * Pipelined datapath. pw_datapath takes one point per cycle. Per column of
//    size_z levels the kernel spends size_z cycles, so the pipeline stays
//    full across all the columns of a batch.
// Per X step the phases are sequential: load plane i+1, compute plane i,
// store plane i. The tzc1, tzc2, tzd1 and tzd2 coefficient columns are read
// once at the start.
//
// Interface: s_axi_ctrl (AXI4-Lite, see pw_ctrl_regs), m_axi_gmem (AXI4
// master, 64-bit data, ID 0), interrupt. size_z must be 2..MAX_VERTICAL_SIZE,
// size_x and size_y at least 1, and buffers 8-byte aligned.
module pw_advection
  import monc_pkg::*;
#(
  parameter int unsigned MAX_VERTICAL_SIZE = 64,
  parameter int unsigned Y_BATCH_SIZE      = 64,
  parameter int unsigned MAX_BURST         = 256,
  parameter int unsigned MAX_OUTSTANDING   = 8,
  parameter int unsigned LAT_ADD           = 8,
  parameter int unsigned LAT_MUL           = 14
) (
  input  logic      ap_clk,
  input  logic      ap_rst_n,
  input  axil_req_t s_axi_ctrl,
  output axil_rsp_t s_axi_ctrl_rsp,
  output axi_req_t  m_axi_gmem,
  input  axi_rsp_t  m_axi_gmem_rsp,
  output logic      interrupt
);

  localparam int unsigned MZ      = MAX_VERTICAL_SIZE;
  localparam int unsigned YB      = Y_BATCH_SIZE;
  localparam int unsigned IN_DEPTH  = (YB + 2) * MZ;
  localparam int unsigned OUT_DEPTH = YB * MZ;
  localparam int unsigned IN_AW   = $clog2(IN_DEPTH);
  localparam int unsigned OUT_AW  = $clog2(OUT_DEPTH);
  localparam int unsigned KW      = $clog2(MZ + 1);
  localparam int unsigned JW      = $clog2(YB + 3);
  localparam int unsigned OSW     = $clog2(MAX_OUTSTANDING + 1);
  localparam int unsigned L1      = (LAT_ADD > LAT_MUL) ? LAT_ADD : LAT_MUL;
  localparam int unsigned DP_LAT  = L1 + LAT_MUL + LAT_ADD + LAT_MUL + 2*LAT_ADD;

  wire clk   = ap_clk;
  wire rst_n = ap_rst_n;

  // ---------------------------------------------------------------- control
  logic        ap_start, core_start, core_done, core_idle;
  logic [31:0] args [32];

  pw_ctrl_regs u_regs (
    .clk, .rst_n, .s_axi(s_axi_ctrl), .s_axi_rsp(s_axi_ctrl_rsp),
    .ap_start, .core_start, .core_done, .core_idle, .args, .interrupt);

  function automatic logic [63:0] arg64(logic [7:0] off);
    return {args[off[6:2] + 5'd1], args[off[6:2]]};
  endfunction

  // Run parameters, latched at start.
  logic [63:0] base_q [10];   // u v w su sv sw tzc1 tzc2 tzd1 tzd2
  fp64_t       tcx_q, tcy_q;
  logic [31:0] size_x_q, size_y_q;
  logic [KW-1:0] size_z_q;

  typedef enum logic [3:0] {
    S_IDLE, S_COEF, S_BATCH, S_LOAD0, S_LOAD1, S_LOADN, S_COMP, S_DRAIN,
    S_STORE, S_NEXT, S_DONE
  } state_t;
  state_t state;

  logic [31:0]   i_q;        // X plane being computed
  logic [31:0]   j0_q;       // first interior column of the batch
  logic [JW-1:0] nb_q;       // columns in this batch
  logic [1:0]    slot_m1, slot_0, slot_p1, load_slot;

  // ------------------------------------------------------------ read engine
  // Reads nreg regions of len words each, one after another, in bursts.
  logic          rd_start, rd_done, rd_busy;
  logic          rd_coef;              // destination: coefficient columns
  logic [2:0]    rd_nreg;
  logic [63:0]   rd_base [4];
  logic [31:0]   rd_len;

  logic [2:0]    ar_reg;
  logic [63:0]   ar_addr;
  logic [31:0]   ar_left;
  logic [OSW-1:0] rd_outst;
  logic          ar_valid_q;
  axi_ax_t       ar_q;

  logic [2:0]    r_reg;
  logic [31:0]   r_cnt;
  logic [KW-1:0] r_k;
  logic [JW-1:0] r_j;

  function automatic logic [8:0] burst_beats(logic [63:0] addr, logic [31:0] left);
    logic [9:0] to_4k;
    logic [31:0] n;
    to_4k = 10'((13'h1000 - {1'b0, addr[11:0]}) >> 3);
    n = left;
    if (n > 32'(MAX_BURST)) n = 32'(MAX_BURST);
    if (n > 32'(to_4k))     n = 32'(to_4k);
    return n[8:0];
  endfunction

  wire ar_fire = ar_valid_q && m_axi_gmem_rsp.ar_ready;
  wire r_fire  = m_axi_gmem_rsp.r_valid;   // r_ready is held high
  wire r_last  = r_fire && m_axi_gmem_rsp.r.last;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_busy    <= 1'b0;
      ar_valid_q <= 1'b0;
      ar_q       <= '0;
      ar_reg     <= '0;
      ar_addr    <= '0;
      ar_left    <= '0;
      rd_outst   <= '0;
      r_reg      <= '0;
      r_cnt      <= '0;
      r_k        <= '0;
      r_j        <= '0;
      rd_done    <= 1'b0;
    end else begin
      rd_done <= 1'b0;
      if (rd_start) begin
        rd_busy <= 1'b1;
        ar_reg  <= '0;
        ar_addr <= rd_base[0];
        ar_left <= rd_len;
        r_reg   <= '0;
        r_cnt   <= '0;
        r_k     <= '0;
        r_j     <= '0;
      end else if (rd_busy) begin
        // Address side.
        if (ar_fire) ar_valid_q <= 1'b0;
        if ((!ar_valid_q || ar_fire) && ar_reg < rd_nreg &&
            {1'b0, rd_outst} + (OSW+1)'(ar_fire) < (OSW+1)'(MAX_OUTSTANDING)) begin
          logic [8:0] n;
          n = burst_beats(ar_addr, ar_left);
          ar_valid_q <= 1'b1;
          ar_q.id    <= '0;
          ar_q.addr  <= ar_addr[AXI_ADDR_W-1:0];
          ar_q.len   <= 8'(n - 9'd1);
          ar_q.size  <= AXI_SIZE_8B;
          ar_q.burst <= AXI_BURST_INCR;
          if (ar_left == 32'(n)) begin
            ar_reg  <= ar_reg + 3'd1;
            ar_addr <= rd_base[2'(ar_reg + 3'd1)];
            ar_left <= rd_len;
          end else begin
            ar_addr <= ar_addr + {52'd0, n, 3'b000};
            ar_left <= ar_left - 32'(n);
          end
        end
        // Data side.
        if (r_fire) begin
          if (r_cnt == rd_len - 32'd1) begin
            r_cnt <= '0;
            r_k   <= '0;
            r_j   <= '0;
            r_reg <= r_reg + 3'd1;
            if (r_reg + 3'd1 == rd_nreg) begin
              rd_busy <= 1'b0;
              rd_done <= 1'b1;
            end
          end else begin
            r_cnt <= r_cnt + 32'd1;
            if (r_k == size_z_q - KW'(1)) begin
              r_k <= '0;
              r_j <= r_j + JW'(1);
            end else begin
              r_k <= r_k + KW'(1);
            end
          end
        end
      end
      // Outstanding bursts: issued but last beat not yet returned.
      rd_outst <= rd_outst + OSW'(ar_fire) - OSW'(r_last);
    end
  end

  // Coefficient columns, read once per run.
  fp64_t coef [4][MZ];
  always_ff @(posedge clk) begin
    if (r_fire && rd_busy && rd_coef) coef[r_reg[1:0]][r_cnt[$clog2(MZ)-1:0]] <= m_axi_gmem_rsp.r.data;
  end

  // ------------------------------------------------------- column buffers
  // buf (field f, physical slot s, copy c); copy c is read at column j-1+c.
  wire               in_we    = r_fire && rd_busy && !rd_coef;
  wire [IN_AW-1:0]   in_waddr = IN_AW'(r_j) * IN_AW'(MZ) + IN_AW'(r_k);
  logic [IN_AW-1:0]  in_raddr [3];
  fp64_t             in_rdata [3][3][3];   // [f][s][c]

  for (genvar f = 0; f < 3; f++) begin : g_f
    for (genvar s = 0; s < 3; s++) begin : g_s
      for (genvar c = 0; c < 3; c++) begin : g_c
        pw_column_ram #(.DEPTH(IN_DEPTH)) u_ram (
          .clk,
          .we   (in_we && r_reg == 3'(f) && load_slot == 2'(s)),
          .waddr(in_waddr),
          .wdata(m_axi_gmem_rsp.r.data),
          .raddr(in_raddr[c]),
          .rdata(in_rdata[f][s][c]));
      end
    end
  end

  // --------------------------------------------------------- compute sweep
  logic          cmp_active, cmp_flush;
  logic [JW-1:0] cj;        // column 1..nb
  logic [KW-1:0] ck;        // level read this cycle
  logic          d_valid, d_flush, d_have_prev;
  logic [JW-1:0] d_j, prev_j;
  logic [KW-1:0] d_k;

  always_comb begin
    for (int c = 0; c < 3; c++)
      in_raddr[c] = (IN_AW'(cj) + IN_AW'(c) - IN_AW'(1)) * IN_AW'(MZ) + IN_AW'(ck);
  end

  // Window registers: levels k-1 and k of each field's 3x3 columns.
  fp64_t lev_m1 [3][3][3], lev_0 [3][3][3], cur [3][3][3];   // [f][dj][di]
  logic [1:0] slot_of [3];
  assign slot_of = '{slot_m1, slot_0, slot_p1};

  always_comb begin
    for (int f = 0; f < 3; f++)
      for (int dj = 0; dj < 3; dj++)
        for (int di = 0; di < 3; di++)
          cur[f][dj][di] = in_rdata[f][slot_of[di]][dj];
  end

  // Point emitted this cycle.
  logic          p_valid, p_top, p_zero;
  logic [KW-1:0] p_k;
  logic [JW-1:0] p_j;
  stencil_t      st [3];

  always_comb begin
    p_valid = 1'b0; p_top = 1'b0; p_zero = 1'b0;
    p_k = '0; p_j = d_j;
    if (d_valid && !d_flush && d_k >= KW'(2)) begin
      p_valid = 1'b1; p_k = d_k - KW'(1);
    end else if (d_valid && !d_flush && d_k == KW'(1)) begin
      p_valid = 1'b1; p_k = '0; p_zero = 1'b1;
    end else if (d_valid && d_k == KW'(0) && d_have_prev) begin
      p_valid = 1'b1; p_k = size_z_q - KW'(1); p_top = 1'b1; p_j = prev_j;
    end
    for (int f = 0; f < 3; f++)
      for (int dj = 0; dj < 3; dj++)
        for (int di = 0; di < 3; di++) begin
          st[f][0][dj][di] = lev_m1[f][dj][di];
          st[f][1][dj][di] = lev_0[f][dj][di];
          st[f][2][dj][di] = cur[f][dj][di];
        end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      d_valid     <= 1'b0;
      d_flush     <= 1'b0;
      d_have_prev <= 1'b0;
      d_j         <= '0;
      d_k         <= '0;
      prev_j      <= '0;
    end else begin
      d_valid <= cmp_active || cmp_flush;
      d_flush <= cmp_flush;
      d_j     <= cj;
      d_k     <= cmp_flush ? KW'(0) : ck;
      if (d_valid) begin
        if (d_k == KW'(0)) d_have_prev <= 1'b0;
        if (d_k == size_z_q - KW'(1) && !d_flush) begin
          d_have_prev <= 1'b1;
          prev_j      <= d_j;
        end
      end
      if (state == S_BATCH) d_have_prev <= 1'b0;
    end
  end

  always_ff @(posedge clk) begin
    if (d_valid && !d_flush) begin
      lev_m1 <= lev_0;
      lev_0  <= cur;
    end
  end

  logic [$clog2(MZ)-1:0] p_ki;
  assign p_ki = p_k[$clog2(MZ)-1:0];

  logic [OUT_AW-1:0] p_tag, o_tag;
  assign p_tag = OUT_AW'(p_j - JW'(1)) * OUT_AW'(MZ) + OUT_AW'(p_k);

  logic  o_valid;
  fp64_t o_su, o_sv, o_sw;

  pw_datapath #(.LAT_ADD(LAT_ADD), .LAT_MUL(LAT_MUL), .TAG_W(OUT_AW)) u_dp (
    .clk, .rst_n,
    .in_valid(p_valid), .is_top(p_top), .is_zero(p_zero), .in_tag(p_tag),
    .u(st[0]), .v(st[1]), .w(st[2]),
    .tcx(tcx_q), .tcy(tcy_q),
    .tzc1(coef[0][p_ki]), .tzc2(coef[1][p_ki]), .tzd1(coef[2][p_ki]), .tzd2(coef[3][p_ki]),
    .out_valid(o_valid), .out_tag(o_tag), .su(o_su), .sv(o_sv), .sw(o_sw));

  // Result buffers, one per source term.
  fp64_t obuf [3][OUT_DEPTH];
  always_ff @(posedge clk) begin
    if (o_valid) begin
      obuf[0][o_tag] <= o_su;
      obuf[1][o_tag] <= o_sv;
      obuf[2][o_tag] <= o_sw;
    end
  end

  // ----------------------------------------------------------- write engine
  logic          wr_start, wr_done, wr_busy;
  logic [63:0]   wr_base [3];
  logic [31:0]   wr_len;

  logic [1:0]    aw_reg;
  logic [63:0]   aw_addr;
  logic [31:0]   aw_left;
  logic          aw_valid_q;
  axi_ax_t       aw_q;
  logic [OSW-1:0] wr_outst;   // bursts whose address is out and B not back
  logic [31:0]   aw_bursts, b_count;

  logic [1:0]    w_reg;
  logic [63:0]   w_addr;
  logic [31:0]   w_left;     // words left in region
  logic [8:0]    w_beats;    // beats left in burst
  logic [KW-1:0] w_k;
  logic [JW-1:0] w_j;
  logic          w_valid_q, w_alldone;
  axi_w_t        w_q;

  wire aw_fire = aw_valid_q && m_axi_gmem_rsp.aw_ready;
  wire w_fire  = w_valid_q && m_axi_gmem_rsp.w_ready;
  wire b_fire  = m_axi_gmem_rsp.b_valid;   // b_ready is held high

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wr_busy    <= 1'b0;
      wr_done    <= 1'b0;
      aw_reg     <= '0;
      aw_addr    <= '0;
      aw_left    <= '0;
      aw_valid_q <= 1'b0;
      aw_q       <= '0;
      wr_outst   <= '0;
      aw_bursts  <= '0;
      b_count    <= '0;
      w_reg      <= '0;
      w_addr     <= '0;
      w_left     <= '0;
      w_beats    <= '0;
      w_k        <= '0;
      w_j        <= '0;
      w_valid_q  <= 1'b0;
      w_alldone  <= 1'b0;
      w_q        <= '0;
    end else begin
      wr_done <= 1'b0;
      if (wr_start) begin
        wr_busy   <= 1'b1;
        aw_reg    <= '0;
        aw_addr   <= wr_base[0];
        aw_left   <= wr_len;
        aw_bursts <= '0;
        b_count   <= '0;
        w_reg     <= '0;
        w_addr    <= wr_base[0];
        w_left    <= wr_len;
        w_beats   <= '0;
        w_k       <= '0;
        w_j       <= '0;
        w_alldone <= 1'b0;
      end else if (wr_busy) begin
        // Address side.
        if (aw_fire) aw_valid_q <= 1'b0;
        if ((!aw_valid_q || aw_fire) && aw_reg < 2'd3 &&
            {1'b0, wr_outst} + (OSW+1)'(aw_fire) < (OSW+1)'(MAX_OUTSTANDING)) begin
          logic [8:0] n;
          n = burst_beats(aw_addr, aw_left);
          aw_valid_q <= 1'b1;
          aw_q.id    <= '0;
          aw_q.addr  <= aw_addr[AXI_ADDR_W-1:0];
          aw_q.len   <= 8'(n - 9'd1);
          aw_q.size  <= AXI_SIZE_8B;
          aw_q.burst <= AXI_BURST_INCR;
          aw_bursts  <= aw_bursts + 32'd1;
          if (aw_left == 32'(n)) begin
            aw_reg  <= aw_reg + 2'd1;
            aw_addr <= wr_base[aw_reg + 2'd1];
            aw_left <= wr_len;
          end else begin
            aw_addr <= aw_addr + {52'd0, n, 3'b000};
            aw_left <= aw_left - 32'(n);
          end
        end
        // Data side: the same burst split, replayed on the data stream.
        if (w_fire) w_valid_q <= 1'b0;
        if ((!w_valid_q || w_fire) && !w_alldone) begin
          logic [8:0] nb;
          nb = (w_beats == 9'd0) ? burst_beats(w_addr, w_left) : w_beats;
          w_valid_q <= 1'b1;
          w_q.data  <= obuf[w_reg][OUT_AW'(w_j) * OUT_AW'(MZ) + OUT_AW'(w_k)];
          w_q.strb  <= '1;
          w_q.last  <= (nb == 9'd1);
          w_beats   <= nb - 9'd1;
          w_addr    <= w_addr + 64'd8;
          if (w_k == size_z_q - KW'(1)) begin
            w_k <= '0;
            w_j <= w_j + JW'(1);
          end else begin
            w_k <= w_k + KW'(1);
          end
          if (w_left == 32'd1) begin
            w_k    <= '0;
            w_j    <= '0;
            w_reg  <= w_reg + 2'd1;
            w_addr <= wr_base[2'(w_reg + 2'd1)];
            w_left <= wr_len;
            if (w_reg == 2'd2) w_alldone <= 1'b1;
          end else begin
            w_left <= w_left - 32'd1;
          end
        end
        if (b_fire) b_count <= b_count + 32'd1;
        if (w_alldone && !w_valid_q && aw_reg == 2'd3 && !aw_valid_q &&
            b_count + 32'(b_fire) == aw_bursts) begin
          wr_busy <= 1'b0;
          wr_done <= 1'b1;
        end
      end
      wr_outst <= wr_outst + OSW'(aw_fire) - OSW'(b_fire);
    end
  end

  always_comb begin
    m_axi_gmem          = '0;
    m_axi_gmem.ar       = ar_q;
    m_axi_gmem.ar_valid = ar_valid_q;
    m_axi_gmem.r_ready  = 1'b1;
    m_axi_gmem.aw       = aw_q;
    m_axi_gmem.aw_valid = aw_valid_q;
    m_axi_gmem.w        = w_q;
    m_axi_gmem.w_valid  = w_valid_q;
    m_axi_gmem.b_ready  = 1'b1;
  end

  // ----------------------------------------------------------- sequencer
  logic [63:0] yrow;          // columns per X plane, with halo
  logic [31:0] drain_cnt;
  assign yrow = 64'(size_y_q) + 64'd2;

  function automatic logic [63:0] plane_addr(logic [63:0] base, logic [31:0] plane,
                                             logic [31:0] col);
    return base + (((64'(plane) * yrow + 64'(col)) * 64'(size_z_q)) << 3);
  endfunction

  assign core_idle = (state == S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= S_IDLE;
      core_start <= 1'b0;
      core_done  <= 1'b0;
      rd_start   <= 1'b0;
      rd_coef    <= 1'b0;
      rd_nreg    <= '0;
      rd_len     <= '0;
      wr_start   <= 1'b0;
      wr_len     <= '0;
      cmp_active <= 1'b0;
      cmp_flush  <= 1'b0;
      cj         <= '0;
      ck         <= '0;
      i_q        <= '0;
      j0_q       <= '0;
      nb_q       <= '0;
      slot_m1    <= 2'd0;
      slot_0     <= 2'd1;
      slot_p1    <= 2'd2;
      load_slot  <= 2'd0;
      drain_cnt  <= '0;
      size_x_q   <= '0;
      size_y_q   <= '0;
      size_z_q   <= '0;
      tcx_q      <= '0;
      tcy_q      <= '0;
      for (int n = 0; n < 10; n++) base_q[n] <= '0;
      for (int n = 0; n < 4; n++) rd_base[n] <= '0;
      for (int n = 0; n < 3; n++) wr_base[n] <= '0;
    end else begin
      core_start <= 1'b0;
      core_done  <= 1'b0;
      rd_start   <= 1'b0;
      wr_start   <= 1'b0;
      cmp_flush  <= 1'b0;
      unique case (state)
        S_IDLE: if (ap_start) begin
          core_start <= 1'b1;
          for (int n = 0; n < 10; n++) base_q[n] <= arg64(REG_U + 8'(8*n));
          tcx_q    <= arg64(REG_TCX);
          tcy_q    <= arg64(REG_TCY);
          size_x_q <= args[REG_SIZE_X[6:2]];
          size_y_q <= args[REG_SIZE_Y[6:2]];
          size_z_q <= KW'(args[REG_SIZE_Z[6:2]]);
          for (int n = 0; n < 4; n++) rd_base[n] <= arg64(REG_TZC1 + 8'(8*n));
          rd_nreg  <= 3'd4;
          rd_len   <= args[REG_SIZE_Z[6:2]];
          rd_coef  <= 1'b1;
          rd_start <= 1'b1;
          j0_q     <= 32'd1;
          state    <= S_COEF;
        end
        S_COEF: if (rd_done) state <= S_BATCH;
        S_BATCH: begin
          // Batch of columns j0 .. j0+nb-1; load planes 0 and 1 first.
          logic [31:0] rem;
          rem = size_y_q - j0_q + 32'd1;
          nb_q      <= (rem > 32'(YB)) ? JW'(YB) : JW'(rem);
          slot_m1   <= 2'd0;
          slot_0    <= 2'd1;
          slot_p1   <= 2'd2;
          load_slot <= 2'd0;
          i_q       <= 32'd0;
          rd_coef   <= 1'b0;
          rd_nreg   <= 3'd3;
          rd_len    <= (((rem > 32'(YB)) ? 32'(YB) : rem) + 32'd2) * 32'(size_z_q);
          for (int n = 0; n < 3; n++) rd_base[n] <= plane_addr(base_q[n], 32'd0, j0_q - 32'd1);
          rd_start  <= 1'b1;
          state     <= S_LOAD0;
        end
        S_LOAD0: if (rd_done) begin
          load_slot <= 2'd1;
          for (int n = 0; n < 3; n++) rd_base[n] <= plane_addr(base_q[n], 32'd1, j0_q - 32'd1);
          rd_start  <= 1'b1;
          i_q       <= 32'd1;
          state     <= S_LOAD1;
        end
        S_LOAD1: if (rd_done) begin
          load_slot <= slot_p1;
          for (int n = 0; n < 3; n++) rd_base[n] <= plane_addr(base_q[n], i_q + 32'd1, j0_q - 32'd1);
          rd_start  <= 1'b1;
          state     <= S_LOADN;
        end
        S_LOADN: if (rd_done) begin
          cmp_active <= 1'b1;
          cj         <= JW'(1);
          ck         <= '0;
          state      <= S_COMP;
        end
        S_COMP: begin
          if (ck == size_z_q - KW'(1)) begin
            ck <= '0;
            if (cj == nb_q) begin
              cmp_active <= 1'b0;
              cmp_flush  <= 1'b1;
              drain_cnt  <= '0;
              state      <= S_DRAIN;
            end else begin
              cj <= cj + JW'(1);
            end
          end else begin
            ck <= ck + KW'(1);
          end
        end
        S_DRAIN: begin
          drain_cnt <= drain_cnt + 32'd1;
          if (drain_cnt == 32'(DP_LAT + 3)) begin
            wr_len <= 32'(nb_q) * 32'(size_z_q);
            for (int n = 0; n < 3; n++) wr_base[n] <= plane_addr(base_q[3+n], i_q, j0_q);
            wr_start <= 1'b1;
            state    <= S_STORE;
          end
        end
        S_STORE: if (wr_done) state <= S_NEXT;
        S_NEXT: begin
          // Rotate the plane buffers: i becomes i-1, i+1 becomes i.
          slot_m1 <= slot_0;
          slot_0  <= slot_p1;
          slot_p1 <= slot_m1;
          if (i_q < size_x_q) begin
            i_q       <= i_q + 32'd1;
            load_slot <= slot_m1;
            for (int n = 0; n < 3; n++) rd_base[n] <= plane_addr(base_q[n], i_q + 32'd2, j0_q - 32'd1);
            rd_start  <= 1'b1;
            state     <= S_LOADN;
          end else if (j0_q + 32'(YB) <= size_y_q) begin
            j0_q  <= j0_q + 32'(YB);
            state <= S_BATCH;
          end else begin
            state <= S_DONE;
          end
        end
        S_DONE: begin
          core_done <= 1'b1;
          state     <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

`ifndef SYNTHESIS
  // The read data never arrives unasked for, and outstanding bursts stay
  // within the configured limit.
  a_outst: assert property (@(posedge clk) disable iff (!rst_n)
    rd_outst <= OSW'(MAX_OUTSTANDING) && wr_outst <= OSW'(MAX_OUTSTANDING));
`endif

endmodule
