// Shared types and constants of the PW advection accelerator.
//
// The accelerator moves IEEE-754 double precision words (64 bits) over AXI4
// buses: the kernels' data masters, the host DMA channels and the two DDR4
// memory controller ports all use the same AXI4 channel structs, bundled as a
// request struct (master to slave) and a response struct (slave to master).
// Kernel control goes over AXI4-Lite with 32-bit data, as the HLS control bus
// does. The 64-bit data width and the 34-bit address (16 GiB, two 8 GiB DDR4
// banks) are choices of this design; the paper gives neither.
package monc_pkg;

  localparam int unsigned AXI_ADDR_W = 34;
  localparam int unsigned AXI_DATA_W = 64;
  localparam int unsigned AXI_ID_W   = 8;
  localparam int unsigned AXIL_ADDR_W = 32;
  localparam int unsigned AXIL_DATA_W = 32;

  typedef logic [63:0] fp64_t;

  // A 3x3x3 neighbourhood of one flow field around grid point (k, j, i),
  // indexed [dk+1][dj+1][di+1] for offsets dk, dj, di in -1..+1 along Z, Y, X.
  typedef logic [2:0][2:0][2:0][63:0] stencil_t;

  localparam logic [1:0] AXI_BURST_INCR = 2'b01;
  localparam logic [2:0] AXI_SIZE_8B    = 3'd3;
  localparam logic [1:0] AXI_RESP_OKAY   = 2'b00;
  localparam logic [1:0] AXI_RESP_DECERR = 2'b11;

  // AW and AR carry the same fields.
  typedef struct packed {
    logic [AXI_ID_W-1:0]   id;
    logic [AXI_ADDR_W-1:0] addr;
    logic [7:0]            len;    // beats - 1
    logic [2:0]            size;
    logic [1:0]            burst;
  } axi_ax_t;

  typedef struct packed {
    logic [AXI_DATA_W-1:0]   data;
    logic [AXI_DATA_W/8-1:0] strb;
    logic                    last;
  } axi_w_t;

  typedef struct packed {
    logic [AXI_ID_W-1:0] id;
    logic [1:0]          resp;
  } axi_b_t;

  typedef struct packed {
    logic [AXI_ID_W-1:0]   id;
    logic [AXI_DATA_W-1:0] data;
    logic [1:0]            resp;
    logic                  last;
  } axi_r_t;

  typedef struct packed {
    axi_ax_t aw;
    logic    aw_valid;
    axi_w_t  w;
    logic    w_valid;
    logic    b_ready;
    axi_ax_t ar;
    logic    ar_valid;
    logic    r_ready;
  } axi_req_t;

  typedef struct packed {
    logic    aw_ready;
    logic    w_ready;
    axi_b_t  b;
    logic    b_valid;
    logic    ar_ready;
    axi_r_t  r;
    logic    r_valid;
  } axi_rsp_t;

  // AXI4-Lite channels.
  typedef struct packed {
    logic [AXIL_ADDR_W-1:0] addr;
  } axil_a_t;

  typedef struct packed {
    logic [AXIL_DATA_W-1:0]   data;
    logic [AXIL_DATA_W/8-1:0] strb;
  } axil_w_t;

  typedef struct packed {
    logic [1:0] resp;
  } axil_b_t;

  typedef struct packed {
    logic [AXIL_DATA_W-1:0] data;
    logic [1:0]             resp;
  } axil_r_t;

  typedef struct packed {
    axil_a_t aw;
    logic    aw_valid;
    axil_w_t w;
    logic    w_valid;
    logic    b_ready;
    axil_a_t ar;
    logic    ar_valid;
    logic    r_ready;
  } axil_req_t;

  typedef struct packed {
    logic    aw_ready;
    logic    w_ready;
    axil_b_t b;
    logic    b_valid;
    logic    ar_ready;
    axil_r_t r;
    logic    r_valid;
  } axil_rsp_t;

  // Kernel control register map (byte offsets on the control bus). Bit 0 of
  // AP_CTRL starts the kernel, bit 1 reports done (cleared on read), bit 2
  // idle, bit 3 ready. The 64-bit arguments are two consecutive 32-bit words,
  // low word first.
  localparam logic [7:0] REG_AP_CTRL = 8'h00;
  localparam logic [7:0] REG_GIE     = 8'h04;
  localparam logic [7:0] REG_IER     = 8'h08;
  localparam logic [7:0] REG_ISR     = 8'h0C;
  localparam logic [7:0] REG_U       = 8'h10;
  localparam logic [7:0] REG_V       = 8'h18;
  localparam logic [7:0] REG_W       = 8'h20;
  localparam logic [7:0] REG_SU      = 8'h28;
  localparam logic [7:0] REG_SV      = 8'h30;
  localparam logic [7:0] REG_SW      = 8'h38;
  localparam logic [7:0] REG_TZC1    = 8'h40;
  localparam logic [7:0] REG_TZC2    = 8'h48;
  localparam logic [7:0] REG_TZD1    = 8'h50;
  localparam logic [7:0] REG_TZD2    = 8'h58;
  localparam logic [7:0] REG_TCX     = 8'h60;
  localparam logic [7:0] REG_TCY     = 8'h68;
  localparam logic [7:0] REG_SIZE_X  = 8'h70;
  localparam logic [7:0] REG_SIZE_Y  = 8'h74;
  localparam logic [7:0] REG_SIZE_Z  = 8'h78;

endpackage
