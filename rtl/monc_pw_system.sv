// monc_pw_system: the PW advection board design.
//
// The host copies the flow fields into the card's two DDR4 banks by DMA,
// starts the kernels through the PCIe direct slave interface, and copies the
// source terms back by DMA. This module is everything on the FPGA between
// the PCIe interface block and the two DDR4 memory controllers, which are
// vendor blocks outside it and reached through its ports:
//
//   control: ds_axi (PCIe clock) -> axil_clock_converter -> kernel clock
//            -> axil_ctrl_interconnect -> s_axi_CTRL_BUS of every kernel
//   kernels: N_KERNELS pw_advection blocks on the kernel clock (310 MHz in
//            the paper), split into two equal groups. Kernels 0..N/2-1 form
//            group 0 and use DDR4 bank 0, the others bank 1. Each kernel's
//            m_axi_gmem goes through an axi_register_slice into its group's
//            axi_mem_interconnect, then an axi_clock_converter into the
//            bank's clock.
//   DMA:     channels 0 and 1 serve bank 0, channels 2 and 3 bank 1. Each
//            passes an axi_register_slice, the pair is joined by an
//            axi_mem_interconnect (the crossbar) and crosses from the PCIe
//            clock to the bank's clock in an axi_clock_converter.
//   banks:   per bank an axi_mem_interconnect merges the kernel group (port
//            0) with the DMA pair (port 1) in front of the memory controller.
// The two banks are entirely separate, as in the paper: a kernel or DMA
// channel of one bank cannot reach the other.
//
// Reset: the kernel domain's reset comes from a reset_sync fed by the PCIe
// reset and the clock generator's lock; each memory controller's active-high
// user reset is inverted for the logic in its clock domain; the PCIe domain
// uses the PCIe block's reset directly.
//
// Clocks: clk_pcie (250 MHz in the paper), clk_kernel (from the clock
// generator), ddr_clk[b] (each memory controller's user clock). All are
// independent.
module monc_pw_system
  import monc_pkg::*;
#(
  parameter int unsigned N_KERNELS         = 12,
  parameter int unsigned MAX_VERTICAL_SIZE = 64,
  parameter int unsigned Y_BATCH_SIZE      = 64,
  parameter int unsigned MAX_BURST         = 256,
  parameter int unsigned MAX_OUTSTANDING   = 8,
  parameter int unsigned LAT_ADD           = 8,
  parameter int unsigned LAT_MUL           = 14,
  parameter int unsigned CTRL_ADDR_SHIFT   = 16
) (
  input  logic      clk_pcie,
  input  logic      pcie_rst_n,
  input  logic      clk_kernel,
  input  logic      clk_locked,
  input  logic      ddr_clk [2],
  input  logic      ddr_ui_rst [2],
  // PCIe direct slave (control) and DMA channels.
  input  axil_req_t ds_axi,
  output axil_rsp_t ds_axi_rsp,
  input  axi_req_t  dma_axi [4],
  output axi_rsp_t  dma_axi_rsp [4],
  // DDR4 memory controller ports.
  output axi_req_t  ddr_axi [2],
  input  axi_rsp_t  ddr_axi_rsp [2],
  output logic      kernel_irq [N_KERNELS]
);

  localparam int unsigned G = N_KERNELS / 2;   // kernels per group

  // ------------------------------------------------------------- resets
  logic kernel_rst_n;
  logic ddr_rst_n [2];

  reset_sync u_kernel_reset (.clk(clk_kernel), .ext_rst_n(pcie_rst_n), .locked(clk_locked),
                             .rst_n(kernel_rst_n));
  for (genvar b = 0; b < 2; b++) begin : g_ddr_rst
    assign ddr_rst_n[b] = !ddr_ui_rst[b];
  end

  // ------------------------------------------------------------ control
  axil_req_t ctrl_k;
  axil_rsp_t ctrl_k_rsp;
  axil_req_t ctrl [N_KERNELS];
  axil_rsp_t ctrl_rsp [N_KERNELS];

  axil_clock_converter u_ctrl_cdc (
    .s_clk(clk_pcie), .s_rst_n(pcie_rst_n), .s_req(ds_axi), .s_rsp(ds_axi_rsp),
    .m_clk(clk_kernel), .m_rst_n(kernel_rst_n), .m_req(ctrl_k), .m_rsp(ctrl_k_rsp));

  axil_ctrl_interconnect #(.N(N_KERNELS), .ADDR_SHIFT(CTRL_ADDR_SHIFT)) u_ctrl_ic (
    .clk(clk_kernel), .rst_n(kernel_rst_n), .s_req(ctrl_k), .s_rsp(ctrl_k_rsp),
    .m_req(ctrl), .m_rsp(ctrl_rsp));

  // ------------------------------------------------------------ kernels
  axi_req_t gmem [N_KERNELS];
  axi_rsp_t gmem_rsp [N_KERNELS];
  axi_req_t gmem_rs [2][G];
  axi_rsp_t gmem_rs_rsp [2][G];

  for (genvar k = 0; k < N_KERNELS; k++) begin : g_kernel
    pw_advection #(
      .MAX_VERTICAL_SIZE(MAX_VERTICAL_SIZE), .Y_BATCH_SIZE(Y_BATCH_SIZE),
      .MAX_BURST(MAX_BURST), .MAX_OUTSTANDING(MAX_OUTSTANDING),
      .LAT_ADD(LAT_ADD), .LAT_MUL(LAT_MUL)
    ) u_pw (
      .ap_clk(clk_kernel), .ap_rst_n(kernel_rst_n),
      .s_axi_ctrl(ctrl[k]), .s_axi_ctrl_rsp(ctrl_rsp[k]),
      .m_axi_gmem(gmem[k]), .m_axi_gmem_rsp(gmem_rsp[k]),
      .interrupt(kernel_irq[k]));

    axi_register_slice u_rs (
      .clk(clk_kernel), .rst_n(kernel_rst_n),
      .s_req(gmem[k]), .s_rsp(gmem_rsp[k]),
      .m_req(gmem_rs[k / G][k % G]), .m_rsp(gmem_rs_rsp[k / G][k % G]));
  end

  // ----------------------------------------------------- per-bank fabric
  for (genvar b = 0; b < 2; b++) begin : g_bank
    // Kernel group.
    axi_req_t grp;
    axi_rsp_t grp_rsp;
    axi_req_t grp_x;
    axi_rsp_t grp_x_rsp;

    axi_mem_interconnect #(.N(G)) u_group_ic (
      .clk(clk_kernel), .rst_n(kernel_rst_n),
      .s_req(gmem_rs[b]), .s_rsp(gmem_rs_rsp[b]), .m_req(grp), .m_rsp(grp_rsp));

    axi_clock_converter u_group_cdc (
      .s_clk(clk_kernel), .s_rst_n(kernel_rst_n), .s_req(grp), .s_rsp(grp_rsp),
      .m_clk(ddr_clk[b]), .m_rst_n(ddr_rst_n[b]), .m_req(grp_x), .m_rsp(grp_x_rsp));

    // DMA pair.
    axi_req_t dma_rs [2];
    axi_rsp_t dma_rs_rsp [2];
    axi_req_t dma_j;
    axi_rsp_t dma_j_rsp;
    axi_req_t dma_x;
    axi_rsp_t dma_x_rsp;

    for (genvar c = 0; c < 2; c++) begin : g_dma
      axi_register_slice u_rs (
        .clk(clk_pcie), .rst_n(pcie_rst_n),
        .s_req(dma_axi[2*b + c]), .s_rsp(dma_axi_rsp[2*b + c]),
        .m_req(dma_rs[c]), .m_rsp(dma_rs_rsp[c]));
    end

    axi_mem_interconnect #(.N(2)) u_dma_xbar (
      .clk(clk_pcie), .rst_n(pcie_rst_n),
      .s_req(dma_rs), .s_rsp(dma_rs_rsp), .m_req(dma_j), .m_rsp(dma_j_rsp));

    axi_clock_converter u_dma_cdc (
      .s_clk(clk_pcie), .s_rst_n(pcie_rst_n), .s_req(dma_j), .s_rsp(dma_j_rsp),
      .m_clk(ddr_clk[b]), .m_rst_n(ddr_rst_n[b]), .m_req(dma_x), .m_rsp(dma_x_rsp));

    // Bank interconnect in front of the memory controller.
    axi_req_t bank_in [2];
    axi_rsp_t bank_in_rsp [2];
    assign bank_in[0]   = grp_x;
    assign bank_in[1]   = dma_x;
    assign grp_x_rsp    = bank_in_rsp[0];
    assign dma_x_rsp    = bank_in_rsp[1];

    axi_mem_interconnect #(.N(2)) u_bank_ic (
      .clk(ddr_clk[b]), .rst_n(ddr_rst_n[b]),
      .s_req(bank_in), .s_rsp(bank_in_rsp), .m_req(ddr_axi[b]), .m_rsp(ddr_axi_rsp[b]));
  end

endmodule
