// vega_soc: top level of the SoC. Four switchable domains plus an always-on
// domain are wired here:
//   SoC domain      fabric-controller (FC) data port, 1.5 MB of 4-bank
//                   word-interleaved L2, 64 kB FC private L2 (2 banks),
//                   the uDMA and the SoC peripheral bus
//   cluster domain  the 9-core cluster with TCDM, HWCE, DMA, event unit and
//                   FPU interconnect (own clock, bridged to the SoC)
//   MRAM domain     4 MB MRAM macro and its controller, reached by the uDMA
//                   (channel 0) and programmed over the peripheral bus
//   always-on/CWU   cognitive wake-up unit, power manager, RTC (own clock,
//                   bridged to the SoC peripheral bus)
// Address map (vega_pkg): L2 0x1C20_0000, FC private L2 0x1C00_0000,
// cluster L1 0x1000_0000, cluster peripherals 0x1020_0000, SoC
// peripherals 0x1A10_0000 (+0x0000 uDMA, +0x1000 MRAM interface,
// +0x3000 PMU, +0x4000 RTC, +0x8000-0xBFFF CWU).
// Three masters reach the SoC memories: the FC data port, the uDMA and the
// cluster's external port; each has a decoder to the interleaved L2, the
// private L2 and the peripheral bus. Parts without a logic description in
// this RTL (FC core and cluster cores, FPUs, the other peripherals, PHYs,
// FLLs, DC-DC, power switches) connect through ports: the power-switch
// enables, resets and retention controls leave the chip top as outputs,
// and the SoC and cluster logic is held in reset while its domain is off.
// Structure, memory sizes and clock/power domains follow the paper; address
// map and port protocol are this design's own.
// The UNOPTFLAT notes verilator gives on response structs come from packed
// structs that carry both a combinational grant and a registered response;
// there is no combinational loop at bit level.
module vega_soc
  import vega_pkg::*;
#(
  parameter int unsigned L2_BANK_WORDS   = 98304,   // 4 x 384 kB = 1.5 MB
  parameter int unsigned PRIV_BANK_WORDS = 8192,    // 2 x 32 kB = 64 kB
  parameter int unsigned MRAM_WORDS      = 524288,  // 4 MB of 64-bit words
  parameter int unsigned N_CORES         = 9,
  parameter int unsigned N_FPU           = 4,
  parameter int unsigned OP_W            = 8,
  localparam int unsigned TW = $clog2(N_CORES),
  localparam int unsigned MAW = $clog2(MRAM_WORDS)
) (
  input  logic                          rst_ni,        // power-on reset
  input  logic                          soc_clk_i,
  input  logic                          cl_clk_i,
  input  logic                          mram_clk_i,
  input  logic                          aon_clk_i,     // always-on (CWU, PMU, RTC)
  // fabric controller data port
  input  mem_req_t                      fc_req_i,
  output mem_rsp_t                      fc_rsp_o,
  // cluster cores
  input  mem_req_t [N_CORES-1:0]        core_req_i,
  output mem_rsp_t [N_CORES-1:0]        core_rsp_o,
  input  logic [N_CORES-1:0]            core_bar_i,
  input  logic [N_CORES-1:0]            core_wait_i,
  output logic [N_CORES-1:0]            core_clk_en_o,
  output logic [N_CORES-1:0]            core_release_o,
  input  logic [N_CORES-1:0]            fpu_c_valid_i,
  output logic [N_CORES-1:0]            fpu_c_ready_o,
  input  logic [N_CORES-1:0][OP_W-1:0]  fpu_c_op_i,
  input  logic [N_CORES-1:0][2:0][31:0] fpu_c_operands_i,
  output logic [N_CORES-1:0]            fpu_c_rvalid_o,
  output logic [N_CORES-1:0][31:0]      fpu_c_result_o,
  output logic [N_FPU-1:0]              fpu_valid_o,
  input  logic [N_FPU-1:0]              fpu_ready_i,
  output logic [N_FPU-1:0][OP_W-1:0]    fpu_op_o,
  output logic [N_FPU-1:0][2:0][31:0]   fpu_operands_o,
  output logic [N_FPU-1:0][TW-1:0]      fpu_tag_o,
  input  logic [N_FPU-1:0]              fpu_rvalid_i,
  input  logic [N_FPU-1:0][31:0]        fpu_result_i,
  input  logic [N_FPU-1:0][TW-1:0]      fpu_rtag_i,
  // uDMA channel 1, to an external peripheral (SPI, UART, ...)
  input  logic                          per_rx_valid_i,
  output logic                          per_rx_ready_o,
  input  logic [31:0]                   per_rx_data_i,
  output logic                          per_tx_valid_o,
  input  logic                          per_tx_ready_i,
  output logic [31:0]                   per_tx_data_o,
  output logic [3:0]                    udma_done_o,
  // CWU sensor SPI
  output logic                          cwu_sclk_o,
  output logic [3:0]                    cwu_cs_no,
  output logic                          cwu_mosi_o,
  input  logic                          cwu_miso_i,
  // power management
  input  logic                          wake_pad_i,
  output logic                          pwr_soc_o,
  output logic                          pwr_cluster_o,
  output logic                          pwr_mram_o,
  output logic                          pwr_cwu_o,
  output logic [5:0]                    ret_o,
  output logic                          boot_mram_o,
  output pmode_e                        pmode_o,
  // observation
  output logic                          cwu_wake_o,
  output logic                          rtc_wake_o,
  output logic [3:0]                    l2_conflict_o,
  output logic [15:0]                   tcdm_conflict_o,
  output logic [N_FPU-1:0]              fpu_conflict_o,
  output logic                          hwce_busy_o,
  output logic                          hwce_evt_o,
  output logic                          dma_done_o,
  output logic                          mram_done_o
);
  localparam int unsigned L2AW = $clog2(L2_BANK_WORDS);
  localparam int unsigned PVAW = $clog2(PRIV_BANK_WORDS);

  // ---------------- resets of the switchable domains ----------------
  logic soc_rst_n, cl_rst_n, pmu_soc_rst_n, pmu_cl_rst_n, mram_rst_n, pwr_mram;
  assign soc_rst_n  = rst_ni && pmu_soc_rst_n;
  assign cl_rst_n   = rst_ni && pmu_cl_rst_n;
  assign mram_rst_n = rst_ni && pwr_mram;
  assign pwr_mram_o = pwr_mram;

  // ---------------- SoC masters ----------------
  localparam int unsigned N_SM = 3;   // 0 FC, 1 uDMA, 2 cluster
  localparam logic [2:0][31:0] SBASE = {SOCPER_BASE, L2PRIV_BASE, L2_BASE};
  localparam logic [2:0][31:0] SMASK = {SOCPER_MASK, L2PRIV_MASK, L2_MASK};

  mem_req_t [N_SM-1:0] m_req, l2_req, pv_req, sp_req;
  mem_rsp_t [N_SM-1:0] m_rsp, l2_rsp, pv_rsp, sp_rsp;
  mem_req_t udma_l2_req, cl_ext_req;
  mem_rsp_t udma_l2_rsp, cl_ext_rsp;

  assign m_req    = {cl_ext_req, udma_l2_req, fc_req_i};
  assign fc_rsp_o    = m_rsp[0];
  assign udma_l2_rsp = m_rsp[1];
  assign cl_ext_rsp  = m_rsp[2];

  for (genvar i = 0; i < N_SM; i++) begin : g_sdec
    mem_req_t [2:0] s_req;
    mem_rsp_t [2:0] s_rsp;
    addr_demux #(.N_SLV(3), .BASE(SBASE), .MASK(SMASK)) i_dec (
      .clk_i(soc_clk_i), .rst_ni(soc_rst_n), .mst_req_i(m_req[i]), .mst_rsp_o(m_rsp[i]),
      .slv_req_o(s_req), .slv_rsp_i(s_rsp));
    assign l2_req[i] = s_req[0];
    assign pv_req[i] = s_req[1];
    assign sp_req[i] = s_req[2];
    assign s_rsp     = {sp_rsp[i], pv_rsp[i], l2_rsp[i]};
  end

  // ---------------- interleaved L2 ----------------
  logic [3:0]            l2b_req, l2b_we;
  logic [3:0][3:0]       l2b_be;
  logic [3:0][L2AW-1:0]  l2b_addr;
  logic [3:0][31:0]      l2b_wdata, l2b_rdata;

  log_interconnect #(.N_MST(N_SM), .N_BANK(4), .BANK_WORDS(L2_BANK_WORDS)) i_l2_ic (
    .clk_i(soc_clk_i), .rst_ni(soc_rst_n), .mst_req_i(l2_req), .mst_rsp_o(l2_rsp),
    .bank_req_o(l2b_req), .bank_we_o(l2b_we), .bank_be_o(l2b_be), .bank_addr_o(l2b_addr),
    .bank_wdata_o(l2b_wdata), .bank_rdata_i(l2b_rdata), .bank_conflict_o(l2_conflict_o));

  for (genvar b = 0; b < 4; b++) begin : g_l2
    sram_bank #(.WORDS(L2_BANK_WORDS)) i_bank (
      .clk_i(soc_clk_i), .req_i(l2b_req[b]), .we_i(l2b_we[b]), .be_i(l2b_be[b]),
      .addr_i(l2b_addr[b]), .wdata_i(l2b_wdata[b]), .rdata_o(l2b_rdata[b]));
  end

  // ---------------- FC private L2 ----------------
  logic [1:0]            pvb_req, pvb_we, pv_conflict;
  logic [1:0][3:0]       pvb_be;
  logic [1:0][PVAW-1:0]  pvb_addr;
  logic [1:0][31:0]      pvb_wdata, pvb_rdata;

  log_interconnect #(.N_MST(N_SM), .N_BANK(2), .BANK_WORDS(PRIV_BANK_WORDS)) i_pv_ic (
    .clk_i(soc_clk_i), .rst_ni(soc_rst_n), .mst_req_i(pv_req), .mst_rsp_o(pv_rsp),
    .bank_req_o(pvb_req), .bank_we_o(pvb_we), .bank_be_o(pvb_be), .bank_addr_o(pvb_addr),
    .bank_wdata_o(pvb_wdata), .bank_rdata_i(pvb_rdata), .bank_conflict_o(pv_conflict));

  for (genvar b = 0; b < 2; b++) begin : g_pv
    sram_bank #(.WORDS(PRIV_BANK_WORDS)) i_bank (
      .clk_i(soc_clk_i), .req_i(pvb_req[b]), .we_i(pvb_we[b]), .be_i(pvb_be[b]),
      .addr_i(pvb_addr[b]), .wdata_i(pvb_wdata[b]), .rdata_o(pvb_rdata[b]));
  end

  // ---------------- SoC peripheral bus ----------------
  // 0 uDMA, 1 MRAM interface, 2 the rest of the window: always-on domain
  localparam logic [2:0][31:0] PBASE = {SOCPER_BASE, SOCPER_BASE | 32'(SOCPER_MRAM) << 12,
                                        SOCPER_BASE | 32'(SOCPER_UDMA) << 12};
  localparam logic [2:0][31:0] PMASK = {SOCPER_MASK, 32'hFFFF_F000, 32'hFFFF_F000};
  mem_req_t       per_req;
  mem_rsp_t       per_rsp;
  mem_req_t [2:0] p_req;
  mem_rsp_t [2:0] p_rsp;

  mem_mux #(.N_IN(N_SM)) i_per_mux (
    .clk_i(soc_clk_i), .rst_ni(soc_rst_n), .in_req_i(sp_req), .in_rsp_o(sp_rsp),
    .out_req_o(per_req), .out_rsp_i(per_rsp));

  addr_demux #(.N_SLV(3), .BASE(PBASE), .MASK(PMASK)) i_per_dec (
    .clk_i(soc_clk_i), .rst_ni(soc_rst_n), .mst_req_i(per_req), .mst_rsp_o(per_rsp),
    .slv_req_o(p_req), .slv_rsp_i(p_rsp));

  // ---------------- always-on domain: PMU, RTC, CWU ----------------
  localparam logic [2:0][31:0] ABASE = {32'h1A10_8000, SOCPER_BASE | 32'(SOCPER_RTC) << 12,
                                        SOCPER_BASE | 32'(SOCPER_PMU) << 12};
  localparam logic [2:0][31:0] AMASK = {32'hFFFF_C000, 32'hFFFF_F000, 32'hFFFF_F000};
  mem_req_t       aon_req;
  mem_rsp_t       aon_rsp;
  mem_req_t [2:0] a_req;
  mem_rsp_t [2:0] a_rsp;

  cdc_mem_bridge i_aon_bridge (
    .s_clk_i(soc_clk_i), .s_rst_ni(soc_rst_n), .s_req_i(p_req[2]), .s_rsp_o(p_rsp[2]),
    .m_clk_i(aon_clk_i), .m_rst_ni(rst_ni), .m_req_o(aon_req), .m_rsp_i(aon_rsp));

  addr_demux #(.N_SLV(3), .BASE(ABASE), .MASK(AMASK)) i_aon_dec (
    .clk_i(aon_clk_i), .rst_ni, .mst_req_i(aon_req), .mst_rsp_o(aon_rsp),
    .slv_req_o(a_req), .slv_rsp_i(a_rsp));

  logic cwu_wake, rtc_wake;
  assign cwu_wake_o = cwu_wake;
  assign rtc_wake_o = rtc_wake;

  pmu i_pmu (
    .clk_i(aon_clk_i), .rst_ni, .cfg_req_i(a_req[0]), .cfg_rsp_o(a_rsp[0]),
    .wake_pad_i, .wake_rtc_i(rtc_wake), .wake_cwu_i(cwu_wake),
    .pwr_soc_o, .pwr_cluster_o, .pwr_mram_o(pwr_mram), .pwr_cwu_o,
    .rst_soc_no(pmu_soc_rst_n), .rst_cluster_no(pmu_cl_rst_n), .ret_o, .boot_mram_o,
    .mode_o(pmode_o));

  rtc i_rtc (
    .clk_i(aon_clk_i), .rst_ni, .cfg_req_i(a_req[1]), .cfg_rsp_o(a_rsp[1]), .wake_o(rtc_wake));

  cwu i_cwu (
    .clk_i(aon_clk_i), .rst_ni, .cfg_req_i(a_req[2]), .cfg_rsp_o(a_rsp[2]),
    .sclk_o(cwu_sclk_o), .cs_no(cwu_cs_no), .mosi_o(cwu_mosi_o), .miso_i(cwu_miso_i),
    .wake_o(cwu_wake));

  // ---------------- uDMA and MRAM ----------------
  logic [1:0]       u_rx_valid, u_rx_ready, u_tx_valid, u_tx_ready;
  logic [1:0][31:0] u_rx_data, u_tx_data;
  logic             mr_rx_valid, mr_rx_ready, mr_tx_valid, mr_tx_ready;
  logic [31:0]      mr_rx_data, mr_tx_data;

  assign u_rx_valid     = {per_rx_valid_i, mr_rx_valid};
  assign u_rx_data      = {per_rx_data_i, mr_rx_data};
  assign mr_rx_ready    = u_rx_ready[0];
  assign per_rx_ready_o = u_rx_ready[1];
  assign mr_tx_valid    = u_tx_valid[0];
  assign mr_tx_data     = u_tx_data[0];
  assign per_tx_valid_o = u_tx_valid[1];
  assign per_tx_data_o  = u_tx_data[1];
  assign u_tx_ready     = {per_tx_ready_i, mr_tx_ready};

  udma #(.N_CH(2)) i_udma (
    .clk_i(soc_clk_i), .rst_ni(soc_rst_n), .cfg_req_i(p_req[0]), .cfg_rsp_o(p_rsp[0]),
    .l2_req_o(udma_l2_req), .l2_rsp_i(udma_l2_rsp),
    .rx_valid_i(u_rx_valid), .rx_ready_o(u_rx_ready), .rx_data_i(u_rx_data),
    .tx_valid_o(u_tx_valid), .tx_ready_i(u_tx_ready), .tx_data_o(u_tx_data),
    .done_o(udma_done_o));

  logic           mm_cs, mm_we, mm_rvalid, mm_busy;
  logic [MAW-1:0] mm_addr;
  logic [77:0]    mm_wdata, mm_rdata;

  mram_if #(.AW(MAW)) i_mram_if (
    .clk_i(soc_clk_i), .rst_ni(soc_rst_n), .mram_clk_i, .mram_rst_ni(mram_rst_n),
    .cfg_req_i(p_req[1]), .cfg_rsp_o(p_rsp[1]),
    .tx_valid_i(mr_tx_valid), .tx_ready_o(mr_tx_ready), .tx_data_i(mr_tx_data),
    .rx_valid_o(mr_rx_valid), .rx_ready_i(mr_rx_ready), .rx_data_o(mr_rx_data),
    .done_o(mram_done_o),
    .m_cs_o(mm_cs), .m_we_o(mm_we), .m_addr_o(mm_addr), .m_wdata_o(mm_wdata),
    .m_rdata_i(mm_rdata), .m_rvalid_i(mm_rvalid), .m_busy_i(mm_busy));

  mram_macro #(.WORDS(MRAM_WORDS)) i_mram (
    .clk_i(mram_clk_i), .pwr_on_i(pwr_mram), .cs_i(mm_cs), .we_i(mm_we), .addr_i(mm_addr),
    .wdata_i(mm_wdata), .rdata_o(mm_rdata), .rvalid_o(mm_rvalid), .busy_o(mm_busy));

  // ---------------- cluster ----------------
  cluster #(.N_CORES(N_CORES), .N_FPU(N_FPU), .OP_W(OP_W)) i_cluster (
    .clk_i(cl_clk_i), .rst_ni(cl_rst_n), .soc_clk_i, .soc_rst_ni(soc_rst_n),
    .core_req_i, .core_rsp_o, .core_bar_i, .core_wait_i, .core_clk_en_o, .core_release_o,
    .fpu_c_valid_i, .fpu_c_ready_o, .fpu_c_op_i, .fpu_c_operands_i, .fpu_c_rvalid_o,
    .fpu_c_result_o, .fpu_valid_o, .fpu_ready_i, .fpu_op_o, .fpu_operands_o, .fpu_tag_o,
    .fpu_rvalid_i, .fpu_result_i, .fpu_rtag_i, .fpu_conflict_o,
    .ext_req_o(cl_ext_req), .ext_rsp_i(cl_ext_rsp),
    .tcdm_conflict_o, .hwce_busy_o, .dma_done_o, .hwce_evt_o);

  // the private L2 is reached by one master at a time in practice; its
  // conflict flags are not brought out
  logic unused_pv;
  assign unused_pv = ^pv_conflict;
endmodule
