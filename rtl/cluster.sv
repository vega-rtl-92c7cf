// cluster: the parallel compute cluster of the chip. Nine RISC-V cores
// (eight workers and one orchestrator, outside this module) share a
// 128 kB tightly-coupled data memory (TCDM, the L1) of 16 word-interleaved
// banks through a single-cycle logarithmic interconnect, together with the
// four ports of the hardware convolution engine (HWCE) and the cluster DMA.
// Each core data port first goes through an address decoder:
//   L1 window        -> its own TCDM interconnect port
//   peripheral window-> cluster peripheral bus (DMA, HWCE, event unit)
//   anything else    -> the cluster's external port towards the SoC
// The external requests of the cores and of the DMA are merged and cross
// into the SoC clock domain through a dual-clock bridge. The event unit
// takes the DMA and HWCE completion events and implements barriers and
// clock-gated sleep of the cores. Four shared FPUs are reached through the
// FPU interconnect; the FPUs themselves (and the cores, instruction cache
// and divider) are not part of this RTL, their ports are brought out.
// Interface timing: core ports use the request/grant, in-order response
// protocol of vega_pkg. All logic runs on clk_i except the SoC side of the
// bridge. The bank count, L1 size, core and FPU counts follow the paper;
// the decoding and the merging of external ports are this design's own.
module cluster
  import vega_pkg::*;
#(
  parameter int unsigned N_CORES    = 9,
  parameter int unsigned N_BANK     = 16,
  parameter int unsigned BANK_WORDS = 2048,
  parameter int unsigned N_FPU      = 4,
  parameter int unsigned OP_W       = 8,
  localparam int unsigned TW = $clog2(N_CORES)
) (
  input  logic                          clk_i,
  input  logic                          rst_ni,
  input  logic                          soc_clk_i,
  input  logic                          soc_rst_ni,
  // core data ports
  input  mem_req_t [N_CORES-1:0]        core_req_i,
  output mem_rsp_t [N_CORES-1:0]        core_rsp_o,
  // event unit
  input  logic [N_CORES-1:0]            core_bar_i,
  input  logic [N_CORES-1:0]            core_wait_i,
  output logic [N_CORES-1:0]            core_clk_en_o,
  output logic [N_CORES-1:0]            core_release_o,
  // shared FPU interconnect, core side
  input  logic [N_CORES-1:0]            fpu_c_valid_i,
  output logic [N_CORES-1:0]            fpu_c_ready_o,
  input  logic [N_CORES-1:0][OP_W-1:0]  fpu_c_op_i,
  input  logic [N_CORES-1:0][2:0][31:0] fpu_c_operands_i,
  output logic [N_CORES-1:0]            fpu_c_rvalid_o,
  output logic [N_CORES-1:0][31:0]      fpu_c_result_o,
  // shared FPU interconnect, FPU side
  output logic [N_FPU-1:0]              fpu_valid_o,
  input  logic [N_FPU-1:0]              fpu_ready_i,
  output logic [N_FPU-1:0][OP_W-1:0]    fpu_op_o,
  output logic [N_FPU-1:0][2:0][31:0]   fpu_operands_o,
  output logic [N_FPU-1:0][TW-1:0]      fpu_tag_o,
  input  logic [N_FPU-1:0]              fpu_rvalid_i,
  input  logic [N_FPU-1:0][31:0]        fpu_result_i,
  input  logic [N_FPU-1:0][TW-1:0]      fpu_rtag_i,
  output logic [N_FPU-1:0]              fpu_conflict_o,
  // external port, SoC clock domain
  output mem_req_t                      ext_req_o,
  input  mem_rsp_t                      ext_rsp_i,
  // status
  output logic [N_BANK-1:0]             tcdm_conflict_o,
  output logic                          hwce_busy_o,
  output logic                          dma_done_o,
  output logic                          hwce_evt_o
);
  localparam int unsigned N_MST = N_CORES + 4 + 1;
  localparam int unsigned BAW   = $clog2(BANK_WORDS);

  // per-core decode: 0 L1, 1 peripherals, 2 external (catch-all)
  localparam logic [2:0][31:0] CBASE = {32'h0, CLPER_BASE, L1_BASE};
  localparam logic [2:0][31:0] CMASK = {32'h0, CLPER_MASK, L1_MASK};

  mem_req_t [N_MST-1:0]   tcdm_req;
  mem_rsp_t [N_MST-1:0]   tcdm_rsp;
  mem_req_t [N_CORES-1:0] per_req, ext_req;
  mem_rsp_t [N_CORES-1:0] per_rsp, ext_rsp;

  for (genvar c = 0; c < N_CORES; c++) begin : g_core
    mem_req_t [2:0] s_req;
    mem_rsp_t [2:0] s_rsp;
    addr_demux #(.N_SLV(3), .BASE(CBASE), .MASK(CMASK)) i_dec (
      .clk_i, .rst_ni, .mst_req_i(core_req_i[c]), .mst_rsp_o(core_rsp_o[c]),
      .slv_req_o(s_req), .slv_rsp_i(s_rsp));
    assign tcdm_req[c] = s_req[0];
    assign per_req[c]  = s_req[1];
    assign ext_req[c]  = s_req[2];
    assign s_rsp[0]    = tcdm_rsp[c];
    assign s_rsp[1]    = per_rsp[c];
    assign s_rsp[2]    = ext_rsp[c];
  end

  // ---------------- TCDM ----------------
  logic [N_BANK-1:0]           b_req, b_we;
  logic [N_BANK-1:0][3:0]      b_be;
  logic [N_BANK-1:0][BAW-1:0]  b_addr;
  logic [N_BANK-1:0][31:0]     b_wdata, b_rdata;

  log_interconnect #(.N_MST(N_MST), .N_BANK(N_BANK), .BANK_WORDS(BANK_WORDS)) i_tcdm_ic (
    .clk_i, .rst_ni, .mst_req_i(tcdm_req), .mst_rsp_o(tcdm_rsp),
    .bank_req_o(b_req), .bank_we_o(b_we), .bank_be_o(b_be), .bank_addr_o(b_addr),
    .bank_wdata_o(b_wdata), .bank_rdata_i(b_rdata), .bank_conflict_o(tcdm_conflict_o));

  for (genvar b = 0; b < N_BANK; b++) begin : g_bank
    sram_bank #(.WORDS(BANK_WORDS)) i_bank (
      .clk_i, .req_i(b_req[b]), .we_i(b_we[b]), .be_i(b_be[b]), .addr_i(b_addr[b]),
      .wdata_i(b_wdata[b]), .rdata_o(b_rdata[b]));
  end

  // ---------------- peripheral bus ----------------
  localparam logic [2:0][31:0] PBASE = {CLPER_BASE | 32'(CLPER_EU) << 12,
                                        CLPER_BASE | 32'(CLPER_HWCE) << 12,
                                        CLPER_BASE | 32'(CLPER_DMA) << 12};
  localparam logic [2:0][31:0] PMASK = {3{32'hFFFF_F000}};

  mem_req_t       pbus_req;
  mem_rsp_t       pbus_rsp;
  mem_req_t [2:0] p_req;
  mem_rsp_t [2:0] p_rsp;

  mem_mux #(.N_IN(N_CORES)) i_per_mux (
    .clk_i, .rst_ni, .in_req_i(per_req), .in_rsp_o(per_rsp), .out_req_o(pbus_req), .out_rsp_i(pbus_rsp));

  addr_demux #(.N_SLV(3), .BASE(PBASE), .MASK(PMASK)) i_per_dec (
    .clk_i, .rst_ni, .mst_req_i(pbus_req), .mst_rsp_o(pbus_rsp), .slv_req_o(p_req), .slv_rsp_i(p_rsp));

  // ---------------- DMA ----------------
  mem_req_t dma_ext_req;
  mem_rsp_t dma_ext_rsp;
  cluster_dma i_dma (
    .clk_i, .rst_ni, .cfg_req_i(p_req[0]), .cfg_rsp_o(p_rsp[0]),
    .tcdm_req_o(tcdm_req[N_CORES + 4]), .tcdm_rsp_i(tcdm_rsp[N_CORES + 4]),
    .ext_req_o(dma_ext_req), .ext_rsp_i(dma_ext_rsp), .done_o(dma_done_o));

  // ---------------- HWCE ----------------
  hwce i_hwce (
    .clk_i, .rst_ni, .cfg_req_i(p_req[1]), .cfg_rsp_o(p_rsp[1]),
    .tcdm_req_o(tcdm_req[N_CORES +: 4]), .tcdm_rsp_i(tcdm_rsp[N_CORES +: 4]),
    .evt_o(hwce_evt_o), .busy_o(hwce_busy_o));

  // ---------------- event unit ----------------
  event_unit #(.N_CORES(N_CORES), .N_EVT(8)) i_eu (
    .clk_i, .rst_ni, .cfg_req_i(p_req[2]), .cfg_rsp_o(p_rsp[2]),
    .evt_i({6'd0, hwce_evt_o, dma_done_o}), .bar_i(core_bar_i), .wait_i(core_wait_i),
    .clk_en_o(core_clk_en_o), .release_o(core_release_o));

  // ---------------- shared FPUs ----------------
  fpu_share_ic #(.N_CORES(N_CORES), .N_FPU(N_FPU), .OP_W(OP_W)) i_fpu_ic (
    .clk_i, .rst_ni,
    .c_valid_i(fpu_c_valid_i), .c_ready_o(fpu_c_ready_o), .c_op_i(fpu_c_op_i),
    .c_operands_i(fpu_c_operands_i), .c_rvalid_o(fpu_c_rvalid_o), .c_result_o(fpu_c_result_o),
    .f_valid_o(fpu_valid_o), .f_ready_i(fpu_ready_i), .f_op_o(fpu_op_o), .f_operands_o(fpu_operands_o),
    .f_tag_o(fpu_tag_o), .f_rvalid_i(fpu_rvalid_i), .f_result_i(fpu_result_i), .f_rtag_i(fpu_rtag_i),
    .f_conflict_o(fpu_conflict_o));

  // ---------------- external port ----------------
  mem_req_t [N_CORES:0] x_req;
  mem_rsp_t [N_CORES:0] x_rsp;
  mem_req_t             xm_req;
  mem_rsp_t             xm_rsp;
  assign x_req       = {dma_ext_req, ext_req};
  assign ext_rsp     = x_rsp[N_CORES-1:0];
  assign dma_ext_rsp = x_rsp[N_CORES];

  mem_mux #(.N_IN(N_CORES + 1)) i_ext_mux (
    .clk_i, .rst_ni, .in_req_i(x_req), .in_rsp_o(x_rsp), .out_req_o(xm_req), .out_rsp_i(xm_rsp));

  cdc_mem_bridge i_bridge (
    .s_clk_i(clk_i), .s_rst_ni(rst_ni), .s_req_i(xm_req), .s_rsp_o(xm_rsp),
    .m_clk_i(soc_clk_i), .m_rst_ni(soc_rst_ni), .m_req_o(ext_req_o), .m_rsp_i(ext_rsp_i));
endmodule
