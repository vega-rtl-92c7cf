// pmu: power management unit of the always-on domain. It switches the
// SoC, cluster, MRAM and CWU domains on and off and sets which L2 banks are
// kept in retention, following the power modes of the chip:
//   PM_CWU_SLEEP  only always-on logic and the CWU are powered
//   PM_CWU_RET    as above, plus the L2 banks selected in RET_MASK retained
//   PM_SOC        SoC domain on (fabric controller, L2, peripherals)
//   PM_CLUSTER    SoC and cluster domains on
// Software requests a mode by writing MODE. Entering a sleep mode powers the
// SoC (and cluster and MRAM) off; a wake event from an enabled source (the
// external pad, the RTC or the CWU) then powers the SoC back on: the power
// switch is closed, PWR_DLY cycles later the domain's reset is released and
// the mode becomes PM_SOC. Turning a domain on always uses this
// switch-then-reset sequence; turning it off asserts its reset first.
// BOOT selects the warm-boot source the boot code reads after wake-up:
// 0 from retained L2, 1 from MRAM.
// Registers: 0x0 MODE (write request, read current mode), 0x4 RET_MASK,
// 0x8 WAKE_EN [2:0] = {cwu, rtc, pad}, 0xC BOOT [0], 0x10 MRAM_ON [0],
// 0x14 WAKE_CAUSE (read, sticky until the next sleep) and the number of
// mode switches in [31:16].
// The modes, wake sources and boot choice are the paper's; register map,
// sequencing and delays are this design's own.
module pmu
  import vega_pkg::*;
#(
  parameter int unsigned N_RET   = 6,
  parameter int unsigned PWR_DLY = 4
) (
  input  logic             clk_i,
  input  logic             rst_ni,
  input  mem_req_t         cfg_req_i,
  output mem_rsp_t         cfg_rsp_o,
  input  logic             wake_pad_i,
  input  logic             wake_rtc_i,
  input  logic             wake_cwu_i,
  output logic             pwr_soc_o,
  output logic             pwr_cluster_o,
  output logic             pwr_mram_o,
  output logic             pwr_cwu_o,
  output logic             rst_soc_no,
  output logic             rst_cluster_no,
  output logic [N_RET-1:0] ret_o,
  output logic             boot_mram_o,
  output pmode_e           mode_o
);
  pmode_e            mode_q, target_q;
  logic [N_RET-1:0]  ret_q;
  logic [2:0]        wen_q, cause_q;
  logic              boot_q, mram_q, busy_q;
  logic [7:0]        dly_q;
  logic [15:0]       nsw_q;
  logic              rvalid_q;
  logic [31:0]       rdata_q;
  logic              soc_on, cl_on, soc_rst_q, cl_rst_q;
  logic [2:0]        wake;

  assign cfg_rsp_o.gnt    = cfg_req_i.req;
  assign cfg_rsp_o.rvalid = rvalid_q;
  assign cfg_rsp_o.rdata  = rdata_q;
  assign wake             = {wake_cwu_i, wake_rtc_i, wake_pad_i} & wen_q;

  // power switches follow the target immediately, resets follow the mode
  assign soc_on         = (target_q == PM_SOC) || (target_q == PM_CLUSTER);
  assign cl_on          = (target_q == PM_CLUSTER);
  assign pwr_soc_o      = soc_on;
  assign pwr_cluster_o  = cl_on;
  assign pwr_mram_o     = soc_on && mram_q;
  assign pwr_cwu_o      = 1'b1;
  assign rst_soc_no     = soc_rst_q;
  assign rst_cluster_no = cl_rst_q;
  assign ret_o          = (mode_q == PM_CWU_RET) ? ret_q : '0;
  assign boot_mram_o    = boot_q;
  assign mode_o         = mode_q;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      mode_q <= PM_SOC; target_q <= PM_SOC; ret_q <= '0; wen_q <= '0; cause_q <= '0;
      boot_q <= 1'b0; mram_q <= 1'b0; busy_q <= 1'b0; dly_q <= '0; nsw_q <= '0;
      rvalid_q <= 1'b0; rdata_q <= '0; soc_rst_q <= 1'b1; cl_rst_q <= 1'b0;
    end else begin
      rvalid_q <= cfg_req_i.req;
      if (cfg_req_i.req && cfg_req_i.we) begin
        unique case (cfg_req_i.addr[4:2])
          3'd0: if (!busy_q) begin
            target_q <= pmode_e'(cfg_req_i.wdata[1:0]);
            busy_q   <= 1'b1;
            dly_q    <= 8'(PWR_DLY);
            // switching off: resets first
            if (cfg_req_i.wdata[1:0] != 2'(PM_CLUSTER)) cl_rst_q <= 1'b0;
            if (cfg_req_i.wdata[1]   == 1'b0)           soc_rst_q <= 1'b0;
          end
          3'd1: ret_q  <= cfg_req_i.wdata[N_RET-1:0];
          3'd2: wen_q  <= cfg_req_i.wdata[2:0];
          3'd3: boot_q <= cfg_req_i.wdata[0];
          3'd4: mram_q <= cfg_req_i.wdata[0];
          default: ;
        endcase
      end
      if (cfg_req_i.req && !cfg_req_i.we) begin
        unique case (cfg_req_i.addr[4:2])
          3'd0: rdata_q <= {30'd0, mode_q};
          3'd1: rdata_q <= 32'(ret_q);
          3'd2: rdata_q <= {29'd0, wen_q};
          3'd3: rdata_q <= {31'd0, boot_q};
          3'd4: rdata_q <= {31'd0, mram_q};
          default: rdata_q <= {nsw_q, 13'd0, cause_q};
        endcase
      end
      // sequencing: after PWR_DLY cycles the mode is reached and resets of
      // powered domains are released
      if (busy_q) begin
        if (dly_q != 0) dly_q <= dly_q - 1'b1;
        else begin
          busy_q    <= 1'b0;
          mode_q    <= target_q;
          nsw_q     <= nsw_q + 1'b1;
          soc_rst_q <= soc_on;
          cl_rst_q  <= cl_on;
          if (!soc_on) cause_q <= '0;
        end
      end else if (!soc_on && wake != 0) begin
        // wake-up from a sleep mode into PM_SOC
        target_q <= PM_SOC;
        busy_q   <= 1'b1;
        dly_q    <= 8'(PWR_DLY);
        cause_q  <= wake;
      end
    end
  end
endmodule
