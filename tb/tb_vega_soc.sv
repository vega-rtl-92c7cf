// tb_vega_soc: end-to-end test of the whole SoC at its full default size.
// Four clocks (SoC 10 ns, cluster 8 ns, MRAM 25 ns, always-on 40 ns) drive
// the top. The testbench plays the fabric controller and the cluster cores,
// whose ports are on the top, and runs one complete offload:
//   1. FC writes a 64-word tile into the interleaved L2 and a word into its
//      private L2 and reads them back.
//   2. Core 8 programs the cluster DMA to copy the tile L2 -> L1 and waits
//      for done; cores 0..3 then read the tile from L1 at the same time
//      (TCDM bank conflicts) and each adds its index and writes it back.
//   3. Core 8 runs the DMA L1 -> L2; FC and the cluster reach L2 together
//      (L2 bank conflicts); the FC checks every word.
//   4. Four cores synchronise on an event-unit barrier; three cores mapped to
//      the same FPU issue operations at once (FPU contention, the FPU
//      being a model in the testbench). Then eight cores write one TCDM
//      bank at once, and the FC and core 0 write one L2 bank at once.
//   Before step 2 the FC asks the power manager to switch the cluster on.
//   5. FC arms the RTC alarm, enables the RTC wake source and asks the PMU
//      for retentive sleep; the SoC is powered off and the RTC wakes it
//      (two mode switches), after which L2 still holds the tile.
// Each mechanism is counted; one that never happened is a failure.
module tb_vega_soc;
  import vega_pkg::*;
  timeunit 1ns;
  timeprecision 1ps;
  localparam int unsigned WATCHDOG = 200000;
  logic clk = 1'b0;
  logic rst_n = 1'b0;
  int checks = 0;
  int failures = 0;
  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  task automatic finish();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  endtask

  initial begin : watchdog
    repeat (WATCHDOG) @(posedge clk);
    failures++;
    $display("FAIL: watchdog expired");
    finish();
  end

  logic cclk = 1'b0, mclk = 1'b0, aclk = 1'b0;
  always #4 cclk = ~cclk;
  always #12.5 mclk = ~mclk;
  always #20 aclk = ~aclk;

  mem_req_t fc_req = '0;
  mem_rsp_t fc_rsp;
  mem_req_t [8:0] c_req = '0;
  mem_rsp_t [8:0] c_rsp;
  logic [8:0] bar = '0, wt = '0, clk_en, rel;
  logic [8:0] fcv = '0, fcr, fcrv;
  logic [8:0][7:0] fcop = '0;
  logic [8:0][2:0][31:0] fcopnd = '0;
  logic [8:0][31:0] fcres;
  logic [3:0] fv, fr = '1, frv = '0, fconf;
  logic [3:0][7:0] fop;
  logic [3:0][2:0][31:0] fopnd;
  logic [3:0][3:0] ftag, frtag = '0;
  logic [3:0][31:0] fres = '0;
  logic prx_ready, ptx_valid;
  logic [31:0] ptx_data;
  logic [3:0] udone, cs_n, l2c, fpc;
  logic sclk, mosi, p_soc, p_cl, p_mram, p_cwu, boot_mram, cwu_wake, rtc_wake;
  logic [5:0] ret;
  pmode_e pmode;
  logic [15:0] tc;
  logic hwce_busy, hwce_evt, dma_done, mram_done;

  vega_soc dut (
    .rst_ni(rst_n), .soc_clk_i(clk), .cl_clk_i(cclk), .mram_clk_i(mclk), .aon_clk_i(aclk),
    .fc_req_i(fc_req), .fc_rsp_o(fc_rsp), .core_req_i(c_req), .core_rsp_o(c_rsp),
    .core_bar_i(bar), .core_wait_i(wt), .core_clk_en_o(clk_en), .core_release_o(rel),
    .fpu_c_valid_i(fcv), .fpu_c_ready_o(fcr), .fpu_c_op_i(fcop), .fpu_c_operands_i(fcopnd),
    .fpu_c_rvalid_o(fcrv), .fpu_c_result_o(fcres), .fpu_valid_o(fv), .fpu_ready_i(fr),
    .fpu_op_o(fop), .fpu_operands_o(fopnd), .fpu_tag_o(ftag), .fpu_rvalid_i(frv),
    .fpu_result_i(fres), .fpu_rtag_i(frtag),
    .per_rx_valid_i(1'b0), .per_rx_ready_o(prx_ready), .per_rx_data_i('0),
    .per_tx_valid_o(ptx_valid), .per_tx_ready_i(1'b1), .per_tx_data_o(ptx_data), .udma_done_o(udone),
    .cwu_sclk_o(sclk), .cwu_cs_no(cs_n), .cwu_mosi_o(mosi), .cwu_miso_i(1'b0),
    .wake_pad_i(1'b0), .pwr_soc_o(p_soc), .pwr_cluster_o(p_cl), .pwr_mram_o(p_mram),
    .pwr_cwu_o(p_cwu), .ret_o(ret), .boot_mram_o(boot_mram), .pmode_o(pmode),
    .cwu_wake_o(cwu_wake), .rtc_wake_o(rtc_wake), .l2_conflict_o(l2c), .tcdm_conflict_o(tc),
    .fpu_conflict_o(fpc), .hwce_busy_o(hwce_busy), .hwce_evt_o(hwce_evt), .dma_done_o(dma_done),
    .mram_done_o(mram_done));

  // FPU model: returns a + b (integer, as a stand-in) one cycle after accept
  always @(posedge cclk) for (int f = 0; f < 4; f++) begin
    frv[f]   <= fv[f] && fr[f];
    fres[f]  <= fopnd[f][0] + fopnd[f][1];
    frtag[f] <= ftag[f];
  end

  // mechanism counters
  int n_l2c = 0, n_tc = 0, n_fpc = 0, n_dma = 0, n_bar = 0, n_mode = 0, n_wake = 0;
  pmode_e last_mode = PM_SOC;
  always @(posedge clk) if (l2c != 0) n_l2c++;
  always @(posedge cclk) begin
    if (tc != 0) n_tc++;
    if (fpc != 0) n_fpc++;
    if (dma_done) n_dma++;
  end
  always @(posedge aclk) begin
    if (pmode != last_mode) n_mode++;
    last_mode <= pmode;
    if (rtc_wake && !p_soc) n_wake++;
  end

  // FC transfer (SoC clock)
  task automatic fc(input logic we, input logic [31:0] a, input logic [31:0] d, output logic [31:0] r);
    @(posedge clk); #1;
    fc_req = '{req: 1'b1, we: we, be: 4'hF, addr: a, wdata: d};
    @(negedge clk);
    while (!fc_rsp.gnt) @(negedge clk);
    @(posedge clk); #1;
    fc_req.req = 1'b0;
    @(negedge clk);
    while (!fc_rsp.rvalid) @(negedge clk);
    r = fc_rsp.rdata;
  endtask
  // core transfer (cluster clock)
  task automatic cx(input int c, input logic we, input logic [31:0] a, input logic [31:0] d,
                    output logic [31:0] r);
    @(posedge cclk); #1;
    c_req[c] = '{req: 1'b1, we: we, be: 4'hF, addr: a, wdata: d};
    @(negedge cclk);
    while (!c_rsp[c].gnt) @(negedge cclk);
    @(posedge cclk); #1;
    c_req[c].req = 1'b0;
    @(negedge cclk);
    while (!c_rsp[c].rvalid) @(negedge cclk);
    r = c_rsp[c].rdata;
  endtask

  localparam logic [31:0] TILE_L2 = L2_BASE + 32'h100;
  localparam logic [31:0] OUT_L2  = L2_BASE + 32'h1000;
  localparam logic [31:0] TILE_L1 = L1_BASE + 32'h200;
  localparam logic [31:0] DMA     = CLPER_BASE;
  localparam int unsigned NW = 64;
  logic [31:0] tile [NW];
  int ndone = 0;
  int n_fpu = 0;

  task automatic dma_job(input logic [31:0] src, input logic [31:0] dst, input int n);
    logic [31:0] r;
    int t;
    cx(8, 1, DMA + 0, src, r);
    cx(8, 1, DMA + 4, dst, r);
    cx(8, 1, DMA + 8, n, r);
    cx(8, 1, DMA + 12, 1, r);
    t = 0;
    do begin cx(8, 0, DMA + 12, 0, r); t++; end while (r[0] && t < 5000);
    check(!r[0], "DMA job finished");
  endtask

  initial begin
    logic [31:0] r;
    for (int i = 0; i < NW; i++) tile[i] = $urandom;
    repeat (4) @(posedge aclk);
    rst_n = 1'b1;
    repeat (10) @(posedge clk);
    // 1. FC fills L2
    for (int i = 0; i < NW; i++) fc(1, TILE_L2 + 4 * i, tile[i], r);
    fc(1, L2PRIV_BASE + 32'h40, 32'hC0FFEE, r);
    for (int i = 0; i < NW; i += 7) begin
      fc(0, TILE_L2 + 4 * i, 0, r);
      check(r == tile[i], $sformatf("L2 readback %0d: %h vs %h", i, r, tile[i]));
    end
    fc(0, L2PRIV_BASE + 32'h40, 0, r);
    check(r == 32'hC0FFEE, "private L2 readback");
    // 2. power up the cluster, DMA L2 -> L1, cores 0..3 process the tile
    fc(1, SOCPER_BASE + 32'h3000, 32'(PM_CLUSTER), r);
    wait (pmode == PM_CLUSTER);
    check(p_cl, "cluster domain powered");
    repeat (10) @(posedge cclk);
    dma_job(TILE_L2, TILE_L1, NW);
    for (int c = 0; c < 4; c++) begin
      automatic int cc = c;
      fork begin
        logic [31:0] v;
        for (int i = cc; i < NW; i += 4) begin
          cx(cc, 0, TILE_L1 + 4 * i, 0, v);
          check(v == tile[i], "L1 tile after DMA");
          cx(cc, 1, TILE_L1 + 4 * i, v + 32'(cc + 1), v);
        end
        ndone++;
      end join_none
    end
    wait (ndone == 4);
    // 3. DMA L1 -> L2 while the FC also uses L2
    fork
      dma_job(TILE_L1, OUT_L2, NW);
      for (int i = 0; i < 200; i++) fc(1, L2_BASE + 32'h4000 + 4 * (i % 32), i, r);
    join
    for (int i = 0; i < NW; i++) begin
      fc(0, OUT_L2 + 4 * i, 0, r);
      check(r == tile[i] + 32'(i % 4 + 1), "processed tile back in L2");
    end
    // 4. barrier of cores 0..3 and FPU contention on FPU 0 (cores 0, 4, 8)
    cx(8, 1, CLPER_BASE + 32'h2000, 32'h0F, r);
    fork
      for (int c = 0; c < 4; c++) begin
        automatic int cc = c;
        fork begin
          repeat (3 * cc) @(posedge cclk);
          #1 bar[cc] = 1'b1;
          @(posedge cclk);
          while (!rel[cc]) @(posedge cclk);
          #1 bar[cc] = 1'b0;
          n_bar++;
        end join_none
      end
    join
    wait (n_bar == 4);
    fork
      for (int c = 0; c < 9; c += 4) begin
        automatic int cc = c;
        fork begin
          @(posedge cclk); #1;
          fcv[cc] = 1'b1; fcopnd[cc][0] = 32'(cc); fcopnd[cc][1] = 32'd100;
          @(posedge cclk);
          while (!fcr[cc]) @(posedge cclk);
          #1 fcv[cc] = 1'b0;
          while (!fcrv[cc]) @(negedge cclk);
          check(fcres[cc] == 32'(cc) + 32'd100, "shared FPU result to the right core");
          n_fpu++;
        end join_none
      end
    join
    wait (n_fpu == 3);
    // all cores hit one TCDM bank; FC and a core hit one L2 bank together
    ndone = 0;
    for (int c = 0; c < 8; c++) begin
      automatic int cc = c;
      fork begin
        logic [31:0] v;
        for (int i = 0; i < 8; i++) cx(cc, 1, L1_BASE + 32'h8000 + 64 * cc, 32'(i), v);
        ndone++;
      end join_none
    end
    wait (ndone == 8);
    fork
      for (int i = 0; i < 100; i++) fc(1, L2_BASE + 32'h8000 + 16 * (i % 8), i, r);
      begin
        logic [31:0] v;
        for (int i = 0; i < 40; i++) cx(0, 1, L2_BASE + 32'h9000 + 16 * (i % 8), i, v);
      end
    join
    // 5. sleep and RTC wake-up
    fc(1, SOCPER_BASE + 32'h4000, 0, r);        // RTC count = 0
    fc(1, SOCPER_BASE + 32'h4004, 200, r);      // alarm
    fc(1, SOCPER_BASE + 32'h4008, 1, r);        // alarm enable
    fc(1, SOCPER_BASE + 32'h3008, 2, r);        // wake on RTC
    fc(1, SOCPER_BASE + 32'h3004, 6'h3F, r);    // retain all banks
    @(posedge clk); #1;
    fc_req = '{req: 1'b1, we: 1'b1, be: 4'hF, addr: SOCPER_BASE + 32'h3000, wdata: 32'(PM_CWU_RET)};
    @(negedge clk);
    while (!fc_rsp.gnt) @(negedge clk);
    @(posedge clk); #1; fc_req.req = 1'b0;
    wait (pmode == PM_CWU_RET);
    check(!p_soc && ret == 6'h3F, "SoC off, L2 banks retained");
    wait (pmode == PM_SOC);
    repeat (10) @(posedge clk);
    check(p_soc, "SoC powered after RTC wake");
    for (int i = 0; i < NW; i += 9) begin
      fc(0, OUT_L2 + 4 * i, 0, r);
      check(r == tile[i] + 32'(i % 4 + 1), "L2 contents kept across sleep");
    end
    fc(0, SOCPER_BASE + 32'h3014, 0, r);
    check(r[2:0] == 3'b010, "wake cause is the RTC");
    // mechanisms
    check(n_l2c > 0, "L2 bank conflict happened");
    check(n_tc > 0, "TCDM bank conflict happened");
    check(n_fpc > 0, "FPU contention happened");
    check(n_dma == 2, "two DMA jobs completed");
    check(n_bar == 4, "barrier released four cores");
    check(n_mode >= 3, "power mode switched: cluster on, sleep, wake");
    check(n_wake > 0, "RTC wake-up seen while the SoC was off");
    $display("mechanisms: l2_conflict=%0d tcdm_conflict=%0d fpu_conflict=%0d dma=%0d barrier=%0d mode_switch=%0d rtc_wake=%0d",
             n_l2c, n_tc, n_fpc, n_dma, n_bar, n_mode, n_wake);
    finish();
  end
endmodule
