// tb_log_interconnect: four masters share four word-interleaved SRAM
// banks (sram_bank) through the logarithmic interconnect. Each master runs
// 300 random reads and writes with random byte enables inside its own
// slice of addresses, all at the same time, so banks conflict; every read is
// compared with a per-master model of memory contents. The test also checks
// that responses come exactly one cycle after the grant, that conflicts did
// occur and that every master made progress (round-robin fairness).
module tb_log_interconnect;
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

  localparam int unsigned NM = 4, NB = 4, BWD = 64;
  mem_req_t [NM-1:0] req;
  mem_rsp_t [NM-1:0] rsp;
  logic [NB-1:0] b_req, b_we, b_conf;
  logic [NB-1:0][3:0] b_be;
  logic [NB-1:0][5:0] b_addr;
  logic [NB-1:0][31:0] b_wdata, b_rdata;
  int n_conf = 0;
  int done_cnt = 0;
  log_interconnect #(.N_MST(NM), .N_BANK(NB), .BANK_WORDS(BWD)) dut (
    .clk_i(clk), .rst_ni(rst_n), .mst_req_i(req), .mst_rsp_o(rsp),
    .bank_req_o(b_req), .bank_we_o(b_we), .bank_be_o(b_be), .bank_addr_o(b_addr),
    .bank_wdata_o(b_wdata), .bank_rdata_i(b_rdata), .bank_conflict_o(b_conf));
  for (genvar b = 0; b < NB; b++) begin : g_b
    sram_bank #(.WORDS(BWD)) i_bank (.clk_i(clk), .req_i(b_req[b]), .we_i(b_we[b]), .be_i(b_be[b]),
      .addr_i(b_addr[b]), .wdata_i(b_wdata[b]), .rdata_o(b_rdata[b]));
  end
  always @(posedge clk) if (b_conf != 0) n_conf++;

  initial req = '0;
  for (genvar m = 0; m < NM; m++) begin : g_m
    initial begin
      logic [31:0] model [64];
      logic [31:0] a, d;
      logic [3:0] be;
      logic we;
      int idx;
      for (int i = 0; i < 64; i++) model[i] = '0;
      wait (rst_n);
      // clear the slice first
      for (int i = 0; i < 64; i++) begin
        @(posedge clk); #1;
        req[m] = '{req: 1'b1, we: 1'b1, be: 4'hF, addr: 32'(L1_BASE + 4 * (m * 64 + i)), wdata: '0};
        @(negedge clk);
        while (!rsp[m].gnt) @(negedge clk);
      end
      @(posedge clk); #1; req[m].req = 1'b0;
      for (int n = 0; n < 300; n++) begin
        idx = $urandom_range(0, 63);
        we  = $urandom_range(0, 1);
        be  = 4'($urandom_range(1, 15));
        d   = $urandom;
        a   = 32'(L1_BASE + 4 * (m * 64 + idx));
        @(posedge clk); #1;
        req[m] = '{req: 1'b1, we: we, be: be, addr: a, wdata: d};
        @(negedge clk);
        while (!rsp[m].gnt) @(negedge clk);
        @(posedge clk); #1;
        req[m].req = 1'b0;
        @(negedge clk);
        check(rsp[m].rvalid, "response one cycle after grant");
        if (!we) check(rsp[m].rdata == model[idx], $sformatf("master %0d read %0d", m, idx));
        else for (int k = 0; k < 4; k++) if (be[k]) model[idx][8*k +: 8] = d[8*k +: 8];
      end
      done_cnt++;
    end
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    wait (done_cnt == NM);
    check(n_conf > 0, "bank conflicts happened");
    finish();
  end
endmodule
