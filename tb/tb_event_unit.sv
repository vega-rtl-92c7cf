// tb_event_unit: checks the cluster event unit. (1) Barrier: cores arrive
// one after another; none is released until the last masked core arrives,
// then all get release_o exactly two cycles after the last arrival and their
// clocks are gated while they wait. (2) Event wait: a core waiting for
// event line 1 sleeps until that line fires (a hardware line and a
// software-triggered event) and is released two cycles later; an event
// outside its mask does not wake it; an event that came before the wait is
// remembered and releases at once.
module tb_event_unit;
  import vega_pkg::*;
  timeunit 1ns;
  timeprecision 1ps;
  localparam int unsigned WATCHDOG = 20000;
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

  mem_req_t bus_req = '0;
  mem_rsp_t bus_rsp;

  // requests change 1 ns after a rising edge, grants and responses are
  // sampled on the falling edge
  // one transfer on the request/grant bus: returns the response data
  task automatic bus(input logic we, input logic [31:0] a, input logic [31:0] d,
                     output logic [31:0] r);
    @(posedge clk); #1;
    bus_req = '{req: 1'b1, we: we, be: 4'hF, addr: a, wdata: d};
    @(negedge clk);
    while (!bus_rsp.gnt) @(negedge clk);
    @(posedge clk); #1;
    bus_req.req = 1'b0;
    @(negedge clk);
    while (!bus_rsp.rvalid) @(negedge clk);
    r = bus_rsp.rdata;
  endtask

  task automatic wr(input logic [31:0] a, input logic [31:0] d);
    logic [31:0] r;
    bus(1'b1, a, d, r);
  endtask

  task automatic rd(input logic [31:0] a, output logic [31:0] r);
    bus(1'b0, a, '0, r);
  endtask

  logic [7:0] evt;
  logic [8:0] bar, wt, clk_en, rel;
  event_unit dut (.clk_i(clk), .rst_ni(rst_n), .cfg_req_i(bus_req), .cfg_rsp_o(bus_rsp),
    .evt_i(evt), .bar_i(bar), .wait_i(wt), .clk_en_o(clk_en), .release_o(rel));
  logic [8:0] seen;
  always @(posedge clk) seen <= seen | rel;
  initial begin
    logic [31:0] r;
    int t0, t1;
    evt = '0; bar = '0; wt = '0; seen = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    wr(32'h0, 32'h0F);                      // barrier over cores 0..3
    for (int c = 0; c < 3; c++) begin
      @(negedge clk); bar[c] = 1'b1;
      repeat (3) @(negedge clk);
      check(rel == 0 && seen == 0, "no release before the barrier is complete");
      check(clk_en[c] == 1'b0, "waiting core clock gated");
    end
    @(negedge clk); bar[3] = 1'b1;
    t0 = 0;
    while (rel[0] == 1'b0 && t0 < 10) begin @(negedge clk); t0++; end
    check(rel[3:0] == 4'hF, "all barrier cores released together");
    check(clk_en[3:0] == 4'hF, "clocks back at release");
    check(t0 == 2, $sformatf("barrier release latency %0d (expected 2 cycles after last arrival)", t0));
    bar = '0;
    // event wait of core 5 on line 1
    wr(32'h40 + 4 * 5, 32'h2);
    @(negedge clk); wt[5] = 1'b1;
    repeat (3) @(negedge clk);
    evt[0] = 1'b1; @(negedge clk); evt[0] = 1'b0;
    repeat (4) @(negedge clk);
    check(!rel[5] && !clk_en[5], "event outside the mask ignored");
    evt[1] = 1'b1; @(negedge clk); evt[1] = 1'b0;
    t1 = 1;
    while (!rel[5] && t1 < 10) begin @(negedge clk); t1++; end
    check(rel[5], "event releases waiting core");
    check(t1 == 3, $sformatf("event release latency %0d (event registered, then 2 cycles)", t1));
    wt[5] = 1'b0;
    repeat (2) @(negedge clk);
    // software event fired before the wait is buffered
    wr(32'h4, 32'h2);
    @(negedge clk); wt[5] = 1'b1;
    t1 = 0;
    while (!rel[5] && t1 < 10) begin @(negedge clk); t1++; end
    check(rel[5], "buffered software event releases");
    wt[5] = 1'b0;
    rd(32'h0, r);
    check(r[8:0] == 9'h0F, "barrier mask readback");
    finish();
  end
endmodule
