// tb_cdc_mem_bridge: a master on a 10 ns clock reaches a one-cycle memory
// model on a 17 ns clock through the dual-clock bridge (and its dual-clock
// FIFOs). 200 random writes and reads, some back to back, are checked
// against a model; the master issues requests without waiting for
// responses, up to the bridge's credit limit, so the credit logic and
// in-order return are exercised. A second part pushes 300 words through a
// bare dc_fifo with random stalls on both sides and checks the order.
module tb_cdc_mem_bridge;
  import vega_pkg::*;
  timeunit 1ns;
  timeprecision 1ps;
  localparam int unsigned WATCHDOG = 100000;
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

  logic mclk = 1'b0;
  always #8.5 mclk = ~mclk;
  mem_req_t m_req;
  mem_rsp_t m_rsp;
  logic [31:0] mem [256];
  logic [31:0] model [256];
  cdc_mem_bridge dut (.s_clk_i(clk), .s_rst_ni(rst_n), .s_req_i(bus_req), .s_rsp_o(bus_rsp),
    .m_clk_i(mclk), .m_rst_ni(rst_n), .m_req_o(m_req), .m_rsp_i(m_rsp));
  assign m_rsp.gnt = m_req.req;
  always @(posedge mclk) begin
    m_rsp.rvalid <= m_req.req;
    if (m_req.req && m_req.we) mem[m_req.addr[9:2]] <= m_req.wdata;
    m_rsp.rdata <= mem[m_req.addr[9:2]];
  end
  initial m_rsp.rvalid = 1'b0;
  initial m_rsp.rdata = '0;

  // pipelined master: expected responses queue
  logic [31:0] exp_q [$];
  logic        chk_q [$];
  int n_rsp = 0;
  always @(negedge clk) if (bus_rsp.rvalid) begin
    logic [31:0] e; logic c;
    e = exp_q.pop_front(); c = chk_q.pop_front();
    n_rsp++;
    if (c) check(bus_rsp.rdata == e, $sformatf("bridge read data %h expected %h", bus_rsp.rdata, e));
  end

  // bare FIFO
  logic f_wv, f_wr, f_rv, f_rr;
  logic [31:0] f_wd, f_rd;
  dc_fifo #(.WIDTH(32), .DEPTH(4)) i_fifo (.wclk_i(clk), .wrst_ni(rst_n), .wvalid_i(f_wv), .wready_o(f_wr),
    .wdata_i(f_wd), .rclk_i(mclk), .rrst_ni(rst_n), .rvalid_o(f_rv), .rready_i(f_rr), .rdata_o(f_rd));
  int f_got = 0;
  always @(posedge mclk) begin
    if (f_rv && f_rr) begin
      check(f_rd == 32'(f_got * 7 + 3), "dc_fifo order");
      f_got++;
    end
    f_rr <= ($urandom_range(0, 3) != 0);
  end
  initial f_rr = 1'b0;

  initial begin
    int n;
    f_wv = 1'b0; f_wd = '0;
    for (int i = 0; i < 256; i++) begin mem[i] = '0; model[i] = '0; end
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    repeat (5) @(posedge clk);
    for (n = 0; n < 300; n++) begin
      @(negedge clk);
      f_wv = 1'b1; f_wd = 32'(n * 7 + 3);
      @(posedge clk);
      while (!f_wr) @(posedge clk);
      #1;
      if ($urandom_range(0, 2) == 0) begin @(negedge clk); f_wv = 1'b0; end
    end
    @(negedge clk); f_wv = 1'b0;
    wait (f_got == 300);
    for (n = 0; n < 200; n++) begin
      logic [7:0] idx; logic we; logic [31:0] d;
      idx = 8'($urandom_range(0, 15)); we = $urandom_range(0, 1); d = $urandom;
      bus_req = '{req: 1'b1, we: we, be: 4'hF, addr: {22'd0, idx, 2'd0}, wdata: d};
      @(negedge clk);
      while (!bus_rsp.gnt) @(negedge clk);
      exp_q.push_back(model[idx]); chk_q.push_back(!we);
      if (we) model[idx] = d;
      @(posedge clk); #1;
      bus_req.req = 1'b0;
      if ($urandom_range(0, 3) == 0) begin @(posedge clk); #1; end
    end
    wait (n_rsp == 200);
    check(exp_q.size() == 0, "all responses returned");
    finish();
  end
endmodule
