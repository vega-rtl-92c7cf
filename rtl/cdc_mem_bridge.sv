// cdc_mem_bridge: carries the memory protocol from one clock domain to
// another, as the cluster's master and slave ports to the SoC interconnect
// do. A request FIFO (we, be, addr, wdata) and a response FIFO (rdata), both
// dual-clock, connect the two sides. The slave side grants a request when the
// request FIFO has room and fewer than DEPTH responses are outstanding, so the
// response FIFO can never overflow; responses come back in order. The paper
// specifies AXI4 ports behind dual-clock FIFOs; this design keeps its own
// simpler request/response protocol on both sides instead of AXI4.
module cdc_mem_bridge
  import vega_pkg::*;
#(
  parameter int unsigned DEPTH = 4
) (
  input  logic     s_clk_i,
  input  logic     s_rst_ni,
  input  mem_req_t s_req_i,
  output mem_rsp_t s_rsp_o,
  input  logic     m_clk_i,
  input  logic     m_rst_ni,
  output mem_req_t m_req_o,
  input  mem_rsp_t m_rsp_i
);
  localparam int unsigned RW = 1 + 4 + 32 + 32;
  logic          rq_wready, rq_rvalid, rs_rvalid, rs_wready;
  logic [RW-1:0] rq_rdata;
  logic [31:0]   rs_rdata;
  logic [$clog2(DEPTH+1)-1:0] outst_q;
  logic          s_fire;

  assign s_fire = s_req_i.req && rq_wready && (32'(outst_q) < DEPTH);

  dc_fifo #(.WIDTH(RW), .DEPTH(DEPTH)) i_req_fifo (
    .wclk_i(s_clk_i), .wrst_ni(s_rst_ni), .wvalid_i(s_fire), .wready_o(rq_wready),
    .wdata_i({s_req_i.we, s_req_i.be, s_req_i.addr, s_req_i.wdata}),
    .rclk_i(m_clk_i), .rrst_ni(m_rst_ni), .rvalid_o(rq_rvalid), .rready_i(m_rsp_i.gnt),
    .rdata_o(rq_rdata));

  assign m_req_o.req   = rq_rvalid;
  assign m_req_o.we    = rq_rdata[RW-1];
  assign m_req_o.be    = rq_rdata[RW-2 -: 4];
  assign m_req_o.addr  = rq_rdata[63:32];
  assign m_req_o.wdata = rq_rdata[31:0];

  dc_fifo #(.WIDTH(32), .DEPTH(DEPTH)) i_rsp_fifo (
    .wclk_i(m_clk_i), .wrst_ni(m_rst_ni), .wvalid_i(m_rsp_i.rvalid), .wready_o(rs_wready),
    .wdata_i(m_rsp_i.rdata),
    .rclk_i(s_clk_i), .rrst_ni(s_rst_ni), .rvalid_o(rs_rvalid), .rready_i(1'b1),
    .rdata_o(rs_rdata));

  assign s_rsp_o.gnt    = s_fire;
  assign s_rsp_o.rvalid = rs_rvalid;
  assign s_rsp_o.rdata  = rs_rdata;

  always_ff @(posedge s_clk_i or negedge s_rst_ni) begin
    if (!s_rst_ni) outst_q <= '0;
    else outst_q <= outst_q + $bits(outst_q)'(s_fire) - $bits(outst_q)'(rs_rvalid);
  end

  // the credit scheme guarantees room for every response
  a_no_overflow: assert property (@(posedge m_clk_i) disable iff (!m_rst_ni)
    m_rsp_i.rvalid |-> rs_wready);
endmodule
