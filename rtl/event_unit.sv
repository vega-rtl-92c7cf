// event_unit: synchronisation unit of the cluster. A core that enters a
// barrier (bar_i high) or waits for an event (wait_i high) has its clock
// gated (clk_en_o low) from the next cycle. A barrier completes when every
// core of BAR_MASK has arrived; an event wait completes when an event line
// enabled in that core's mask has fired since the core last woke (events are
// buffered per core). Completion is registered twice, so a sleeping core gets
// its clock back and a one-cycle release_o pulse two cycles after the
// releasing condition, the paper's 2-cycle resume; the core then drops its
// request. Registers: 0x0 BAR_MASK, 0x4 SW_EVT (write: fire these event
// lines), 0x40 + 4*c event mask of core c. Barrier and event semantics and
// the register map are this design's own; the paper gives the function and
// the 2-cycle resume.
module event_unit
  import vega_pkg::*;
#(
  parameter int unsigned N_CORES = 9,
  parameter int unsigned N_EVT   = 8
) (
  input  logic               clk_i,
  input  logic               rst_ni,
  input  mem_req_t           cfg_req_i,
  output mem_rsp_t           cfg_rsp_o,
  input  logic [N_EVT-1:0]   evt_i,
  input  logic [N_CORES-1:0] bar_i,
  input  logic [N_CORES-1:0] wait_i,
  output logic [N_CORES-1:0] clk_en_o,
  output logic [N_CORES-1:0] release_o
);
  logic [N_CORES-1:0]            bar_mask_q, asleep_q, rel1_q, rel2_q;
  logic [N_CORES-1:0][N_EVT-1:0] emask_q, pend_q;
  logic [N_EVT-1:0]              sw_evt, evt_all;
  logic                          bar_done;
  logic [N_CORES-1:0]            rel;
  logic                          rvalid_q;
  logic [31:0]                   rdata_q;

  assign cfg_rsp_o.gnt    = cfg_req_i.req;
  assign cfg_rsp_o.rvalid = rvalid_q;
  assign cfg_rsp_o.rdata  = rdata_q;
  assign sw_evt  = (cfg_req_i.req && cfg_req_i.we && cfg_req_i.addr[6:2] == 5'd1) ? cfg_req_i.wdata[N_EVT-1:0] : '0;
  assign evt_all = evt_i | sw_evt;

  // barrier: all masked cores are asleep in the barrier (or arriving now)
  assign bar_done = ((bar_i & bar_mask_q) == bar_mask_q) && (bar_mask_q != 0) &&
                    ((rel1_q | rel2_q) & bar_mask_q) == 0;
  always_comb begin
    for (int c = 0; c < N_CORES; c++)
      rel[c] = !rel1_q[c] && !rel2_q[c] &&
               ((bar_i[c] && bar_done) || (asleep_q[c] && wait_i[c] && ((pend_q[c] & emask_q[c]) != 0)));
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      bar_mask_q <= '1; emask_q <= '0; pend_q <= '0; asleep_q <= '0;
      rel1_q <= '0; rel2_q <= '0; rvalid_q <= 1'b0; rdata_q <= '0;
    end else begin
      rvalid_q <= cfg_req_i.req;
      if (cfg_req_i.req && cfg_req_i.we) begin
        if (cfg_req_i.addr[6:2] == 5'd0) bar_mask_q <= cfg_req_i.wdata[N_CORES-1:0];
        for (int c = 0; c < N_CORES; c++)
          if (cfg_req_i.addr[6:2] == 5'(16 + c)) emask_q[c] <= cfg_req_i.wdata[N_EVT-1:0];
      end else if (cfg_req_i.req) begin
        rdata_q <= (cfg_req_i.addr[6:2] == 5'd0) ? 32'(bar_mask_q) : 32'(asleep_q);
      end
      rel1_q <= rel;
      rel2_q <= rel1_q;
      for (int c = 0; c < N_CORES; c++) begin
        if (rel[c] && wait_i[c]) pend_q[c] <= evt_all & ~emask_q[c] & pend_q[c];
        else pend_q[c] <= pend_q[c] | evt_all;
        if (rel2_q[c]) asleep_q[c] <= 1'b0;
        else if ((bar_i[c] || wait_i[c]) && !rel1_q[c]) asleep_q[c] <= 1'b1;
      end
    end
  end
  assign clk_en_o  = ~asleep_q | rel2_q;
  assign release_o = rel2_q;
endmodule
