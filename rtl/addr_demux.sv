// addr_demux: routes one master port to one of N_SLV slave ports by address
// range (slave s is selected when (addr & MASK[s]) == BASE[s]).
// It is the address decoder of the peripheral interconnect, the cluster bus
// and the SoC interconnect. An address no slave claims is granted at once and
// answered with rdata 0 (error slave). One transaction at a time: after a
// grant the demux holds off new requests until that slave's rvalid, so
// responses can never be reordered. The paper names these buses; the decoder
// and its address map are this design's own.
module addr_demux
  import vega_pkg::*;
#(
  parameter int unsigned N_SLV = 4,
  parameter logic [N_SLV-1:0][31:0] BASE = '0,
  parameter logic [N_SLV-1:0][31:0] MASK = '0,
  localparam int unsigned SW = $clog2(N_SLV + 1)
) (
  input  logic                  clk_i,
  input  logic                  rst_ni,
  input  mem_req_t              mst_req_i,
  output mem_rsp_t              mst_rsp_o,
  output mem_req_t [N_SLV-1:0]  slv_req_o,
  input  mem_rsp_t [N_SLV-1:0]  slv_rsp_i
);
  logic [SW-1:0] sel;
  logic          busy_q, err_q;
  logic [SW-1:0] sel_q;

  always_comb begin
    sel = SW'(N_SLV);
    for (int s = N_SLV - 1; s >= 0; s--)
      if ((mst_req_i.addr & MASK[s]) == BASE[s]) sel = SW'(s);
  end

  always_comb begin
    for (int s = 0; s < N_SLV; s++) begin
      slv_req_o[s]     = mst_req_i;
      slv_req_o[s].req = mst_req_i.req && !busy_q && (sel == SW'(s));
    end
    mst_rsp_o = '0;
    if (!busy_q && mst_req_i.req)
      mst_rsp_o.gnt = (sel == SW'(N_SLV)) ? 1'b1 : slv_rsp_i[sel].gnt;
    if (busy_q) begin
      if (err_q) begin
        mst_rsp_o.rvalid = 1'b1;
      end else begin
        mst_rsp_o.rvalid = slv_rsp_i[sel_q].rvalid;
        mst_rsp_o.rdata  = slv_rsp_i[sel_q].rdata;
      end
    end
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      busy_q <= 1'b0;
      err_q  <= 1'b0;
      sel_q  <= '0;
    end else if (!busy_q) begin
      if (mst_req_i.req && mst_rsp_o.gnt) begin
        busy_q <= 1'b1;
        err_q  <= (sel == SW'(N_SLV));
        sel_q  <= sel;
      end
    end else if (mst_rsp_o.rvalid) begin
      busy_q <= 1'b0;
    end
  end
endmodule
