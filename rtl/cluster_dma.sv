// cluster_dma: the cluster's DMA engine, which the orchestrator core programs
// to move tiles between L2 (through the cluster's port to the SoC) and the
// L1 TCDM. A job copies LEN words from SRC to DST. A load unit reads the
// source and a store unit writes the destination, linked by the load unit's
// word stream, so reads and writes overlap. The port each unit uses follows
// its address: inside the L1 window it is the TCDM port, elsewhere the
// external port; a job must therefore copy between L1 and another region.
// Registers: 0x0 SRC, 0x4 DST, 0x8 LEN (words), 0xC write: start, read: busy.
// done_o pulses once per job (an event for the event unit). The paper only
// says which copies the DMA makes; its insides here are this design's own.
module cluster_dma
  import vega_pkg::*;
(
  input  logic     clk_i,
  input  logic     rst_ni,
  input  mem_req_t cfg_req_i,
  output mem_rsp_t cfg_rsp_o,
  output mem_req_t tcdm_req_o,
  input  mem_rsp_t tcdm_rsp_i,
  output mem_req_t ext_req_o,
  input  mem_rsp_t ext_rsp_i,
  output logic     done_o
);
  logic [31:0] src_q, dst_q;
  logic [19:0] len_q;
  logic        busy_q, start, src_l1;
  logic        rvalid_q;
  logic [31:0] rdata_q;
  logic        ld_busy, st_busy, ld_done, st_done;
  mem_req_t    ld_req, st_req;
  mem_rsp_t    ld_rsp, st_rsp;
  logic        s_valid, s_ready;
  logic [31:0] s_data;
  logic        unused_ld_ready, unused_st_valid;
  logic [31:0] unused_st_data;

  assign start  = cfg_req_i.req && cfg_req_i.we && cfg_req_i.addr[3:2] == 2'd3 && !busy_q;
  assign src_l1 = (src_q & L1_MASK) == L1_BASE;
  assign cfg_rsp_o.gnt    = cfg_req_i.req;
  assign cfg_rsp_o.rvalid = rvalid_q;
  assign cfg_rsp_o.rdata  = rdata_q;
  assign done_o = st_done;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      src_q <= '0; dst_q <= '0; len_q <= '0; busy_q <= 1'b0; rvalid_q <= 1'b0; rdata_q <= '0;
    end else begin
      rvalid_q <= cfg_req_i.req;
      if (cfg_req_i.req && cfg_req_i.we) begin
        unique case (cfg_req_i.addr[3:2])
          2'd0: src_q <= cfg_req_i.wdata;
          2'd1: dst_q <= cfg_req_i.wdata;
          2'd2: len_q <= cfg_req_i.wdata[19:0];
          default: ;
        endcase
      end else if (cfg_req_i.req) begin
        unique case (cfg_req_i.addr[3:2])
          2'd0: rdata_q <= src_q;
          2'd1: rdata_q <= dst_q;
          2'd2: rdata_q <= 32'(len_q);
          default: rdata_q <= 32'(busy_q);
        endcase
      end
      if (start && len_q != 0) busy_q <= 1'b1;
      else if (st_done) busy_q <= 1'b0;
    end
  end

  stream_ld_unit i_ld (
    .clk_i, .rst_ni, .start_i(start), .load_i(1'b1), .base_i(src_q), .len_i(len_q),
    .busy_o(ld_busy), .done_o(ld_done), .mem_req_o(ld_req), .mem_rsp_i(ld_rsp),
    .out_valid_o(s_valid), .out_ready_i(s_ready), .out_data_o(s_data),
    .in_valid_i(1'b0), .in_ready_o(unused_ld_ready), .in_data_i(32'd0));
  stream_ld_unit i_st (
    .clk_i, .rst_ni, .start_i(start), .load_i(1'b0), .base_i(dst_q), .len_i(len_q),
    .busy_o(st_busy), .done_o(st_done), .mem_req_o(st_req), .mem_rsp_i(st_rsp),
    .out_valid_o(unused_st_valid), .out_ready_i(1'b0), .out_data_o(unused_st_data),
    .in_valid_i(s_valid), .in_ready_o(s_ready), .in_data_i(s_data));

  always_comb begin
    tcdm_req_o = src_l1 ? ld_req : st_req;
    ext_req_o  = src_l1 ? st_req : ld_req;
    ld_rsp     = src_l1 ? tcdm_rsp_i : ext_rsp_i;
    st_rsp     = src_l1 ? ext_rsp_i : tcdm_rsp_i;
  end
endmodule
