// mram_if: MRAM interface between the SoC clock domain and the MRAM clock
// domain. The I/O DMA's MRAM channel sends write data through the TX channel
// and receives read data through the RX channel; each channel crosses to the
// MRAM clock through a dual-clock FIFO into mram_ctrl, as drawn in the
// paper's SoC figure. Commands and completion status cross through two more
// dual-clock FIFOs. Software programs it through a register port (SoC clock):
//   0x0 MADDR   MRAM 64-bit word address
//   0x4 NWORDS  number of 64-bit words
//   0x8 CMD     write: bit 0 = 1 write, 0 read; queues the command
//   0xC STATUS  read: [15:0] completed commands, bit 16 sticky ECC error
// done_o pulses (SoC clock) when a command completes. The register map is
// this design's own.
module mram_if
  import vega_pkg::*;
#(
  parameter int unsigned AW = 19
) (
  input  logic        clk_i,      // SoC clock
  input  logic        rst_ni,
  input  logic        mram_clk_i, // MRAM clock (up to 40 MHz)
  input  logic        mram_rst_ni,
  input  mem_req_t    cfg_req_i,
  output mem_rsp_t    cfg_rsp_o,
  input  logic        tx_valid_i,
  output logic        tx_ready_o,
  input  logic [31:0] tx_data_i,
  output logic        rx_valid_o,
  input  logic        rx_ready_i,
  output logic [31:0] rx_data_o,
  output logic        done_o,
  // MRAM macro
  output logic          m_cs_o,
  output logic          m_we_o,
  output logic [AW-1:0] m_addr_o,
  output logic [77:0]   m_wdata_o,
  input  logic [77:0]   m_rdata_i,
  input  logic          m_rvalid_i,
  input  logic          m_busy_i
);
  logic [AW-1:0] maddr_q;
  logic [AW:0]   nwords_q;
  logic [15:0]   ndone_q;
  logic          err_q;
  logic          cmd_wready, cmd_rvalid, cmd_rready, cmd_we;
  logic [AW-1:0] cmd_addr;
  logic [AW:0]   cmd_len;
  logic          st_wvalid, st_wready, st_rvalid, st_err, st_werr;
  logic          ctx_valid, ctx_ready, crx_valid, crx_ready;
  logic [31:0]   ctx_data, crx_data;
  logic          rvalid_q;
  logic [31:0]   rdata_q;
  logic          is_cmd;

  assign is_cmd        = cfg_req_i.req && cfg_req_i.we && cfg_req_i.addr[3:2] == 2'd2;
  assign cfg_rsp_o.gnt = cfg_req_i.req && (!is_cmd || cmd_wready);
  assign cfg_rsp_o.rvalid = rvalid_q;
  assign cfg_rsp_o.rdata  = rdata_q;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      maddr_q <= '0; nwords_q <= '0; ndone_q <= '0; err_q <= 1'b0;
      rvalid_q <= 1'b0; rdata_q <= '0;
    end else begin
      rvalid_q <= cfg_rsp_o.gnt;
      if (cfg_rsp_o.gnt) begin
        if (cfg_req_i.we) begin
          unique case (cfg_req_i.addr[3:2])
            2'd0: maddr_q  <= cfg_req_i.wdata[AW-1:0];
            2'd1: nwords_q <= cfg_req_i.wdata[AW:0];
            default: ;
          endcase
        end else begin
          unique case (cfg_req_i.addr[3:2])
            2'd0: rdata_q <= 32'(maddr_q);
            2'd1: rdata_q <= 32'(nwords_q);
            2'd3: rdata_q <= {15'd0, err_q, ndone_q};
            default: rdata_q <= '0;
          endcase
        end
      end
      if (st_rvalid) begin
        ndone_q <= ndone_q + 1'b1;
        if (st_err) err_q <= 1'b1;
      end
    end
  end
  assign done_o = st_rvalid;

  dc_fifo #(.WIDTH(1 + AW + AW + 1), .DEPTH(4)) i_cmd_fifo (
    .wclk_i(clk_i), .wrst_ni(rst_ni), .wvalid_i(is_cmd), .wready_o(cmd_wready),
    .wdata_i({cfg_req_i.wdata[0], maddr_q, nwords_q}),
    .rclk_i(mram_clk_i), .rrst_ni(mram_rst_ni), .rvalid_o(cmd_rvalid), .rready_i(cmd_rready),
    .rdata_o({cmd_we, cmd_addr, cmd_len}));

  dc_fifo #(.WIDTH(1), .DEPTH(4)) i_status_fifo (
    .wclk_i(mram_clk_i), .wrst_ni(mram_rst_ni), .wvalid_i(st_wvalid), .wready_o(st_wready),
    .wdata_i(st_werr),
    .rclk_i(clk_i), .rrst_ni(rst_ni), .rvalid_o(st_rvalid), .rready_i(1'b1), .rdata_o(st_err));

  dc_fifo #(.WIDTH(32), .DEPTH(8)) i_tx_fifo (
    .wclk_i(clk_i), .wrst_ni(rst_ni), .wvalid_i(tx_valid_i), .wready_o(tx_ready_o), .wdata_i(tx_data_i),
    .rclk_i(mram_clk_i), .rrst_ni(mram_rst_ni), .rvalid_o(ctx_valid), .rready_i(ctx_ready), .rdata_o(ctx_data));

  dc_fifo #(.WIDTH(32), .DEPTH(8)) i_rx_fifo (
    .wclk_i(mram_clk_i), .wrst_ni(mram_rst_ni), .wvalid_i(crx_valid), .wready_o(crx_ready), .wdata_i(crx_data),
    .rclk_i(clk_i), .rrst_ni(rst_ni), .rvalid_o(rx_valid_o), .rready_i(rx_ready_i), .rdata_o(rx_data_o));

  mram_ctrl #(.AW(AW)) i_ctrl (
    .clk_i(mram_clk_i), .rst_ni(mram_rst_ni),
    .cmd_valid_i(cmd_rvalid), .cmd_ready_o(cmd_rready), .cmd_we_i(cmd_we), .cmd_addr_i(cmd_addr), .cmd_len_i(cmd_len),
    .done_valid_o(st_wvalid), .done_ready_i(st_wready), .done_err_o(st_werr),
    .tx_valid_i(ctx_valid), .tx_ready_o(ctx_ready), .tx_data_i(ctx_data),
    .rx_valid_o(crx_valid), .rx_ready_i(crx_ready), .rx_data_o(crx_data),
    .m_cs_o, .m_we_o, .m_addr_o, .m_wdata_o, .m_rdata_i, .m_rvalid_i, .m_busy_i);
endmodule
