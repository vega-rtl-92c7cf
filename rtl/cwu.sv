// cwu: cognitive wake-up unit. It watches external sensors while the rest
// of the chip sleeps and asks the power manager for a wake-up when it
// recognises a pattern. Three stages form a stream:
//   cwu_spi_master  autonomous SPI master reading the sensors as programmed
//   cwu_preproc     per-channel shift, offset removal, low-pass, LBP and
//                   subsampling
//   hypnos          HDC encoder, associative memory and micro-coded
//                   controller; its interrupt is wake_o
// The unit runs on its own always-on clock (32 kHz in the paper); the
// configuration port is in that clock domain too. Offsets:
//   0x0000-0x00FF SPI master, 0x0100-0x01FF preprocessor,
//   0x2000-0x3FFF Hypnos (its own map at offset 0).
// The chain and its stages follow the paper; the address map is this
// design's own. Each stage adds one cycle of latency; every stage stalls on
// back-pressure from the next.
module cwu
  import vega_pkg::*;
(
  input  logic       clk_i,
  input  logic       rst_ni,
  input  mem_req_t   cfg_req_i,
  output mem_rsp_t   cfg_rsp_o,
  output logic       sclk_o,
  output logic [3:0] cs_no,
  output logic       mosi_o,
  input  logic       miso_i,
  output logic       wake_o
);
  localparam logic [2:0][31:0] BASE = {32'h0000_2000, 32'h0000_0100, 32'h0000_0000};
  localparam logic [2:0][31:0] MASK = {32'hFFFF_E000, 32'hFFFF_FF00, 32'hFFFF_FF00};

  mem_req_t       local_req;
  mem_req_t [2:0] slv_req;
  mem_rsp_t [2:0] slv_rsp;

  always_comb begin
    local_req      = cfg_req_i;
    local_req.addr = {18'd0, cfg_req_i.addr[13:0]};
  end

  addr_demux #(.N_SLV(3), .BASE(BASE), .MASK(MASK)) i_demux (
    .clk_i, .rst_ni, .mst_req_i(local_req), .mst_rsp_o(cfg_rsp_o),
    .slv_req_o(slv_req), .slv_rsp_i(slv_rsp));

  logic        spi_valid, spi_ready, pp_valid, pp_ready;
  logic [15:0] spi_data, pp_data;
  logic [2:0]  spi_ch, pp_ch;

  cwu_spi_master i_spi (
    .clk_i, .rst_ni, .cfg_req_i(slv_req[0]), .cfg_rsp_o(slv_rsp[0]),
    .sclk_o, .cs_no, .mosi_o, .miso_i,
    .s_valid_o(spi_valid), .s_ready_i(spi_ready), .s_data_o(spi_data), .s_ch_o(spi_ch));

  cwu_preproc i_pp (
    .clk_i, .rst_ni, .cfg_req_i(slv_req[1]), .cfg_rsp_o(slv_rsp[1]),
    .in_valid_i(spi_valid), .in_ready_o(spi_ready), .in_data_i(spi_data), .in_ch_i(spi_ch),
    .out_valid_o(pp_valid), .out_ready_i(pp_ready), .out_data_o(pp_data), .out_ch_o(pp_ch));

  mem_req_t hyp_req;
  always_comb begin
    hyp_req      = slv_req[2];
    hyp_req.addr = {19'd0, slv_req[2].addr[12:0]};
  end

  hypnos i_hypnos (
    .clk_i, .rst_ni, .cfg_req_i(hyp_req), .cfg_rsp_o(slv_rsp[2]),
    .s_valid_i(pp_valid), .s_ready_o(pp_ready), .s_data_i(pp_data), .irq_o(wake_o));

  // the channel tag is not used by Hypnos, which sees one merged stream
  logic unused_ch;
  assign unused_ch = ^pp_ch;
endmodule
