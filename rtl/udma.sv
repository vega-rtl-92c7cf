// udma: I/O DMA engine of the SoC domain. Every peripheral has its own
// channel pair: an RX channel writes the peripheral's incoming word stream to
// L2 and a TX channel reads words from L2 into the peripheral's outgoing
// stream, without the Fabric Controller touching the data. Channel 0 is the
// MRAM channel, the others serve peripherals that sit outside this design.
// Each direction is a stream_ld_unit; all of them share the single L2 master
// port through a round-robin mem_mux. Registers, per channel c and direction
// d (0 = RX, 1 = TX), at offset 0x20*c + 0x10*d:
//   0x0 SADDR  L2 byte address       0x4 SIZE  number of 32-bit words
//   0x8 CFG    write: start          read: bit 0 busy
// done_o[2c+d] pulses when a transfer ends. Per-peripheral channels follow
// the paper; register layout and arbitration are this design's own.
module udma
  import vega_pkg::*;
#(
  parameter int unsigned N_CH = 2
) (
  input  logic                 clk_i,
  input  logic                 rst_ni,
  input  mem_req_t             cfg_req_i,
  output mem_rsp_t             cfg_rsp_o,
  output mem_req_t             l2_req_o,
  input  mem_rsp_t             l2_rsp_i,
  // RX: peripheral -> L2
  input  logic [N_CH-1:0]      rx_valid_i,
  output logic [N_CH-1:0]      rx_ready_o,
  input  logic [N_CH-1:0][31:0] rx_data_i,
  // TX: L2 -> peripheral
  output logic [N_CH-1:0]      tx_valid_o,
  input  logic [N_CH-1:0]      tx_ready_i,
  output logic [N_CH-1:0][31:0] tx_data_o,
  output logic [2*N_CH-1:0]    done_o
);
  localparam int unsigned NU = 2 * N_CH;
  logic [NU-1:0][31:0] saddr_q;
  logic [NU-1:0][19:0] size_q;
  logic [NU-1:0]       start, busy;
  mem_req_t [NU-1:0]   u_req;
  mem_rsp_t [NU-1:0]   u_rsp;
  logic                rvalid_q;
  logic [31:0]         rdata_q;
  logic [$clog2(NU)-1:0] cu;

  assign cu = $clog2(NU)'(cfg_req_i.addr[31:4]);
  assign cfg_rsp_o.gnt    = cfg_req_i.req;
  assign cfg_rsp_o.rvalid = rvalid_q;
  assign cfg_rsp_o.rdata  = rdata_q;

  always_comb begin
    start = '0;
    if (cfg_req_i.req && cfg_req_i.we && cfg_req_i.addr[3:2] == 2'd2) start[cu] = 1'b1;
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      saddr_q <= '0; size_q <= '0; rvalid_q <= 1'b0; rdata_q <= '0;
    end else begin
      rvalid_q <= cfg_req_i.req;
      if (cfg_req_i.req) begin
        if (cfg_req_i.we) begin
          if (cfg_req_i.addr[3:2] == 2'd0) saddr_q[cu] <= cfg_req_i.wdata;
          if (cfg_req_i.addr[3:2] == 2'd1) size_q[cu]  <= cfg_req_i.wdata[19:0];
        end else begin
          unique case (cfg_req_i.addr[3:2])
            2'd0:    rdata_q <= saddr_q[cu];
            2'd1:    rdata_q <= 32'(size_q[cu]);
            2'd2:    rdata_q <= 32'(busy[cu]);
            default: rdata_q <= '0;
          endcase
        end
      end
    end
  end

  for (genvar c = 0; c < N_CH; c++) begin : g_ch
    logic unused_rx_out_valid;
    logic [31:0] unused_rx_out_data;
    logic unused_tx_in_ready;
    stream_ld_unit i_rx (
      .clk_i, .rst_ni, .start_i(start[2*c]), .load_i(1'b0), .base_i(saddr_q[2*c]), .len_i(size_q[2*c]),
      .busy_o(busy[2*c]), .done_o(done_o[2*c]), .mem_req_o(u_req[2*c]), .mem_rsp_i(u_rsp[2*c]),
      .out_valid_o(unused_rx_out_valid), .out_ready_i(1'b0), .out_data_o(unused_rx_out_data),
      .in_valid_i(rx_valid_i[c]), .in_ready_o(rx_ready_o[c]), .in_data_i(rx_data_i[c]));
    stream_ld_unit i_tx (
      .clk_i, .rst_ni, .start_i(start[2*c+1]), .load_i(1'b1), .base_i(saddr_q[2*c+1]), .len_i(size_q[2*c+1]),
      .busy_o(busy[2*c+1]), .done_o(done_o[2*c+1]), .mem_req_o(u_req[2*c+1]), .mem_rsp_i(u_rsp[2*c+1]),
      .out_valid_o(tx_valid_o[c]), .out_ready_i(tx_ready_i[c]), .out_data_o(tx_data_o[c]),
      .in_valid_i(1'b0), .in_ready_o(unused_tx_in_ready), .in_data_i(32'd0));
  end

  mem_mux #(.N_IN(NU), .DEPTH(4)) i_mux (
    .clk_i, .rst_ni, .in_req_i(u_req), .in_rsp_o(u_rsp), .out_req_o(l2_req_o), .out_rsp_i(l2_rsp_i));
endmodule
