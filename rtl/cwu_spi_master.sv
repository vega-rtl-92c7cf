// cwu_spi_master: autonomous SPI master of the cognitive wake-up unit. It
// reads external sensors without any core: a small micro-instruction memory
// holds the access pattern, which is executed in an endless loop once
// enabled. All four SPI modes (CPOL, CPHA) and four chip selects are
// supported; SCLK runs at half the CWU clock. Each bit takes two clock
// cycles: MOSI is driven in the first half and MISO is sampled at the end of
// the first half, which is the sampling edge in every mode.
// Micro-instruction (32 bits, own encoding):
//   [31:30] op: 0 XFER, 1 WAIT, 2 restart from entry 0
//   XFER: [29:28] chip select, [27:24] bits-1, [23:21] channel,
//         [20] emit the received word as a sample, [19] keep CS low after,
//         [15:0] data to send, MSB first
//   WAIT: [15:0] idle cycles
// Received words (right-aligned, up to 16 bits) leave on a valid/ready
// sample stream tagged with the channel; the sequencer waits while the
// stream is stalled. Registers: 0x00-0x3C micro-code, 0x40 CFG:
// [0] enable, [1] CPOL, [2] CPHA.
module cwu_spi_master
  import vega_pkg::*;
#(
  parameter int unsigned N_UCODE = 16,
  localparam int unsigned PW = $clog2(N_UCODE)
) (
  input  logic        clk_i,
  input  logic        rst_ni,
  input  mem_req_t    cfg_req_i,
  output mem_rsp_t    cfg_rsp_o,
  output logic        sclk_o,
  output logic [3:0]  cs_no,
  output logic        mosi_o,
  input  logic        miso_i,
  output logic        s_valid_o,
  input  logic        s_ready_i,
  output logic [15:0] s_data_o,
  output logic [2:0]  s_ch_o
);
  logic [31:0] ucode [N_UCODE];
  logic        en_q, cpol_q, cpha_q;
  logic [PW-1:0] pc_q;
  typedef enum logic [2:0] {S_IDLE, S_FETCH, S_BIT0, S_BIT1, S_WAIT, S_EMIT} st_e;
  st_e st_q;
  logic [31:0] ins_q;
  logic [3:0]  bit_q;
  logic [15:0] rx_q, tx_q, wcnt_q;
  logic [3:0]  cs_q;
  logic        rvalid_q;
  logic [31:0] rdata_q;

  assign cfg_rsp_o.gnt    = cfg_req_i.req;
  assign cfg_rsp_o.rvalid = rvalid_q;
  assign cfg_rsp_o.rdata  = rdata_q;

  always_ff @(posedge clk_i)
    if (cfg_req_i.req && cfg_req_i.we && !cfg_req_i.addr[6])
      ucode[cfg_req_i.addr[2 +: PW]] <= cfg_req_i.wdata;

  assign sclk_o    = (st_q == S_BIT1) ? ~cpol_q ^ cpha_q : ((st_q == S_BIT0) ? cpol_q ^ cpha_q : cpol_q);
  assign mosi_o    = tx_q[15];
  assign cs_no     = cs_q;
  assign s_valid_o = (st_q == S_EMIT);
  assign s_data_o  = rx_q;
  assign s_ch_o    = ins_q[23:21];

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      en_q <= 1'b0; cpol_q <= 1'b0; cpha_q <= 1'b0; pc_q <= '0; st_q <= S_IDLE;
      ins_q <= '0; bit_q <= '0; rx_q <= '0; tx_q <= '0; wcnt_q <= '0; cs_q <= '1;
      rvalid_q <= 1'b0; rdata_q <= '0;
    end else begin
      rvalid_q <= cfg_req_i.req;
      if (cfg_req_i.req && cfg_req_i.we && cfg_req_i.addr[6]) begin
        en_q <= cfg_req_i.wdata[0]; cpol_q <= cfg_req_i.wdata[1]; cpha_q <= cfg_req_i.wdata[2];
      end
      if (cfg_req_i.req && !cfg_req_i.we)
        rdata_q <= cfg_req_i.addr[6] ? {29'd0, cpha_q, cpol_q, en_q} : ucode[cfg_req_i.addr[2 +: PW]];
      unique case (st_q)
        S_IDLE: begin
          cs_q <= '1;
          pc_q <= '0;
          if (en_q) st_q <= S_FETCH;
        end
        S_FETCH: begin
          ins_q <= ucode[pc_q];
          pc_q  <= pc_q + 1'b1;
          unique case (ucode[pc_q][31:30])
            2'd0: begin
              cs_q  <= ~(4'b1 << ucode[pc_q][29:28]);
              tx_q  <= ucode[pc_q][15:0] << (4'd15 - ucode[pc_q][27:24]);
              bit_q <= ucode[pc_q][27:24];
              rx_q  <= '0;
              st_q  <= S_BIT0;
            end
            2'd1: begin wcnt_q <= ucode[pc_q][15:0]; st_q <= S_WAIT; end
            default: begin pc_q <= '0; st_q <= en_q ? S_FETCH : S_IDLE; end
          endcase
        end
        S_BIT0: begin
          rx_q <= {rx_q[14:0], miso_i};
          st_q <= S_BIT1;
        end
        S_BIT1: begin
          tx_q <= tx_q << 1;
          if (bit_q == 0) begin
            if (!ins_q[19]) cs_q <= '1;
            st_q <= ins_q[20] ? S_EMIT : (en_q ? S_FETCH : S_IDLE);
          end else begin
            bit_q <= bit_q - 1'b1;
            st_q  <= S_BIT0;
          end
        end
        S_WAIT: if (wcnt_q <= 16'd1) st_q <= en_q ? S_FETCH : S_IDLE; else wcnt_q <= wcnt_q - 1'b1;
        S_EMIT: if (s_ready_i) st_q <= en_q ? S_FETCH : S_IDLE;
        default: st_q <= S_IDLE;
      endcase
    end
  end
endmodule
