// mram_ctrl: MRAM controller, running in the MRAM clock domain. It turns a
// command (read or write, MRAM word address, number of 64-bit words) and the
// 32-bit data streams of the I/O DMA's MRAM channel into accesses of the
// 78-bit MRAM macro, hiding the macro's protocol from software as the paper
// describes. Writes take two stream words (low, then high) per MRAM word and
// add 14 check bits; reads check the 14 bits and emit two stream words.
// The paper gives the 78-bit interface with 14-bit ECC but not the code; this
// design uses 14 interleaved parity bits (check bit k = XOR of the data bits
// whose index mod 14 is k), which detects all single-bit errors (and bursts
// of up to 14 bits) without correcting them; an error sets ecc_err in the
// completion status. One command at a time; a status word is emitted when it
// ends. Streams use valid/ready.
module mram_ctrl #(
  parameter int unsigned AW = 19
) (
  input  logic          clk_i,
  input  logic          rst_ni,
  // command: {write, addr, nwords}
  input  logic          cmd_valid_i,
  output logic          cmd_ready_o,
  input  logic          cmd_we_i,
  input  logic [AW-1:0] cmd_addr_i,
  input  logic [AW:0]   cmd_len_i,
  // completion status
  output logic          done_valid_o,
  input  logic          done_ready_i,
  output logic          done_err_o,
  // write data stream (from L2)
  input  logic          tx_valid_i,
  output logic          tx_ready_o,
  input  logic [31:0]   tx_data_i,
  // read data stream (to L2)
  output logic          rx_valid_o,
  input  logic          rx_ready_i,
  output logic [31:0]   rx_data_o,
  // MRAM macro
  output logic          m_cs_o,
  output logic          m_we_o,
  output logic [AW-1:0] m_addr_o,
  output logic [77:0]   m_wdata_o,
  input  logic [77:0]   m_rdata_i,
  input  logic          m_rvalid_i,
  input  logic          m_busy_i
);
  typedef enum logic [3:0] {S_IDLE, S_WLO, S_WHI, S_WISSUE, S_RISSUE, S_RWAIT, S_RLO, S_RHI, S_DONE} st_e;
  st_e st_q;
  logic [AW-1:0] addr_q;
  logic [AW:0]   left_q;
  logic [63:0]   data_q;
  logic          err_q;

  function automatic logic [13:0] ecc14(input logic [63:0] d);
    logic [13:0] e;
    e = '0;
    for (int i = 0; i < 64; i++) e[i % 14] ^= d[i];
    return e;
  endfunction

  assign cmd_ready_o  = (st_q == S_IDLE);
  assign tx_ready_o   = (st_q == S_WLO) || (st_q == S_WHI);
  assign rx_valid_o   = (st_q == S_RLO) || (st_q == S_RHI);
  assign rx_data_o    = (st_q == S_RHI) ? data_q[63:32] : data_q[31:0];
  assign done_valid_o = (st_q == S_DONE);
  assign done_err_o   = err_q;
  assign m_cs_o       = ((st_q == S_WISSUE) || (st_q == S_RISSUE)) && !m_busy_i;
  assign m_we_o       = (st_q == S_WISSUE);
  assign m_addr_o     = addr_q;
  assign m_wdata_o    = {ecc14(data_q), data_q};

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      st_q <= S_IDLE; addr_q <= '0; left_q <= '0; data_q <= '0; err_q <= 1'b0;
    end else begin
      unique case (st_q)
        S_IDLE: if (cmd_valid_i) begin
          addr_q <= cmd_addr_i;
          left_q <= cmd_len_i;
          err_q  <= 1'b0;
          if (cmd_len_i == 0) st_q <= S_DONE;
          else st_q <= cmd_we_i ? S_WLO : S_RISSUE;
        end
        S_WLO: if (tx_valid_i) begin data_q[31:0]  <= tx_data_i; st_q <= S_WHI; end
        S_WHI: if (tx_valid_i) begin data_q[63:32] <= tx_data_i; st_q <= S_WISSUE; end
        S_WISSUE: if (!m_busy_i) begin
          addr_q <= addr_q + 1'b1;
          left_q <= left_q - 1'b1;
          st_q   <= (left_q == 1) ? S_DONE : S_WLO;
        end
        S_RISSUE: if (!m_busy_i) st_q <= S_RWAIT;
        S_RWAIT: if (m_rvalid_i) begin
          data_q <= m_rdata_i[63:0];
          if (ecc14(m_rdata_i[63:0]) != m_rdata_i[77:64]) err_q <= 1'b1;
          st_q <= S_RLO;
        end
        S_RLO: if (rx_ready_i) st_q <= S_RHI;
        S_RHI: if (rx_ready_i) begin
          addr_q <= addr_q + 1'b1;
          left_q <= left_q - 1'b1;
          st_q   <= (left_q == 1) ? S_DONE : S_RISSUE;
        end
        S_DONE: if (done_ready_i) st_q <= S_IDLE;
        default: st_q <= S_IDLE;
      endcase
    end
  end
endmodule
