// sram_bank: single-port SRAM bank, one 32-bit word per address, byte
// write enables, read data one cycle after the request.
// It stands for one SRAM cut of the L2 (four interleaved banks and two FC
// private banks) or of the cluster L1 (sixteen 8 kB cuts). The cut itself is
// a foundry macro; here it is an array, which simulators and synthesis treat
// as a memory. The content is not reset. rdata_o holds the last read word.
module sram_bank #(
  parameter int unsigned WORDS = 4096,
  localparam int unsigned AW   = (WORDS > 1) ? $clog2(WORDS) : 1
) (
  input  logic          clk_i,
  input  logic          req_i,
  input  logic          we_i,
  input  logic [3:0]    be_i,
  input  logic [AW-1:0] addr_i,
  input  logic [31:0]   wdata_i,
  output logic [31:0]   rdata_o
);
  logic [31:0] mem [WORDS];

  always_ff @(posedge clk_i) begin
    if (req_i) begin
      if (we_i) begin
        for (int b = 0; b < 4; b++)
          if (be_i[b]) mem[addr_i][8*b +: 8] <= wdata_i[8*b +: 8];
      end else begin
        rdata_o <= mem[addr_i];
      end
    end
  end
endmodule
