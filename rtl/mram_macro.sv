// mram_macro: behavioural model of the 4 MB non-volatile MRAM macro with its
// 78-bit word interface (64 data bits plus 14 ECC bits). It is not
// synthesizable logic: the real part is a process-specific magnetic memory.
// A read (cs_i, !we_i) returns rdata_o RD_LAT cycles later, flagged by
// rvalid_o; a write keeps busy_o high for WR_LAT cycles. No new access is
// accepted while busy_o is high. Content is not lost when the domain is
// powered off (pwr_on_i low): accesses are then ignored. The port list and
// latencies are assumptions; the paper gives the width and the 40 MHz read
// clock only.
module mram_macro #(
  parameter int unsigned WORDS  = 524288,
  parameter int unsigned RD_LAT = 2,
  parameter int unsigned WR_LAT = 8,
  localparam int unsigned AW = $clog2(WORDS)
) (
  input  logic          clk_i,
  input  logic          pwr_on_i,
  input  logic          cs_i,
  input  logic          we_i,
  input  logic [AW-1:0] addr_i,
  input  logic [77:0]   wdata_i,
  output logic [77:0]   rdata_o,
  output logic          rvalid_o,
  output logic          busy_o
);
  logic [77:0] mem [WORDS];
  int unsigned cnt;
  logic        rd_pend;
  logic [AW-1:0] a_q;

  initial begin
    rvalid_o = 1'b0;
    rdata_o  = '0;
    cnt      = 0;
    rd_pend  = 1'b0;
  end
  assign busy_o = (cnt != 0) || !pwr_on_i;

  always @(posedge clk_i) begin
    rvalid_o <= 1'b0;
    if (cnt != 0) begin
      cnt <= cnt - 1;
      if (cnt == 1 && rd_pend) begin
        rdata_o  <= mem[a_q];
        rvalid_o <= 1'b1;
        rd_pend  <= 1'b0;
      end
    end else if (pwr_on_i && cs_i) begin
      a_q <= addr_i;
      if (we_i) begin
        mem[addr_i] <= wdata_i;
        cnt <= WR_LAT;
      end else begin
        rd_pend <= 1'b1;
        cnt <= RD_LAT;
      end
    end
  end
endmodule
