// dc_fifo: dual-clock FIFO for crossing between independent clock domains
// (SoC <-> cluster, SoC <-> MRAM). Write and read pointers are kept in Gray
// code and passed to the other side through two-flop synchronisers, so only
// one bit changes per step. Full and empty are therefore pessimistic by the
// synchroniser delay. Both sides use valid/ready: a word moves when valid
// and ready are high at a rising edge of that side's clock. The paper shows
// dual-clock FIFOs but not their insides; the Gray-pointer scheme is this
// design's choice. DEPTH must be a power of two.
module dc_fifo #(
  parameter int unsigned WIDTH = 32,
  parameter int unsigned DEPTH = 8,
  localparam int unsigned AW = $clog2(DEPTH)
) (
  input  logic             wclk_i,
  input  logic             wrst_ni,
  input  logic             wvalid_i,
  output logic             wready_o,
  input  logic [WIDTH-1:0] wdata_i,
  input  logic             rclk_i,
  input  logic             rrst_ni,
  output logic             rvalid_o,
  input  logic             rready_i,
  output logic [WIDTH-1:0] rdata_o
);
  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW:0] wbin_q, wgray_q, rbin_q, rgray_q;
  logic [AW:0] rgray_w1, rgray_w2, wgray_r1, wgray_r2;

  function automatic logic [AW:0] b2g(input logic [AW:0] b);
    return b ^ (b >> 1);
  endfunction

  // write side
  logic [AW:0] wbin_n;
  assign wready_o = (wgray_q != {~rgray_w2[AW:AW-1], rgray_w2[AW-2:0]});
  assign wbin_n   = wbin_q + (AW+1)'(wvalid_i && wready_o);
  always_ff @(posedge wclk_i or negedge wrst_ni) begin
    if (!wrst_ni) begin
      wbin_q <= '0; wgray_q <= '0; rgray_w1 <= '0; rgray_w2 <= '0;
    end else begin
      wbin_q   <= wbin_n;
      wgray_q  <= b2g(wbin_n);
      rgray_w1 <= rgray_q;
      rgray_w2 <= rgray_w1;
    end
  end
  always_ff @(posedge wclk_i)
    if (wvalid_i && wready_o) mem[wbin_q[AW-1:0]] <= wdata_i;

  // read side
  logic [AW:0] rbin_n;
  assign rvalid_o = (rgray_q != wgray_r2);
  assign rdata_o  = mem[rbin_q[AW-1:0]];
  assign rbin_n   = rbin_q + (AW+1)'(rvalid_o && rready_i);
  always_ff @(posedge rclk_i or negedge rrst_ni) begin
    if (!rrst_ni) begin
      rbin_q <= '0; rgray_q <= '0; wgray_r1 <= '0; wgray_r2 <= '0;
    end else begin
      rbin_q   <= rbin_n;
      rgray_q  <= b2g(rbin_n);
      wgray_r1 <= wgray_q;
      wgray_r2 <= wgray_r1;
    end
  end
endmodule
