// stream_ld_unit: load/store unit converting between the memory protocol and
// a valid/ready word stream, as the HWCE's load/store units and the DMA
// engines do. After start_i it covers len_i consecutive 32-bit words from
// base_i (byte address). In load mode (load_i = 1) it issues read requests
// as long as the DEPTH-entry buffer has room for every response still in
// flight, and streams the words out in order; memory stalls only create
// bubbles in the stream. In store mode every stream word becomes a write
// request and the stream is stalled while the grant is missing. done_o pulses
// when the last word was delivered (load) or acknowledged (store). Linear
// addressing only: strided patterns are not built.
module stream_ld_unit
  import vega_pkg::*;
#(
  parameter int unsigned DEPTH = 4,
  localparam int unsigned DW = $clog2(DEPTH)
) (
  input  logic        clk_i,
  input  logic        rst_ni,
  input  logic        start_i,
  input  logic        load_i,
  input  logic [31:0] base_i,
  input  logic [19:0] len_i,
  output logic        busy_o,
  output logic        done_o,
  output mem_req_t    mem_req_o,
  input  mem_rsp_t    mem_rsp_i,
  // load: stream out
  output logic        out_valid_o,
  input  logic        out_ready_i,
  output logic [31:0] out_data_o,
  // store: stream in
  input  logic        in_valid_i,
  output logic        in_ready_o,
  input  logic [31:0] in_data_i
);
  logic        busy_q, load_q;
  logic [31:0] addr_q;
  logic [19:0] issue_q, ack_q;  // words still to issue / still to finish
  logic [31:0] buf_q [DEPTH];
  logic [DW:0] wp_q, rp_q;
  logic [DW:0] infl_q;          // read requests granted but not answered
  logic        can_issue;

  assign can_issue = busy_q && issue_q != 0 &&
                     (load_q ? ((wp_q - rp_q) + infl_q < (DW+1)'(DEPTH)) : in_valid_i);

  assign mem_req_o.req   = can_issue;
  assign mem_req_o.we    = !load_q;
  assign mem_req_o.be    = 4'hF;
  assign mem_req_o.addr  = addr_q;
  assign mem_req_o.wdata = in_data_i;
  assign in_ready_o      = busy_q && !load_q && issue_q != 0 && mem_rsp_i.gnt;

  assign out_valid_o = (wp_q != rp_q);
  assign out_data_o  = buf_q[rp_q[DW-1:0]];
  assign busy_o      = busy_q;

  logic fire, deliver, ack;
  assign fire    = mem_req_o.req && mem_rsp_i.gnt;
  assign deliver = out_valid_o && out_ready_i;
  assign ack     = load_q ? deliver : mem_rsp_i.rvalid;
  assign done_o  = busy_q && ack && ack_q == 1;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      busy_q <= 1'b0; load_q <= 1'b0; addr_q <= '0; issue_q <= '0; ack_q <= '0;
      wp_q <= '0; rp_q <= '0; infl_q <= '0;
    end else begin
      if (!busy_q && start_i && len_i != 0) begin
        busy_q  <= 1'b1;
        load_q  <= load_i;
        addr_q  <= base_i;
        issue_q <= len_i;
        ack_q   <= len_i;
      end else if (busy_q) begin
        if (fire) begin
          addr_q  <= addr_q + 32'd4;
          issue_q <= issue_q - 1'b1;
        end
        if (ack) begin
          ack_q <= ack_q - 1'b1;
          if (ack_q == 1) busy_q <= 1'b0;
        end
      end
      // response buffer (load mode)
      infl_q <= infl_q + (DW+1)'(fire && load_q) - (DW+1)'(mem_rsp_i.rvalid && load_q);
      if (mem_rsp_i.rvalid && load_q) begin
        buf_q[wp_q[DW-1:0]] <= mem_rsp_i.rdata;
        wp_q <= wp_q + 1'b1;
      end
      if (deliver) rp_q <= rp_q + 1'b1;
    end
  end
endmodule
