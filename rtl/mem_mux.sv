// mem_mux: merges N_IN memory masters onto one master port. A round-robin
// arbiter picks one requesting input per cycle and forwards its request; the
// index of every granted request is pushed into a small FIFO so that each
// in-order response is returned to the input that issued it. At most DEPTH
// requests may be outstanding. Used inside the I/O DMA and the HWCE, where
// several load/store units share a port. This block is this design's own
// helper; the paper does not describe how the units share their ports.
module mem_mux
  import vega_pkg::*;
#(
  parameter int unsigned N_IN  = 2,
  parameter int unsigned DEPTH = 4,
  localparam int unsigned IW = (N_IN > 1) ? $clog2(N_IN) : 1,
  localparam int unsigned DW = $clog2(DEPTH)
) (
  input  logic                 clk_i,
  input  logic                 rst_ni,
  input  mem_req_t [N_IN-1:0]  in_req_i,
  output mem_rsp_t [N_IN-1:0]  in_rsp_o,
  output mem_req_t             out_req_o,
  input  mem_rsp_t             out_rsp_i
);
  logic [IW-1:0] ptr_q, win;
  logic          any;
  logic [IW-1:0] idq [DEPTH];
  logic [DW:0]   wp_q, rp_q;
  logic          full;

  assign full = (wp_q - rp_q) == (DW+1)'(DEPTH);

  always_comb begin
    any = 1'b0;
    win = '0;
    for (int k = 0; k < N_IN; k++) begin
      int unsigned i;
      i = (int'(ptr_q) + k) % N_IN;
      if (!any && in_req_i[i].req) begin
        any = 1'b1;
        win = IW'(i);
      end
    end
    out_req_o     = in_req_i[win];
    out_req_o.req = any && !full;
    for (int i = 0; i < N_IN; i++) begin
      in_rsp_o[i].gnt    = any && !full && (win == IW'(i)) && out_rsp_i.gnt;
      in_rsp_o[i].rvalid = out_rsp_i.rvalid && (idq[rp_q[DW-1:0]] == IW'(i));
      in_rsp_o[i].rdata  = out_rsp_i.rdata;
    end
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      ptr_q <= '0; wp_q <= '0; rp_q <= '0;
    end else begin
      if (out_req_o.req && out_rsp_i.gnt) begin
        idq[wp_q[DW-1:0]] <= win;
        wp_q  <= wp_q + 1'b1;
        ptr_q <= IW'((int'(win) + 1) % N_IN);
      end
      if (out_rsp_i.rvalid) rp_q <= rp_q + 1'b1;
    end
  end

  a_no_spurious_rsp: assert property (@(posedge clk_i) disable iff (!rst_ni)
    out_rsp_i.rvalid |-> (wp_q != rp_q));
endmodule
