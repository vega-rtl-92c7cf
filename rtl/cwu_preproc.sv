// cwu_preproc: low-power preprocessor of the cognitive wake-up unit, with
// one state per channel for up to eight channels. A sample enters with its
// channel number and passes, as configured for that channel:
//   width conversion  x = sample >>> SHIFT (barrel shifter)
//   offset removal    x - m, m an exponential moving average with decay
//                     2^-K_HP (a high-pass filter)
//   low-pass filter   y = EMA of x with decay 2^-K_LP
//   LBP               8-bit local binary pattern: the last eight signs of
//                     x[t] > x[t-1] (replaces the value when enabled)
//   subsampling       only every (SUB+1)-th result of the channel leaves
// Disabled channels are dropped (channel select). An EMA keeps 8 fraction
// bits: s += ((x << 8) - s) >>> K, output s >>> 8. One sample per cycle,
// one cycle latency; the output stream has no back-pressure into the filter
// state, so the input is stalled while the output is stalled.
// Per-channel config register at 4*c: [3:0] SHIFT, [7:4] K_HP, [11:8] K_LP,
// [12] HP enable, [13] LP enable, [14] LBP enable, [23:16] SUB,
// [24] channel enable. The filter kinds and their order are the paper's;
// the equations, widths and LBP definition are this design's choices.
module cwu_preproc
  import vega_pkg::*;
#(
  parameter int unsigned N_CH = 8,
  localparam int unsigned CHW = $clog2(N_CH)
) (
  input  logic           clk_i,
  input  logic           rst_ni,
  input  mem_req_t       cfg_req_i,
  output mem_rsp_t       cfg_rsp_o,
  input  logic           in_valid_i,
  output logic           in_ready_o,
  input  logic [15:0]    in_data_i,
  input  logic [CHW-1:0] in_ch_i,
  output logic           out_valid_o,
  input  logic           out_ready_i,
  output logic [15:0]    out_data_o,
  output logic [CHW-1:0] out_ch_o
);
  logic [N_CH-1:0][24:0] cfg_q;
  logic [N_CH-1:0][23:0] hp_q, lp_q;   // EMA states, 8 fraction bits
  logic [N_CH-1:0][15:0] prev_q;
  logic [N_CH-1:0][7:0]  lbp_q, sub_q;
  logic                  rvalid_q;
  logic [31:0]           rdata_q;
  logic                  ov_q;
  logic [15:0]           od_q;
  logic [CHW-1:0]        oc_q;

  assign cfg_rsp_o.gnt    = cfg_req_i.req;
  assign cfg_rsp_o.rvalid = rvalid_q;
  assign cfg_rsp_o.rdata  = rdata_q;
  assign in_ready_o  = !ov_q || out_ready_i;
  assign out_valid_o = ov_q;
  assign out_data_o  = od_q;
  assign out_ch_o    = oc_q;

  logic [24:0] c;
  logic signed [15:0] x, hp_out, lp_out, v;
  logic signed [23:0] hp_n, lp_n;
  logic [7:0] lbp_n;
  logic emit;
  always_comb begin
    c      = cfg_q[in_ch_i];
    x      = signed'(in_data_i) >>> c[3:0];
    hp_n   = signed'(hp_q[in_ch_i]) + ((signed'({x, 8'd0}) - signed'(hp_q[in_ch_i])) >>> c[7:4]);
    hp_out = c[12] ? x - 16'(signed'(hp_q[in_ch_i]) >>> 8) : x;
    lp_n   = signed'(lp_q[in_ch_i]) + ((signed'({hp_out, 8'd0}) - signed'(lp_q[in_ch_i])) >>> c[11:8]);
    lp_out = c[13] ? 16'(lp_n >>> 8) : hp_out;
    lbp_n  = {lbp_q[in_ch_i][6:0], (lp_out > signed'(prev_q[in_ch_i]))};
    v      = c[14] ? 16'(lbp_n) : lp_out;
    emit   = c[24] && (sub_q[in_ch_i] == 8'd0);
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      cfg_q <= '0; hp_q <= '0; lp_q <= '0; prev_q <= '0; lbp_q <= '0; sub_q <= '0;
      rvalid_q <= 1'b0; rdata_q <= '0; ov_q <= 1'b0; od_q <= '0; oc_q <= '0;
    end else begin
      rvalid_q <= cfg_req_i.req;
      if (cfg_req_i.req && cfg_req_i.we) cfg_q[cfg_req_i.addr[2 +: CHW]] <= cfg_req_i.wdata[24:0];
      if (cfg_req_i.req && !cfg_req_i.we) rdata_q <= 32'(cfg_q[cfg_req_i.addr[2 +: CHW]]);
      if (ov_q && out_ready_i) ov_q <= 1'b0;
      if (in_valid_i && in_ready_o) begin
        hp_q[in_ch_i]   <= hp_n;
        lp_q[in_ch_i]   <= lp_n;
        prev_q[in_ch_i] <= lp_out;
        lbp_q[in_ch_i]  <= lbp_n;
        sub_q[in_ch_i]  <= (sub_q[in_ch_i] == 8'd0) ? c[23:16] : sub_q[in_ch_i] - 1'b1;
        if (emit) begin
          ov_q <= 1'b1;
          od_q <= v;
          oc_q <= in_ch_i;
        end
      end
    end
  end
endmodule
