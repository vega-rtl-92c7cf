// hypnos: hyperdimensional-computing (HDC) accelerator of the cognitive
// wake-up unit. Preprocessed sensor samples are encoded into 512-bit HD
// vectors by the vector encoder, under control of the micro-coded
// controller, and classified by an associative lookup in the associative
// memory (AM): the AM row with the smallest Hamming distance to the search
// vector is the class. When it is the target class and close enough the
// controller raises irq_o, the wake-up request to the power manager.
// The whole algorithm (mapping, binding, bundling, lookup, interrupt rule)
// is software-defined by the micro-code, so training (storing prototypes) and
// inference run without a core once configured.
// Configuration port (byte offsets):
//   0x0000-0x00FC  micro-code word i at 4*i (bits 25:0)
//   0x0100         CTRL: [0] enable, [8:4] input width D
//   0x0104         RESULT (read): [5:0] best row, [25:16] its distance
//   0x1000-0x1FFF  AM: row r, 32-bit word w at 0x1000 + 64*r + 4*w
// Only 512-bit HD vectors are supported; the paper's 1024 to 2048-bit modes
// (several 512-bit rows per vector) are not built.
module hypnos
  import vega_pkg::*;
#(
  parameter int unsigned W = 512
) (
  input  logic        clk_i,
  input  logic        rst_ni,
  input  mem_req_t    cfg_req_i,
  output mem_rsp_t    cfg_rsp_o,
  input  logic        s_valid_i,
  output logic        s_ready_o,
  input  logic [15:0] s_data_i,
  output logic        irq_o
);
  localparam int unsigned ROWS = 64;
  localparam int unsigned AW = 6;
  localparam int unsigned DW = $clog2(W + 1);

  logic        en_q;
  logic [4:0]  dwidth_q;
  logic        rvalid_q;
  logic [31:0] rdata_q;
  logic        is_am, is_ctrl, cfg_we;
  logic [AW-1:0] cfg_row;
  logic [3:0]  cfg_word;

  assign is_am    = cfg_req_i.addr[12];
  assign is_ctrl  = !cfg_req_i.addr[12] && cfg_req_i.addr[8];
  assign cfg_we   = cfg_req_i.req && cfg_req_i.we;
  assign cfg_row  = cfg_req_i.addr[11:6];
  assign cfg_word = cfg_req_i.addr[5:2];
  assign cfg_rsp_o.gnt    = cfg_req_i.req;
  assign cfg_rsp_o.rvalid = rvalid_q;
  assign cfg_rsp_o.rdata  = rdata_q;

  // controller <-> encoder <-> AM
  logic            ve_op, ve_bundle, ve_bclear, ve_bout, ve_map, ve_busy;
  logic [1:0]      ve_src, ve_comb;
  logic [6:0]      ve_flip;
  logic [2:0]      ve_perm;
  logic [15:0]     ve_sample;
  logic [W-1:0]    ve_reg, am_rdata, am_wdata;
  logic            c_am_we, am_we, am_search, am_busy, am_done;
  logic [AW-1:0]   c_am_waddr, c_am_raddr, am_waddr, am_raddr, am_first, am_last, am_srow, am_best;
  logic [DW-1:0]   am_dist;
  logic [5:0]      pc;

  hdc_ctrl #(.AW(AW), .DW(DW)) i_ctrl (
    .clk_i, .rst_ni, .en_i(en_q), .dwidth_i(dwidth_q),
    .uc_we_i(cfg_we && !is_am && !cfg_req_i.addr[8]), .uc_waddr_i(cfg_req_i.addr[7:2]),
    .uc_wdata_i(cfg_req_i.wdata[25:0]),
    .s_valid_i, .s_ready_o, .s_data_i,
    .ve_op_o(ve_op), .ve_src_o(ve_src), .ve_flip_o(ve_flip), .ve_perm_o(ve_perm), .ve_comb_o(ve_comb),
    .ve_bundle_o(ve_bundle), .ve_bclear_o(ve_bclear), .ve_bout_o(ve_bout), .ve_map_o(ve_map),
    .ve_sample_o(ve_sample), .ve_busy_i(ve_busy),
    .am_we_o(c_am_we), .am_waddr_o(c_am_waddr), .am_raddr_o(c_am_raddr), .am_search_o(am_search),
    .am_first_o(am_first), .am_last_o(am_last), .am_srow_o(am_srow), .am_busy_i(am_busy),
    .am_best_i(am_best), .am_dist_i(am_dist), .irq_o, .pc_o(pc));

  hdc_vector_encoder #(.W(W)) i_enc (
    .clk_i, .rst_ni, .op_valid_i(ve_op), .src_i(ve_src), .flip_i(ve_flip), .perm_i(ve_perm),
    .comb_i(ve_comb), .am_rdata_i(am_rdata), .bundle_i(ve_bundle), .bclear_i(ve_bclear),
    .bout_i(ve_bout), .map_i(ve_map), .sample_i(ve_sample), .dwidth_i(dwidth_q),
    .busy_o(ve_busy), .reg_o(ve_reg));

  // the configuration port has priority on the AM ports
  always_comb begin
    am_raddr = (cfg_req_i.req && is_am) ? cfg_row : c_am_raddr;
    am_we    = c_am_we || (cfg_we && is_am);
    am_waddr = (cfg_we && is_am) ? cfg_row : c_am_waddr;
    am_wdata = ve_reg;
    if (cfg_we && is_am) begin
      am_wdata = am_rdata;
      am_wdata[32*cfg_word +: 32] = cfg_req_i.wdata;
    end
  end

  hdc_am #(.ROWS(ROWS), .W(W)) i_am (
    .clk_i, .rst_ni, .we_i(am_we), .waddr_i(am_waddr), .wdata_i(am_wdata),
    .raddr_i(am_raddr), .rdata_o(am_rdata), .search_i(am_search), .first_i(am_first),
    .last_i(am_last), .srow_i(am_srow), .busy_o(am_busy), .done_o(am_done),
    .best_idx_o(am_best), .best_dist_o(am_dist));

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      en_q <= 1'b0; dwidth_q <= 5'd16; rvalid_q <= 1'b0; rdata_q <= '0;
    end else begin
      rvalid_q <= cfg_req_i.req;
      if (cfg_we && is_ctrl && !cfg_req_i.addr[2]) begin
        en_q     <= cfg_req_i.wdata[0];
        dwidth_q <= cfg_req_i.wdata[8:4];
      end
      if (cfg_req_i.req && !cfg_req_i.we) begin
        if (is_am)                           rdata_q <= am_rdata[32*cfg_word +: 32];
        else if (is_ctrl && cfg_req_i.addr[2]) rdata_q <= {6'd0, 10'(am_dist), 10'd0, am_best};
        else if (is_ctrl)                    rdata_q <= {23'd0, dwidth_q, 3'd0, en_q};
        else                                 rdata_q <= {26'd0, pc};
      end
    end
  end
endmodule
