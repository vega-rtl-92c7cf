// hwce: Hardware Convolution Engine, the cluster's 3x3 convolution
// accelerator (27 MACs). A job convolves one input channel of H x W pixels
// with up to three 3x3 filters ("valid" convolution, (H-2) x (W-2) outputs per
// filter):
//   y_f[i][j] = norm( yin_f[i][j] + sum_{r,c} x[i+r][j+c] * w_f[3r+c] )
// where yin is an optional stream of partial results from previous input
// channels and norm is an arithmetic right shift by SHIFT followed by
// saturation to the output element width.
// Dataflow (paper's Fig. 4): four load/store units on four TCDM ports
// (0: W, 1: X, 2: Y_IN, 3: Y_OUT) turn memory traffic into valid/ready
// streams, so memory contention only inserts bubbles. Width converters
// expand 16/8/4/2-bit weights and 16/8/4-bit data to 16 bits; the weights of
// the job are kept in a weight buffer, the pixels go through a line buffer
// that forms one 3x3 window per pixel, and three hwce_sop units (one per
// filter) produce up to three outputs per cycle, which are packed back to
// 16/8/4/2 bits and stored. Memory layout (own choice): weights f*9 + 3r + c;
// pixels raster order; y_in and y_out pixel-major with the NF filter values
// of one output pixel adjacent; all tightly packed, low bits first.
// Register shadowing: registers written by software form the next job, and
// writing TRIGGER copies them into a two-entry job queue, so the next job can
// be offloaded while one runs. evt_o pulses at the end of each job.
// Registers (byte offsets): 0x00 TRIGGER (write), 0x04 STATUS (read:
// [0] running, [1] job queued, [31:16] jobs done), 0x08 W_ADDR, 0x0C X_ADDR,
// 0x10 YIN_ADDR, 0x14 YOUT_ADDR, 0x18 WIDTH, 0x1C HEIGHT, 0x20 CFG:
// [1:0] NF (1..3), [2] YIN_EN, [7:4] SHIFT, [9:8] W prec, [11:10] X prec,
// [13:12] Y prec (0=16, 1=8, 2=4, 3=2 bits).
// Not built: the 5x5 mode, the internal partial-sum buffers and clock gating.
module hwce
  import vega_pkg::*;
#(
  parameter int unsigned MAX_W = 128,
  localparam int unsigned CW = $clog2(MAX_W + 1)
) (
  input  logic               clk_i,
  input  logic               rst_ni,
  input  mem_req_t           cfg_req_i,
  output mem_rsp_t           cfg_rsp_o,
  output mem_req_t [3:0]     tcdm_req_o,
  input  mem_rsp_t [3:0]     tcdm_rsp_i,
  output logic               evt_o,
  output logic               busy_o
);
  typedef struct packed {
    logic [31:0] waddr, xaddr, yiaddr, yoaddr;
    logic [15:0] width, height;
    logic [1:0]  nf;
    logic        yin_en;
    logic [3:0]  shift;
    logic [1:0]  qw, qx, qy;
  } job_t;

  job_t stage_q, next_q, cur_q;
  logic next_v_q;
  logic [15:0] ndone_q;
  logic rvalid_q;
  logic [31:0] rdata_q;
  logic trig;

  typedef enum logic [2:0] {S_IDLE, S_START, S_W, S_XSTART, S_RUN, S_FLUSH} st_e;
  st_e st_q;

  // ---------------- register file with shadowing ----------------
  assign trig = cfg_req_i.req && cfg_req_i.we && cfg_req_i.addr[5:2] == 4'd0;
  assign cfg_rsp_o.gnt    = cfg_req_i.req && !(trig && next_v_q);
  assign cfg_rsp_o.rvalid = rvalid_q;
  assign cfg_rsp_o.rdata  = rdata_q;
  logic take_job;
  assign take_job = (st_q == S_IDLE) && next_v_q;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      stage_q <= '0; next_q <= '0; next_v_q <= 1'b0; rvalid_q <= 1'b0; rdata_q <= '0;
    end else begin
      rvalid_q <= cfg_rsp_o.gnt;
      if (take_job) next_v_q <= 1'b0;
      if (cfg_rsp_o.gnt && cfg_req_i.we) begin
        unique case (cfg_req_i.addr[5:2])
          4'd0: begin next_q <= stage_q; next_v_q <= 1'b1; end
          4'd2: stage_q.waddr  <= cfg_req_i.wdata;
          4'd3: stage_q.xaddr  <= cfg_req_i.wdata;
          4'd4: stage_q.yiaddr <= cfg_req_i.wdata;
          4'd5: stage_q.yoaddr <= cfg_req_i.wdata;
          4'd6: stage_q.width  <= cfg_req_i.wdata[15:0];
          4'd7: stage_q.height <= cfg_req_i.wdata[15:0];
          4'd8: begin
            stage_q.nf     <= cfg_req_i.wdata[1:0];
            stage_q.yin_en <= cfg_req_i.wdata[2];
            stage_q.shift  <= cfg_req_i.wdata[7:4];
            stage_q.qw     <= cfg_req_i.wdata[9:8];
            stage_q.qx     <= cfg_req_i.wdata[11:10];
            stage_q.qy     <= cfg_req_i.wdata[13:12];
          end
          default: ;
        endcase
      end else if (cfg_rsp_o.gnt) begin
        rdata_q <= (cfg_req_i.addr[5:2] == 4'd1) ? {ndone_q, 14'd0, next_v_q, (st_q != S_IDLE)} : 32'd0;
      end
    end
  end

  // ---------------- job sizes ----------------
  logic [4:0]  bw, bx, by;
  logic [31:0] n_w, nw_words, n_x, nx_words, n_out, n_y, ny_words;
  always_comb begin
    bw = 5'd16 >> cur_q.qw;
    bx = 5'd16 >> cur_q.qx;
    by = 5'd16 >> cur_q.qy;
    n_w      = 32'(cur_q.nf) * 9;
    nw_words = (n_w * 32'(bw) + 31) / 32;
    n_x      = 32'(cur_q.width) * 32'(cur_q.height);
    nx_words = (n_x * 32'(bx) + 31) / 32;
    n_out    = (32'(cur_q.width) - 2) * (32'(cur_q.height) - 2);
    n_y      = n_out * 32'(cur_q.nf);
    ny_words = (n_y * 32'(by) + 31) / 32;
  end

  // ---------------- load/store units ----------------
  logic start_w, start_x;
  logic [3:0]  u_busy, u_done;
  logic        w_v, w_r, x_v, x_r, yi_v, yi_r, yo_v, yo_r;
  logic [31:0] w_d, x_d, yi_d, yo_d;
  logic [3:0]  unused_ir, unused_ov;
  logic [31:0] unused_od;

  assign start_w = (st_q == S_START);
  assign start_x = (st_q == S_XSTART);

  stream_ld_unit i_ld_w (.clk_i, .rst_ni, .start_i(start_w), .load_i(1'b1), .base_i(cur_q.waddr),
    .len_i(nw_words[19:0]), .busy_o(u_busy[0]), .done_o(u_done[0]), .mem_req_o(tcdm_req_o[0]), .mem_rsp_i(tcdm_rsp_i[0]),
    .out_valid_o(w_v), .out_ready_i(w_r), .out_data_o(w_d), .in_valid_i(1'b0), .in_ready_o(unused_ir[0]), .in_data_i(32'd0));
  stream_ld_unit i_ld_x (.clk_i, .rst_ni, .start_i(start_x), .load_i(1'b1), .base_i(cur_q.xaddr),
    .len_i(nx_words[19:0]), .busy_o(u_busy[1]), .done_o(u_done[1]), .mem_req_o(tcdm_req_o[1]), .mem_rsp_i(tcdm_rsp_i[1]),
    .out_valid_o(x_v), .out_ready_i(x_r), .out_data_o(x_d), .in_valid_i(1'b0), .in_ready_o(unused_ir[1]), .in_data_i(32'd0));
  stream_ld_unit i_ld_yin (.clk_i, .rst_ni, .start_i(start_x && cur_q.yin_en), .load_i(1'b1), .base_i(cur_q.yiaddr),
    .len_i(ny_words[19:0]), .busy_o(u_busy[2]), .done_o(u_done[2]), .mem_req_o(tcdm_req_o[2]), .mem_rsp_i(tcdm_rsp_i[2]),
    .out_valid_o(yi_v), .out_ready_i(yi_r), .out_data_o(yi_d), .in_valid_i(1'b0), .in_ready_o(unused_ir[2]), .in_data_i(32'd0));
  stream_ld_unit i_st_yout (.clk_i, .rst_ni, .start_i(start_x), .load_i(1'b0), .base_i(cur_q.yoaddr),
    .len_i(ny_words[19:0]), .busy_o(u_busy[3]), .done_o(u_done[3]), .mem_req_o(tcdm_req_o[3]), .mem_rsp_i(tcdm_rsp_i[3]),
    .out_valid_o(unused_ov[0]), .out_ready_i(1'b0), .out_data_o(unused_od), .in_valid_i(yo_v), .in_ready_o(yo_r), .in_data_i(yo_d));
  assign unused_ov[3:1] = '0;
  assign unused_ir[3]   = 1'b0;

  // ---------------- width converters ----------------
  logic flush;
  assign flush = (st_q == S_START);
  logic [0:0][15:0] w_e, x_e;
  logic [2:0][15:0] yi_e;
  logic [2:0] w_av, x_av, yi_av, w_take, x_take, yi_take;

  hwce_unpack #(.K(1)) i_unp_w (.clk_i, .rst_ni, .flush_i(flush), .prec_i(cur_q.qw),
    .in_valid_i(w_v), .in_ready_o(w_r), .in_data_i(w_d), .elem_o(w_e), .avail_o(w_av), .take_i(w_take));
  hwce_unpack #(.K(1)) i_unp_x (.clk_i, .rst_ni, .flush_i(flush), .prec_i(cur_q.qx),
    .in_valid_i(x_v), .in_ready_o(x_r), .in_data_i(x_d), .elem_o(x_e), .avail_o(x_av), .take_i(x_take));
  hwce_unpack #(.K(3)) i_unp_yi (.clk_i, .rst_ni, .flush_i(flush), .prec_i(cur_q.qy),
    .in_valid_i(yi_v), .in_ready_o(yi_r), .in_data_i(yi_d), .elem_o(yi_e), .avail_o(yi_av), .take_i(yi_take));

  // ---------------- weight buffer ----------------
  logic [2:0][8:0][15:0] wbuf_q;
  logic [4:0] widx_q;
  assign w_take = (st_q == S_W && w_av != 0) ? 3'd1 : 3'd0;

  // ---------------- line buffer ----------------
  logic [31:0] xcnt_q;
  logic lb_in_r, lb_out_v, fire;
  logic [8:0][15:0] win;
  assign x_take = (st_q == S_RUN && x_av != 0 && lb_in_r && xcnt_q < n_x) ? 3'd1 : 3'd0;

  hwce_linebuf #(.MAX_W(MAX_W)) i_lb (.clk_i, .rst_ni, .start_i(start_x), .width_i(CW'(cur_q.width)),
    .in_valid_i(x_take[0]), .in_ready_o(lb_in_r), .in_data_i(x_e[0]),
    .out_valid_o(lb_out_v), .out_ready_i(fire), .win_o(win));

  // ---------------- sum of products, normalisation ----------------
  logic [2:0][31:0] acc;
  logic [2:0][15:0] yo_e;
  logic             pk_in_r, pk_empty;
  logic [31:0]      ocnt_q;

  for (genvar f = 0; f < 3; f++) begin : g_sop
    logic signed [31:0] yin32, sh;
    assign yin32 = cur_q.yin_en ? 32'(signed'(yi_e[f])) : 32'sd0;
    hwce_sop i_sop (.x_i(win), .w_i(wbuf_q[f]), .yin_i(yin32), .y_o(acc[f]));
    always_comb begin
      logic signed [31:0] hi, lo;
      sh = signed'(acc[f]) >>> cur_q.shift;
      hi = (32'sd1 <<< (by - 1)) - 1;
      lo = -(32'sd1 <<< (by - 1));
      if (sh > hi)      yo_e[f] = 16'(hi);
      else if (sh < lo) yo_e[f] = 16'(lo);
      else              yo_e[f] = 16'(sh);
    end
  end

  assign fire = (st_q == S_RUN) && lb_out_v && pk_in_r &&
                (!cur_q.yin_en || yi_av >= 3'(cur_q.nf));
  assign yi_take = (fire && cur_q.yin_en) ? 3'(cur_q.nf) : 3'd0;

  hwce_pack #(.K(3)) i_pack (.clk_i, .rst_ni, .flush_i(st_q == S_FLUSH), .prec_i(cur_q.qy),
    .elem_i(yo_e), .n_i(fire ? 3'(cur_q.nf) : 3'd0), .in_ready_o(pk_in_r),
    .out_valid_o(yo_v), .out_ready_i(yo_r), .out_data_o(yo_d), .empty_o(pk_empty));

  // ---------------- control ----------------
  assign busy_o = (st_q != S_IDLE);
  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      st_q <= S_IDLE; cur_q <= '0; wbuf_q <= '0; widx_q <= '0; xcnt_q <= '0; ocnt_q <= '0;
      ndone_q <= '0; evt_o <= 1'b0;
    end else begin
      evt_o <= 1'b0;
      unique case (st_q)
        S_IDLE: if (next_v_q) begin cur_q <= next_q; st_q <= S_START; end
        S_START: begin widx_q <= '0; st_q <= S_W; end
        S_W: if (w_take != 0) begin
          wbuf_q[widx_q / 9][widx_q % 9] <= w_e[0];
          widx_q <= widx_q + 1'b1;
          if (32'(widx_q) == n_w - 1) st_q <= S_XSTART;
        end
        S_XSTART: begin xcnt_q <= '0; ocnt_q <= '0; st_q <= S_RUN; end
        S_RUN: begin
          if (x_take != 0) xcnt_q <= xcnt_q + 1;
          if (fire) begin
            ocnt_q <= ocnt_q + 1;
            if (ocnt_q == n_out - 1) st_q <= S_FLUSH;
          end
        end
        S_FLUSH: if (pk_empty && !u_busy[3] && !u_busy[0] && !u_busy[1] && !u_busy[2]) begin
          st_q <= S_IDLE; evt_o <= 1'b1; ndone_q <= ndone_q + 1'b1;
        end
        default: st_q <= S_IDLE;
      endcase
    end
  end
endmodule
