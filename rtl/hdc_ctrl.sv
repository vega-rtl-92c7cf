// hdc_ctrl: micro-coded controller of Hypnos. It holds the HDC algorithm as
// up to 64 instructions of 26 bits and, once enabled, runs them in an
// endless loop, driving the vector encoder and the associative memory each
// cycle. A one-level hardware loop repeats a block of instructions. An
// interrupt (wake-up request) is raised when the last associative lookup
// found the target class within the distance threshold.
// Instruction format (bits 25:22 opcode; the encoding is this design's own,
// the operations follow the paper's micro-code example):
//   0 NOP
//   1 MAP    wait for an input sample, map it to an HD vector (IM) into the
//            encoder register; [21] also store it to AM row [19:14]
//   2 LD     reg <= comb(perm(flip(src))): [21:20] src (0 zero, 1 seed,
//            2 AM row [19:14], 3 reg), [13:11] perm, [10:4] flip count,
//            [3] flip count from the sample (CIM), [2:1] comb (0 pass,
//            1 bind/xor, 2 and, 3 not)
//   3 BUNDLE add reg into the bundling counters; [21] restart them first
//   4 BOUT   reg <= majority of the counters
//   5 ST     AM row [19:14] <= reg
//   6 LOOP   repeat the next [21:16] instructions [15:8] times
//   7 LOOKUP associative lookup of rows [19:14]..[13:8] against row [5:0]
//   8 INTR   interrupt if best row == [19:14] and distance < [13:4]
//   9 JMP    pc <= [5:0]
// Samples arrive on a valid/ready stream; MAP stalls until one is there and
// keeps it as the current sample. For CIM, the flip count is the top 7 bits
// of the sample's D-bit value.
module hdc_ctrl #(
  parameter int unsigned UC_DEPTH = 64,
  parameter int unsigned UC_W     = 26,
  parameter int unsigned AW       = 6,
  parameter int unsigned DW       = 10,
  localparam int unsigned PW = $clog2(UC_DEPTH)
) (
  input  logic            clk_i,
  input  logic            rst_ni,
  input  logic            en_i,
  input  logic [4:0]      dwidth_i,
  // micro-code write port
  input  logic            uc_we_i,
  input  logic [PW-1:0]   uc_waddr_i,
  input  logic [UC_W-1:0] uc_wdata_i,
  // input samples
  input  logic            s_valid_i,
  output logic            s_ready_o,
  input  logic [15:0]     s_data_i,
  // vector encoder
  output logic            ve_op_o,
  output logic [1:0]      ve_src_o,
  output logic [6:0]      ve_flip_o,
  output logic [2:0]      ve_perm_o,
  output logic [1:0]      ve_comb_o,
  output logic            ve_bundle_o,
  output logic            ve_bclear_o,
  output logic            ve_bout_o,
  output logic            ve_map_o,
  output logic [15:0]     ve_sample_o,
  input  logic            ve_busy_i,
  // associative memory
  output logic            am_we_o,
  output logic [AW-1:0]   am_waddr_o,
  output logic [AW-1:0]   am_raddr_o,
  output logic            am_search_o,
  output logic [AW-1:0]   am_first_o,
  output logic [AW-1:0]   am_last_o,
  output logic [AW-1:0]   am_srow_o,
  input  logic            am_busy_i,
  input  logic [AW-1:0]   am_best_i,
  input  logic [DW-1:0]   am_dist_i,
  output logic            irq_o,
  output logic [PW-1:0]   pc_o
);
  logic [UC_W-1:0] ucode [UC_DEPTH];
  logic [PW-1:0]   pc_q, lstart_q, lend_q;
  logic [7:0]      lcnt_q;
  logic            lact_q;
  logic [15:0]     sample_q;
  logic            wait_q;      // waiting for a multi-cycle unit to finish
  logic            store_q;     // MAP with store pending
  logic [AW-1:0]   saddr_q;
  logic [UC_W-1:0] ins;
  logic [3:0]      opc;
  logic            adv;         // instruction completes this cycle
  logic [6:0]      cim_flip;
  logic [15:0]     aligned;

  always_ff @(posedge clk_i)
    if (uc_we_i) ucode[uc_waddr_i] <= uc_wdata_i;

  assign ins      = ucode[pc_q];
  assign opc      = ins[25:22];
  assign pc_o     = pc_q;
  assign aligned  = sample_q << (5'd16 - dwidth_i);
  assign cim_flip = aligned[15:9];

  always_comb begin
    ve_op_o = 1'b0; ve_src_o = ins[21:20]; ve_flip_o = ins[3] ? cim_flip : ins[10:4];
    ve_perm_o = ins[13:11]; ve_comb_o = ins[2:1];
    ve_bundle_o = 1'b0; ve_bclear_o = 1'b0; ve_bout_o = 1'b0; ve_map_o = 1'b0;
    ve_sample_o = s_data_i;
    am_we_o = 1'b0; am_waddr_o = ins[19:14]; am_raddr_o = ins[19:14];
    am_search_o = 1'b0; am_first_o = ins[19:14]; am_last_o = ins[13:8]; am_srow_o = ins[5:0];
    s_ready_o = 1'b0;
    adv = 1'b0;
    if (store_q) begin
      if (!ve_busy_i) begin
        am_we_o    = 1'b1;
        am_waddr_o = saddr_q;
      end
    end else if (wait_q) begin
      adv = !ve_busy_i && !am_busy_i;
    end else if (en_i) begin
      unique case (opc)
        4'd1: begin s_ready_o = 1'b1; ve_map_o = s_valid_i; end
        4'd2: begin ve_op_o = 1'b1; adv = 1'b1; end
        4'd3: begin ve_bundle_o = 1'b1; ve_bclear_o = ins[21]; adv = 1'b1; end
        4'd4: begin ve_bout_o = 1'b1; adv = 1'b1; end
        4'd5: begin am_we_o = 1'b1; adv = 1'b1; end
        4'd7: am_search_o = 1'b1;
        default: adv = 1'b1;
      endcase
    end
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      pc_q <= '0; lstart_q <= '0; lend_q <= '0; lcnt_q <= '0; lact_q <= 1'b0;
      sample_q <= '0; wait_q <= 1'b0; store_q <= 1'b0; saddr_q <= '0; irq_o <= 1'b0;
    end else begin
      irq_o <= 1'b0;
      if (!en_i && !wait_q && !store_q) begin
        pc_q <= '0; lact_q <= 1'b0;
      end else begin
        if (!store_q && !wait_q && opc == 4'd1 && s_valid_i) begin
          sample_q <= s_data_i;
          wait_q   <= 1'b1;
          store_q  <= ins[21];
          saddr_q  <= ins[19:14];
        end
        if (!store_q && !wait_q && opc == 4'd7) wait_q <= 1'b1;
        if (store_q && !ve_busy_i) store_q <= 1'b0;
        if (adv) begin
          wait_q <= 1'b0;
          if (opc == 4'd8)
            irq_o <= (am_best_i == ins[19:14]) && (am_dist_i < ins[13:4]);
          if (opc == 4'd9) begin
            pc_q <= ins[5:0];
          end else if (opc == 4'd6) begin
            if (ins[15:8] != 0 && ins[21:16] != 0) begin
              lact_q   <= 1'b1;
              lcnt_q   <= ins[15:8];
              lstart_q <= pc_q + 1'b1;
              lend_q   <= pc_q + PW'(ins[21:16]);
              pc_q     <= pc_q + 1'b1;
            end else begin
              pc_q <= pc_q + PW'(ins[21:16]) + 1'b1;
            end
          end else if (lact_q && pc_q == lend_q) begin
            if (lcnt_q == 8'd1) begin
              lact_q <= 1'b0;
              pc_q   <= pc_q + 1'b1;
            end else begin
              lcnt_q <= lcnt_q - 1'b1;
              pc_q   <= lstart_q;
            end
          end else begin
            pc_q <= pc_q + 1'b1;
          end
        end
      end
    end
  end
endmodule
