// hdc_am: associative memory of the Hypnos HDC accelerator: ROWS rows of W
// bits (64 x 512 = 32 kbit, i.e. 16 HD vectors of 2048 bits), used both as a
// scratchpad for intermediate HD vectors and for the class prototypes and the
// search vector. One write port (one row per cycle) and one combinational
// read port serve the vector encoder. An associative lookup (search_i with
// rows first_i..last_i and search row srow_i) latches the search vector and
// then compares one row per cycle with it, computing the Hamming distance
// combinationally (XOR and population count) and keeping the smallest
// distance and its row; done_o pulses with best_idx_o/best_dist_o when the
// last row was compared. Ties keep the lower row. The paper builds the
// array from latches with a clock gate per row; here it is a clocked array.
module hdc_am #(
  parameter int unsigned ROWS = 64,
  parameter int unsigned W    = 512,
  localparam int unsigned AW = $clog2(ROWS),
  localparam int unsigned DW = $clog2(W + 1)
) (
  input  logic          clk_i,
  input  logic          rst_ni,
  input  logic          we_i,
  input  logic [AW-1:0] waddr_i,
  input  logic [W-1:0]  wdata_i,
  input  logic [AW-1:0] raddr_i,
  output logic [W-1:0]  rdata_o,
  input  logic          search_i,
  input  logic [AW-1:0] first_i,
  input  logic [AW-1:0] last_i,
  input  logic [AW-1:0] srow_i,
  output logic          busy_o,
  output logic          done_o,
  output logic [AW-1:0] best_idx_o,
  output logic [DW-1:0] best_dist_o
);
  logic [W-1:0]  mem [ROWS];
  logic [W-1:0]  sv_q;
  logic [AW-1:0] row_q, last_q;
  logic          busy_q;
  logic [DW-1:0] hdist;

  assign rdata_o = mem[raddr_i];
  assign busy_o  = busy_q;

  always_ff @(posedge clk_i)
    if (we_i) mem[waddr_i] <= wdata_i;

  always_comb begin
    hdist = '0;
    for (int i = 0; i < W; i++) hdist += DW'(mem[row_q][i] ^ sv_q[i]);
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      sv_q <= '0; row_q <= '0; last_q <= '0; busy_q <= 1'b0; done_o <= 1'b0;
      best_idx_o <= '0; best_dist_o <= '0;
    end else begin
      done_o <= 1'b0;
      if (!busy_q && search_i) begin
        sv_q        <= mem[srow_i];
        row_q       <= first_i;
        last_q      <= last_i;
        busy_q      <= 1'b1;
        best_dist_o <= '1;
        best_idx_o  <= first_i;
      end else if (busy_q) begin
        if (hdist < best_dist_o) begin
          best_dist_o <= hdist;
          best_idx_o  <= row_q;
        end
        if (row_q == last_q) begin
          busy_q <= 1'b0;
          done_o <= 1'b1;
        end else begin
          row_q <= row_q + 1'b1;
        end
      end
    end
  end
endmodule
