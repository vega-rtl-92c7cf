// hwce_pack: width converter from 16-bit results to 32-bit memory words, the
// HWCE's Y_OUT (16 -> 8/4/2 b) path. prec_i selects the element width
// (0 = 16, 1 = 8, 2 = 4, 3 = 2 bits); each element keeps its low bits and is
// placed at the least significant free position of the word. Up to K
// elements enter per cycle (n_i of them, when in_ready_o); a full word leaves
// on the valid/ready output. flush_i pushes out a partial last word padded
// with zeros; empty_o is high when nothing is buffered.
module hwce_pack #(
  parameter int unsigned K = 3
) (
  input  logic               clk_i,
  input  logic               rst_ni,
  input  logic               flush_i,
  input  logic [1:0]         prec_i,
  input  logic [K-1:0][15:0] elem_i,
  input  logic [2:0]         n_i,
  output logic               in_ready_o,
  output logic               out_valid_o,
  input  logic               out_ready_i,
  output logic [31:0]        out_data_o,
  output logic               empty_o
);
  logic [95:0] buf_q;
  logic [6:0]  fill_q;
  logic [4:0]  bits;
  logic [47:0] packed_in;
  logic        emit;
  logic [6:0]  fill_e;
  logic [95:0] buf_e;

  assign bits = 5'd16 >> prec_i;

  always_comb begin
    packed_in = '0;
    for (int k = 0; k < K; k++) begin
      if (3'(k) < n_i) begin
        unique case (prec_i)
          2'd0: packed_in[k*16 +: 16] = elem_i[k];
          2'd1: packed_in[k*8 +: 8]   = elem_i[k][7:0];
          2'd2: packed_in[k*4 +: 4]   = elem_i[k][3:0];
          default: packed_in[k*2 +: 2] = elem_i[k][1:0];
        endcase
      end
    end
    out_valid_o = (fill_q >= 7'd32) || (flush_i && fill_q != 0);
    out_data_o  = buf_q[31:0];
    emit        = out_valid_o && out_ready_i;
    fill_e      = emit ? ((fill_q >= 7'd32) ? fill_q - 7'd32 : 7'd0) : fill_q;
    buf_e       = emit ? (buf_q >> 32) : buf_q;
    in_ready_o  = (fill_e + 7'd48 <= 7'd96);
    empty_o     = (fill_q == 0);
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      buf_q <= '0; fill_q <= '0;
    end else if (in_ready_o && n_i != 0) begin
      buf_q  <= buf_e | (96'(packed_in) << fill_e);
      fill_q <= fill_e + 7'(n_i) * 7'(bits);
    end else begin
      buf_q  <= buf_e;
      fill_q <= fill_e;
    end
  end
endmodule
