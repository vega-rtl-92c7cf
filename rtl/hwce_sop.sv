// hwce_sop: one sum-of-products unit of the HWCE. It computes
//   y = yin + sum_{k<9} x[k] * w[k]
// for 16-bit signed window pixels x and weights w. Following the paper, each
// 16-bit operand is split into a signed high byte and an unsigned low byte,
// each widened to a 9-bit sub-word, so every product becomes four
// 9 x 9-bit sub-products (hi*hi, hi*lo, lo*hi, lo*lo). The sub-products of
// the same kind are first reduced over the 9 taps (four reduction trees, the
// CSA trees of the paper) and the four partial sums are then combined with
// their weights 2^16, 2^8, 2^8, 1 and with yin in a final tree. Narrower
// data is sign-extended to 16 bits before it arrives. The trees are written
// as additions that synthesis maps to carry-save adders. Purely
// combinational. The 32-bit accumulator width is this design's choice.
module hwce_sop #(
  parameter int unsigned TAPS = 9
) (
  input  logic signed [TAPS-1:0][15:0] x_i,
  input  logic signed [TAPS-1:0][15:0] w_i,
  input  logic signed [31:0]           yin_i,
  output logic signed [31:0]           y_o
);
  logic signed [31:0] t_hh, t_hl, t_lh, t_ll;

  always_comb begin
    t_hh = '0; t_hl = '0; t_lh = '0; t_ll = '0;
    for (int k = 0; k < TAPS; k++) begin
      logic signed [8:0] xh, xl, wh, wl;
      xh = {x_i[k][15], x_i[k][15:8]};
      xl = {1'b0, x_i[k][7:0]};
      wh = {w_i[k][15], w_i[k][15:8]};
      wl = {1'b0, w_i[k][7:0]};
      t_hh += 32'(xh * wh);
      t_hl += 32'(xh * wl);
      t_lh += 32'(xl * wh);
      t_ll += 32'(xl * wl);
    end
    y_o = yin_i + (t_hh <<< 16) + ((t_hl + t_lh) <<< 8) + t_ll;
  end
endmodule
