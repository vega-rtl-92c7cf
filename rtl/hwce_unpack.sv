// hwce_unpack: width converter from 32-bit memory words to a stream of
// 16-bit signed elements, as in the HWCE's W (8/4/2 -> 16 b), X and Y_IN
// (8/4 -> 16 b) paths. prec_i selects the element width: 0 = 16, 1 = 8,
// 2 = 4, 3 = 2 bits; each element is sign-extended to 16 bits. Elements are
// taken from the least significant end of a word first. A 96-bit bit buffer
// accepts a word whenever it has room; up to K elements are presented per
// cycle (avail_o says how many are complete) and the consumer removes
// take_i <= avail_o of them. flush_i empties the buffer, discarding the
// padding bits of a job's last word. The element order is this design's
// choice.
module hwce_unpack #(
  parameter int unsigned K = 3
) (
  input  logic                  clk_i,
  input  logic                  rst_ni,
  input  logic                  flush_i,
  input  logic [1:0]            prec_i,
  input  logic                  in_valid_i,
  output logic                  in_ready_o,
  input  logic [31:0]           in_data_i,
  output logic [K-1:0][15:0]    elem_o,
  output logic [2:0]            avail_o,
  input  logic [2:0]            take_i
);
  logic [95:0] buf_q;
  logic [6:0]  fill_q;
  logic [4:0]  bits;
  logic [6:0]  used;
  logic [6:0]  left;
  logic [95:0] shifted;

  assign bits = 5'd16 >> prec_i;

  always_comb begin
    logic [6:0] n;
    n = fill_q / 7'(bits);
    avail_o = (n > 7'(K)) ? 3'(K) : n[2:0];
    for (int k = 0; k < K; k++) begin
      unique case (prec_i)
        2'd0: elem_o[k] = buf_q[k*16 +: 16];
        2'd1: elem_o[k] = {{8{buf_q[k*8+7]}}, buf_q[k*8 +: 8]};
        2'd2: elem_o[k] = {{12{buf_q[k*4+3]}}, buf_q[k*4 +: 4]};
        default: elem_o[k] = {{14{buf_q[k*2+1]}}, buf_q[k*2 +: 2]};
      endcase
    end
    used       = 7'(take_i) * 7'(bits);
    left       = fill_q - used;
    shifted    = buf_q >> used;
    in_ready_o = !flush_i && (left <= 7'd64);
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      buf_q <= '0; fill_q <= '0;
    end else if (flush_i) begin
      buf_q <= '0; fill_q <= '0;
    end else begin
      if (in_valid_i && in_ready_o) begin
        buf_q  <= shifted | (96'(in_data_i) << left);
        fill_q <= left + 7'd32;
      end else begin
        buf_q  <= shifted;
        fill_q <= left;
      end
    end
  end

  a_take_le_avail: assert property (@(posedge clk_i) disable iff (!rst_ni) take_i <= avail_o);
endmodule
