// hwce_linebuf: line buffer that turns a raster-order pixel stream into
// 3x3 sliding windows. Two row memories of MAX_W pixels hold the two previous
// image rows; for each incoming pixel at column c the column
// {row-2[c], row-1[c], pixel} is shifted into a 3x3 window register and the
// row memories move down by one row. Once two rows and two columns have been
// seen, every pixel completes a window for output position
// (row-2, col-2): win_o[3*r + c] is the pixel at window row r (0 = oldest)
// and column c (0 = leftmost). One window per accepted pixel; the window is
// held (and the input stalled) until out_ready_i. start_i clears the
// row/column counters for a new image of width width_i.
module hwce_linebuf #(
  parameter int unsigned MAX_W = 128,
  localparam int unsigned CW = $clog2(MAX_W + 1)
) (
  input  logic              clk_i,
  input  logic              rst_ni,
  input  logic              start_i,
  input  logic [CW-1:0]     width_i,
  input  logic              in_valid_i,
  output logic              in_ready_o,
  input  logic [15:0]       in_data_i,
  output logic              out_valid_o,
  input  logic              out_ready_i,
  output logic [8:0][15:0]  win_o
);
  logic [15:0] row1 [MAX_W];
  logic [15:0] row2 [MAX_W];
  logic [CW-1:0] col_q;
  logic [15:0]   row_q;
  logic          valid_q;
  logic [8:0][15:0] win_q;
  logic          acc;

  assign in_ready_o  = !valid_q || out_ready_i;
  assign acc         = in_valid_i && in_ready_o;
  assign out_valid_o = valid_q;
  assign win_o       = win_q;

  always_ff @(posedge clk_i) begin
    if (acc) begin
      row2[col_q] <= row1[col_q];
      row1[col_q] <= in_data_i;
    end
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      col_q <= '0; row_q <= '0; valid_q <= 1'b0; win_q <= '0;
    end else if (start_i) begin
      col_q <= '0; row_q <= '0; valid_q <= 1'b0;
    end else begin
      if (valid_q && out_ready_i) valid_q <= 1'b0;
      if (acc) begin
        for (int r = 0; r < 3; r++) begin
          win_q[3*r + 0] <= win_q[3*r + 1];
          win_q[3*r + 1] <= win_q[3*r + 2];
        end
        win_q[2] <= row2[col_q];
        win_q[5] <= row1[col_q];
        win_q[8] <= in_data_i;
        valid_q  <= (row_q >= 16'd2) && (col_q >= CW'(2));
        if (col_q == width_i - 1'b1) begin
          col_q <= '0;
          row_q <= row_q + 1'b1;
        end else begin
          col_q <= col_q + 1'b1;
        end
      end
    end
  end
endmodule
