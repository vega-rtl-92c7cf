// tb_hwce_sop: checks the HWCE sum-of-products unit against a direct
// 9-tap multiply-accumulate computed in the testbench with 64-bit integers,
// for corner operands (most negative, most positive) and 2000 random ones.
// The unit is combinational; each vector is applied and checked after 1 ns.
module tb_hwce_sop;
  import vega_pkg::*;
  timeunit 1ns;
  timeprecision 1ps;
  localparam int unsigned WATCHDOG = 100000;
  logic clk = 1'b0;
  logic rst_n = 1'b0;
  int checks = 0;
  int failures = 0;
  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  task automatic finish();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  endtask

  initial begin : watchdog
    repeat (WATCHDOG) @(posedge clk);
    failures++;
    $display("FAIL: watchdog expired");
    finish();
  end

  logic signed [8:0][15:0] x, w;
  logic signed [31:0] yin, y;
  longint ref_y;
  hwce_sop dut (.x_i(x), .w_i(w), .yin_i(yin), .y_o(y));
  initial begin
    for (int n = 0; n < 2004; n++) begin
      for (int k = 0; k < 9; k++) begin
        x[k] = 16'($urandom); w[k] = 16'($urandom);
        if (n == 0) begin x[k] = 16'h8000; w[k] = 16'h8000; end
        if (n == 1) begin x[k] = 16'h7FFF; w[k] = 16'h8000; end
        if (n == 2) begin x[k] = 16'hFFFF; w[k] = 16'h0001; end
        if (n == 3) begin x[k] = 16'h00FF; w[k] = 16'hFF00; end
      end
      yin = (n < 4) ? 32'sd0 : 32'(signed'($urandom_range(0, 2000000)) - 1000000);
      #1;
      ref_y = longint'(yin);
      for (int k = 0; k < 9; k++) ref_y += longint'(signed'(x[k])) * longint'(signed'(w[k]));
      check(y == 32'(ref_y), $sformatf("sop vector %0d: got %0d expected %0d", n, y, ref_y));
    end
    finish();
  end
endmodule
