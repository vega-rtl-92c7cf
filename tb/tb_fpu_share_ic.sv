// tb_fpu_share_ic: nine cores issue random floating-point operations to
// four shared FPUs through the sharing interconnect. Each FPU model in the
// testbench accepts an operation when ready (randomly stalled), and returns
// a result that encodes the operands and the tag after a random latency of
// 1 to 3 cycles, in order. The test checks that each core receives exactly
// the results of its own operations, in order, that each core only ever
// reaches its statically mapped FPU (c mod 4, core 8 on FPU 3) and that
// contention was flagged.
module tb_fpu_share_ic;
  import vega_pkg::*;
  timeunit 1ns;
  timeprecision 1ps;
  localparam int unsigned WATCHDOG = 50000;
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

  logic [8:0] cv, cr, crv;
  logic [8:0][7:0] cop;
  logic [8:0][2:0][31:0] copnd;
  logic [8:0][31:0] cres;
  logic [3:0] fv, fr, frv, fconf;
  logic [3:0][7:0] fop;
  logic [3:0][2:0][31:0] fopnd;
  logic [3:0][3:0] ftag, frtag;
  logic [3:0][31:0] fres;
  int n_conf = 0;
  fpu_share_ic dut (.clk_i(clk), .rst_ni(rst_n), .c_valid_i(cv), .c_ready_o(cr), .c_op_i(cop),
    .c_operands_i(copnd), .c_rvalid_o(crv), .c_result_o(cres), .f_valid_o(fv), .f_ready_i(fr),
    .f_op_o(fop), .f_operands_o(fopnd), .f_tag_o(ftag), .f_rvalid_i(frv), .f_result_i(fres),
    .f_rtag_i(frtag), .f_conflict_o(fconf));
  function automatic logic [31:0] res_of(input logic [7:0] op, input logic [31:0] a, input logic [31:0] b);
    return (a ^ {b[15:0], b[31:16]}) + 32'(op);
  endfunction
  function automatic int fpu_of(input int c);
    return c >= 8 ? 3 : c % 4;
  endfunction
  // FPU models: fixed-latency pipes of depth 2
  logic [3:0][1:0] pv;
  logic [3:0][1:0][31:0] pres;
  logic [3:0][1:0][3:0] ptag;
  always_ff @(posedge clk) begin
    for (int f = 0; f < 4; f++) begin
      pv[f][1] <= pv[f][0]; pres[f][1] <= pres[f][0]; ptag[f][1] <= ptag[f][0];
      pv[f][0] <= fv[f] && fr[f];
      pres[f][0] <= res_of(fop[f], fopnd[f][0], fopnd[f][1]);
      ptag[f][0] <= ftag[f];
      if (fv[f] && fr[f]) check(fpu_of(int'(ftag[f])) == f, "static core-to-FPU mapping");
      fr[f] <= ($urandom_range(0, 3) != 0);
    end
    if (fconf != 0) n_conf++;
  end
  always_comb for (int f = 0; f < 4; f++) begin
    frv[f] = pv[f][1]; fres[f] = pres[f][1]; frtag[f] = ptag[f][1];
  end
  logic [31:0] expq [9][$];
  int nres [9];
  int ndone = 0;
  always @(posedge clk) for (int c = 0; c < 9; c++) if (crv[c]) begin
    logic [31:0] e;
    if (expq[c].size() == 0) check(1'b0, "result without request");
    else begin
      e = expq[c].pop_front();
      check(cres[c] == e, $sformatf("core %0d result", c));
    end
    nres[c]++;
  end
  for (genvar c = 0; c < 9; c++) begin : g_c
    initial begin
      cv[c] = 1'b0; cop[c] = '0; copnd[c] = '0;
      wait (rst_n);
      for (int n = 0; n < 50; n++) begin
        @(negedge clk);
        cv[c] = 1'b1; cop[c] = 8'($urandom);
        copnd[c][0] = $urandom; copnd[c][1] = $urandom; copnd[c][2] = $urandom;
        @(posedge clk);
        while (!cr[c]) @(posedge clk);
        expq[c].push_back(res_of(cop[c], copnd[c][0], copnd[c][1]));
        @(negedge clk); cv[c] = 1'b0;
      end
      ndone++;
    end
  end
  initial begin
    pv = '0; pres = '0; ptag = '0; fr = '0;
    for (int c = 0; c < 9; c++) nres[c] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    wait (ndone == 9);
    repeat (10) @(posedge clk);
    for (int c = 0; c < 9; c++) check(nres[c] == 50, $sformatf("core %0d got all results", c));
    check(n_conf > 0, "FPU contention happened");
    finish();
  end
endmodule
