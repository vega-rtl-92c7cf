// fpu_share_ic: interconnect that shares the cluster's 4 FPUs among its 9
// cores with the paper's static mapping: FPU 0 serves cores 0 and 4, FPU 1
// cores 1 and 5, FPU 2 cores 2 and 6, FPU 3 cores 3, 7 and 8, so a core
// always uses the same physical unit. In front of each FPU a round-robin
// arbiter picks one requesting core per cycle (the others see ready low and
// stall); the winner's core index travels with the operation as a tag and the
// FPU's result is returned to the core whose index it carries. Contention is
// resolved in hardware, invisible to software. Mapping and the tag return are
// from the paper; the round-robin policy is this design's choice.
// Operation fields are passed through untouched (OP_W bits of opcode/format,
// three 32-bit operands).
module fpu_share_ic #(
  parameter int unsigned N_CORES = 9,
  parameter int unsigned N_FPU   = 4,
  parameter int unsigned OP_W    = 8,
  localparam int unsigned TW = $clog2(N_CORES)
) (
  input  logic                              clk_i,
  input  logic                              rst_ni,
  // cores
  input  logic [N_CORES-1:0]                c_valid_i,
  output logic [N_CORES-1:0]                c_ready_o,
  input  logic [N_CORES-1:0][OP_W-1:0]      c_op_i,
  input  logic [N_CORES-1:0][2:0][31:0]     c_operands_i,
  output logic [N_CORES-1:0]                c_rvalid_o,
  output logic [N_CORES-1:0][31:0]          c_result_o,
  // FPUs
  output logic [N_FPU-1:0]                  f_valid_o,
  input  logic [N_FPU-1:0]                  f_ready_i,
  output logic [N_FPU-1:0][OP_W-1:0]        f_op_o,
  output logic [N_FPU-1:0][2:0][31:0]       f_operands_o,
  output logic [N_FPU-1:0][TW-1:0]          f_tag_o,
  input  logic [N_FPU-1:0]                  f_rvalid_i,
  input  logic [N_FPU-1:0][31:0]            f_result_i,
  input  logic [N_FPU-1:0][TW-1:0]          f_rtag_i,
  output logic [N_FPU-1:0]                  f_conflict_o   // more than one core asked this FPU
);
  // static mapping: core c uses FPU c mod 4, the ninth core joins FPU 3
  function automatic int unsigned fpu_of(input int unsigned c);
    return (c >= 2 * N_FPU) ? N_FPU - 1 : c % N_FPU;
  endfunction

  logic [N_FPU-1:0][TW-1:0] ptr_q, win;
  logic [N_FPU-1:0]         any;

  always_comb begin
    c_ready_o = '0;
    for (int f = 0; f < N_FPU; f++) begin
      int unsigned nreq;
      any[f] = 1'b0;
      win[f] = '0;
      nreq   = 0;
      for (int k = 0; k < N_CORES; k++) begin
        int unsigned c;
        c = (int'(ptr_q[f]) + k) % N_CORES;
        if (c_valid_i[c] && fpu_of(c) == f) begin
          nreq++;
          if (!any[f]) begin any[f] = 1'b1; win[f] = TW'(c); end
        end
      end
      f_conflict_o[f] = nreq > 1;
      f_valid_o[f]    = any[f];
      f_op_o[f]       = c_op_i[win[f]];
      f_operands_o[f] = c_operands_i[win[f]];
      f_tag_o[f]      = win[f];
      if (any[f] && f_ready_i[f]) c_ready_o[win[f]] = 1'b1;
    end
    for (int c = 0; c < N_CORES; c++) begin
      c_rvalid_o[c] = f_rvalid_i[fpu_of(c)] && (f_rtag_i[fpu_of(c)] == TW'(c));
      c_result_o[c] = f_result_i[fpu_of(c)];
    end
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) ptr_q <= '0;
    else for (int f = 0; f < N_FPU; f++)
      if (any[f] && f_ready_i[f]) ptr_q[f] <= TW'((int'(win[f]) + 1) % N_CORES);
  end
endmodule
