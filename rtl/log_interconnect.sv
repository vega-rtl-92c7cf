// log_interconnect: logarithmic (all-to-all) interconnect between N_MST
// masters and N_BANK word-interleaved memory banks.
// Consecutive 32-bit words live in consecutive banks: bank = word address
// modulo N_BANK, row = word address / N_BANK, so that streams spread evenly
// and contention stays low. Each bank has a round-robin arbiter; a master
// that loses waits with req held (gnt low). A granted request reaches the
// bank in the same cycle and its response (rvalid, rdata) returns exactly one
// cycle later, giving the 1-cycle latency of the paper's L1 and L2
// interconnects. Word interleaving follows the paper; the round-robin policy
// is this design's choice. The address bits above the bank row are ignored:
// region decoding is done before this block.
module log_interconnect
  import vega_pkg::*;
#(
  parameter int unsigned N_MST      = 14,
  parameter int unsigned N_BANK     = 16,
  parameter int unsigned BANK_WORDS = 2048,
  localparam int unsigned BW = (N_BANK > 1) ? $clog2(N_BANK) : 1,
  localparam int unsigned AW = $clog2(BANK_WORDS),
  localparam int unsigned MW = (N_MST > 1) ? $clog2(N_MST) : 1
) (
  input  logic                  clk_i,
  input  logic                  rst_ni,
  input  mem_req_t [N_MST-1:0]  mst_req_i,
  output mem_rsp_t [N_MST-1:0]  mst_rsp_o,
  output logic     [N_BANK-1:0] bank_req_o,
  output logic     [N_BANK-1:0] bank_we_o,
  output logic     [N_BANK-1:0][3:0]    bank_be_o,
  output logic     [N_BANK-1:0][AW-1:0] bank_addr_o,
  output logic     [N_BANK-1:0][31:0]   bank_wdata_o,
  input  logic     [N_BANK-1:0][31:0]   bank_rdata_i,
  output logic     [N_BANK-1:0]         bank_conflict_o  // a bank refused a master this cycle
);
  logic [N_MST-1:0][BW-1:0] tgt;
  logic [N_BANK-1:0][MW-1:0] ptr_q;
  logic [N_BANK-1:0][MW-1:0] win;
  logic [N_BANK-1:0]         any;
  logic [N_MST-1:0]          gnt;
  logic [N_MST-1:0]          rvalid_q;
  logic [N_MST-1:0][BW-1:0]  rbank_q;

  always_comb begin
    for (int m = 0; m < N_MST; m++)
      tgt[m] = (N_BANK > 1) ? BW'(mst_req_i[m].addr[2 +: BW]) : '0;
  end

  // Per-bank round-robin arbitration, starting at ptr_q.
  always_comb begin
    gnt = '0;
    for (int b = 0; b < N_BANK; b++) begin
      int unsigned nreq;
      any[b] = 1'b0;
      win[b] = '0;
      nreq = 0;
      for (int k = 0; k < N_MST; k++) begin
        int unsigned m;
        m = (int'(ptr_q[b]) + k) % N_MST;
        if (mst_req_i[m].req && tgt[m] == BW'(b)) begin
          nreq++;
          if (!any[b]) begin
            any[b] = 1'b1;
            win[b] = MW'(m);
          end
        end
      end
      bank_conflict_o[b] = (nreq > 1);
      if (any[b]) gnt[win[b]] = 1'b1;
      bank_req_o[b]   = any[b];
      bank_we_o[b]    = mst_req_i[win[b]].we;
      bank_be_o[b]    = mst_req_i[win[b]].be;
      bank_addr_o[b]  = AW'(mst_req_i[win[b]].addr >> (2 + ((N_BANK > 1) ? BW : 0)));
      bank_wdata_o[b] = mst_req_i[win[b]].wdata;
    end
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      ptr_q    <= '0;
      rvalid_q <= '0;
      rbank_q  <= '0;
    end else begin
      for (int b = 0; b < N_BANK; b++)
        if (any[b]) ptr_q[b] <= MW'((int'(win[b]) + 1) % N_MST);
      rvalid_q <= gnt;
      for (int m = 0; m < N_MST; m++) rbank_q[m] <= tgt[m];
    end
  end

  always_comb begin
    for (int m = 0; m < N_MST; m++) begin
      mst_rsp_o[m].gnt    = gnt[m];
      mst_rsp_o[m].rvalid = rvalid_q[m];
      mst_rsp_o[m].rdata  = bank_rdata_i[rbank_q[m]];
    end
  end


  for (genvar m = 0; m < N_MST; m++) begin : g_chk
    // a request stays up until it is granted
    a_hold: assert property (@(posedge clk_i) disable iff (!rst_ni)
      mst_req_i[m].req && !gnt[m] |=> mst_req_i[m].req);
  end

endmodule
