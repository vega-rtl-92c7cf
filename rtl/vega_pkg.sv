// vega_pkg: types and constants shared by the Vega SoC blocks.
// Every memory-mapped port in the design (L2, L1 TCDM, peripheral and
// configuration registers) uses one protocol: a master raises req with
// we/be/addr/wdata and holds it until gnt; the read data (or a write
// acknowledge) returns later with rvalid, in request order. Memories and the
// logarithmic interconnect answer exactly one cycle after the grant. The
// protocol and the address map below are this design's own choices; the
// paper names the buses but not their signals or addresses.
package vega_pkg;

  typedef struct packed {
    logic        req;
    logic        we;
    logic [3:0]  be;
    logic [31:0] addr;
    logic [31:0] wdata;
  } mem_req_t;

  typedef struct packed {
    logic        gnt;
    logic        rvalid;
    logic [31:0] rdata;
  } mem_rsp_t;

  // Address map (own choice).
  localparam logic [31:0] L1_BASE     = 32'h1000_0000;  // cluster TCDM, 128 kB
  localparam logic [31:0] L1_MASK     = 32'hFFFE_0000;
  localparam logic [31:0] CLPER_BASE  = 32'h1020_0000;  // cluster peripherals
  localparam logic [31:0] CLPER_MASK  = 32'hFFFF_0000;
  localparam logic [31:0] L2PRIV_BASE = 32'h1C00_0000;  // FC private L2, 64 kB
  localparam logic [31:0] L2PRIV_MASK = 32'hFFFF_0000;
  localparam logic [31:0] L2_BASE     = 32'h1C20_0000;  // interleaved L2, 1.5 MB
  localparam logic [31:0] L2_MASK     = 32'hFFE0_0000;  // 2 MB window
  localparam logic [31:0] SOCPER_BASE = 32'h1A10_0000;  // SoC peripherals
  localparam logic [31:0] SOCPER_MASK = 32'hFFF0_0000;

  // Cluster peripheral offsets (bits 15:12 select the unit).
  localparam logic [3:0] CLPER_DMA  = 4'd0;
  localparam logic [3:0] CLPER_HWCE = 4'd1;
  localparam logic [3:0] CLPER_EU   = 4'd2;

  // SoC peripheral offsets (bits 15:12 select the unit).
  localparam logic [3:0] SOCPER_UDMA = 4'd0;
  localparam logic [3:0] SOCPER_MRAM = 4'd1;
  localparam logic [3:0] SOCPER_CWU  = 4'd2;
  localparam logic [3:0] SOCPER_PMU  = 4'd3;
  localparam logic [3:0] SOCPER_RTC  = 4'd4;

  // Hypnos (HDC accelerator) sizes.
  localparam int unsigned HD_W    = 512;  // datapath width, bits
  localparam int unsigned AM_ROWS = 64;   // 64 x 512 bit associative memory

  // Power modes of the PMU (Fig. 7 labels).
  typedef enum logic [1:0] {
    PM_CWU_SLEEP = 2'd0,  // only always-on domain and CWU powered
    PM_CWU_RET   = 2'd1,  // as above plus retentive L2 banks
    PM_SOC       = 2'd2,  // SoC domain active
    PM_CLUSTER   = 2'd3   // SoC and cluster active
  } pmode_e;

endpackage
