// rtc: real-time clock of the always-on domain, a wake-up source of the
// power manager. A 32-bit counter advances once per tick of its clock (the
// 1 MHz always-on oscillator, so one count per microsecond); when enabled
// and the counter equals the alarm value, the alarm flag is set and held
// until software clears it, and wake_o follows the flag.
// Registers: 0x0 COUNT (read; a write loads it), 0x4 ALARM, 0x8 CTRL:
// [0] alarm enable, write [1] = 1 clears the flag; reads return {flag, en}.
// Bus access: granted at once, response one cycle later. The paper only
// names the RTC and its clock; the register set is this design's own.
module rtc
  import vega_pkg::*;
(
  input  logic     clk_i,
  input  logic     rst_ni,
  input  mem_req_t cfg_req_i,
  output mem_rsp_t cfg_rsp_o,
  output logic     wake_o
);
  logic [31:0] cnt_q, alarm_q, rdata_q;
  logic        en_q, flag_q, rvalid_q;

  assign cfg_rsp_o.gnt    = cfg_req_i.req;
  assign cfg_rsp_o.rvalid = rvalid_q;
  assign cfg_rsp_o.rdata  = rdata_q;
  assign wake_o           = flag_q;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      cnt_q <= '0; alarm_q <= '1; en_q <= 1'b0; flag_q <= 1'b0; rvalid_q <= 1'b0; rdata_q <= '0;
    end else begin
      rvalid_q <= cfg_req_i.req;
      cnt_q    <= cnt_q + 1'b1;
      if (en_q && cnt_q == alarm_q) flag_q <= 1'b1;
      if (cfg_req_i.req && cfg_req_i.we) begin
        unique case (cfg_req_i.addr[3:2])
          2'd0: cnt_q   <= cfg_req_i.wdata;
          2'd1: alarm_q <= cfg_req_i.wdata;
          2'd2: begin
            en_q <= cfg_req_i.wdata[0];
            if (cfg_req_i.wdata[1]) flag_q <= 1'b0;
          end
          default: ;
        endcase
      end
      if (cfg_req_i.req && !cfg_req_i.we) begin
        unique case (cfg_req_i.addr[3:2])
          2'd0: rdata_q <= cnt_q;
          2'd1: rdata_q <= alarm_q;
          default: rdata_q <= {30'd0, flag_q, en_q};
        endcase
      end
    end
  end
endmodule
