// sys_config -- system configuration unit (AXI-Lite slave).
//
// Holds the activity/clock-gating enables of each gated back-end module
// (CPU, program memory, data memory, GPIO, debug; all on after reset), the
// value of the programmable clock divider (0 after reset, i.e. full speed)
// and the software sleep request: writing 1 to SLEEP pulses sleep_req_o for
// one cycle, which sends the power manager down.  PM reads back the power
// manager state and its wake count.
//   CLK_EN  rw [4:0] enables, bit positions GATE_* in soc_pkg
//   CLK_DIV rw [7:0] divider value, ratio = value + 1
//   SLEEP   wo [0]   sleep request
//   PM      ro [2:0] power-manager state, [31:16] wake-ups served
// The paper lists these duties of the unit; the register layout is this
// implementation's choice.  The unit sits in the back-end domain, so its
// registers return to their reset values at every wake-up.
// Lint notes: every register fits in the low byte, so only wdata[7:0] and
// wstrb[0] are used; the remaining write-data and strobe bits are ignored
// on purpose.
module sys_config
  import soc_pkg::*;
(
  input  logic               clk_i,
  input  logic               rst_ni,
  input  axil_req_t          bus_req_i,
  output axil_resp_t         bus_resp_o,
  output logic [N_GATED-1:0] clk_en_o,
  output logic [7:0]         clk_div_o,
  output logic               sleep_req_o,
  input  pm_state_e          pm_state_i,
  input  logic [15:0]        pm_wakes_i
);
  logic        we, re, werr, rerr;
  logic [11:0] waddr, raddr;
  logic [31:0] wdata, rdata_q;
  logic [3:0]  wstrb;

  axil_to_reg #(.AW(12)) u_bus (
    .clk_i, .rst_ni,
    .req_i   (bus_req_i),
    .resp_o  (bus_resp_o),
    .we_o    (we),
    .waddr_o (waddr),
    .wdata_o (wdata),
    .wstrb_o (wstrb),
    .re_o    (re),
    .raddr_o (raddr),
    .rdata_i (rdata_q),
    .werr_i  (werr),
    .rerr_i  (rerr)
  );

  assign werr = !(waddr inside {SYS_CLK_EN, SYS_CLK_DIV, SYS_SLEEP});
  assign rerr = !(raddr inside {SYS_CLK_EN, SYS_CLK_DIV, SYS_PM});

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      clk_en_o    <= '1;
      clk_div_o   <= '0;
      sleep_req_o <= 1'b0;
      rdata_q     <= '0;
    end else begin
      sleep_req_o <= 1'b0;
      if (we && wstrb[0]) begin
        case (waddr)
          SYS_CLK_EN:  clk_en_o    <= wdata[N_GATED-1:0];
          SYS_CLK_DIV: clk_div_o   <= wdata[7:0];
          SYS_SLEEP:   sleep_req_o <= wdata[0];
          default: ;
        endcase
      end
      if (re) begin
        case (raddr)
          SYS_CLK_EN:  rdata_q <= 32'(clk_en_o);
          SYS_CLK_DIV: rdata_q <= {24'b0, clk_div_o};
          SYS_PM:      rdata_q <= {pm_wakes_i, 13'b0, pm_state_i};
          default:     rdata_q <= 32'hDEAD_BEEF;
        endcase
      end
    end
  end
endmodule
