// axil_gpio -- general-purpose I/O block (AXI-Lite slave).
//
// N_GPIO pins.  OUT and DIR are written by software (DIR bit 1 = pin
// driven); IN returns the pins through a two-flop synchronizer.
//   0x0 OUT rw,  0x4 IN ro,  0x8 DIR rw
// The paper only names general-purpose I/Os among the peripherals; the
// register layout and pin count are this implementation's choices.
// Lint notes: only the low N_GPIO bits of the write data and byte strobe 0
// are used, since every register is at most one byte wide; the other bits
// of wdata/wstrb are ignored on purpose.
module axil_gpio
  import soc_pkg::*;
#(
  parameter int unsigned N_GPIO = 8
) (
  input  logic              clk_i,
  input  logic              rst_ni,
  input  axil_req_t         bus_req_i,
  output axil_resp_t        bus_resp_o,
  input  logic [N_GPIO-1:0] gpio_i,
  output logic [N_GPIO-1:0] gpio_o,
  output logic [N_GPIO-1:0] gpio_oe_o
);
  logic        we, re, werr, rerr;
  logic [3:0]  waddr, raddr;
  logic [31:0] wdata, rdata_q;
  logic [3:0]  wstrb;
  logic [N_GPIO-1:0] sync1_q, sync2_q;

  axil_to_reg #(.AW(4)) u_bus (
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

  assign werr = !(waddr inside {4'h0, 4'h8});
  assign rerr = !(raddr inside {4'h0, 4'h4, 4'h8});

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      gpio_o    <= '0;
      gpio_oe_o <= '0;
      sync1_q   <= '0;
      sync2_q   <= '0;
      rdata_q   <= '0;
    end else begin
      sync1_q <= gpio_i;
      sync2_q <= sync1_q;
      if (we && wstrb[0]) begin
        if (waddr == 4'h0) gpio_o    <= wdata[N_GPIO-1:0];
        if (waddr == 4'h8) gpio_oe_o <= wdata[N_GPIO-1:0];
      end
      if (re) begin
        case (raddr)
          4'h0:    rdata_q <= 32'(gpio_o);
          4'h4:    rdata_q <= 32'(sync2_q);
          4'h8:    rdata_q <= 32'(gpio_oe_o);
          default: rdata_q <= 32'hDEAD_BEEF;
        endcase
      end
    end
  end
endmodule
