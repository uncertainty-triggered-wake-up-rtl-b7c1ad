// axil_sram -- word-addressed memory behind an AXI-Lite slave port.
//
// Used twice in the back end: as the program memory (firmware and the
// MLP's int8 weights) and as the data memory (variables), each 1 Mb, i.e.
// WORDS = 32768 words of 32 bits.  Byte strobes are honoured on writes.  A
// read takes one cycle (synchronous SRAM read); the read register holds its
// value until the next read.  The array has no reset: its contents come
// from the debug port or the firmware.
//
// The sizes follow the paper.  There the memories are ULP SRAM macros in the
// ASIC and block RAM on the FPGA; this array is the behavioural equivalent
// that synthesis tools infer as a memory.  Addresses beyond WORDS wrap.
// Lint notes: address bits [1:0] select a byte inside the word and are
// unused, because accesses are whole words with byte strobes.
module axil_sram
  import soc_pkg::*;
#(
  parameter int unsigned WORDS = MEM_WORDS   // 1 Mb / 32
) (
  input  logic       clk_i,
  input  logic       rst_ni,
  input  axil_req_t  bus_req_i,
  output axil_resp_t bus_resp_o
);
  localparam int unsigned AW = $clog2(WORDS) + 2;

  logic          we, re;
  logic [AW-1:0] waddr, raddr;
  logic [31:0]   wdata, rdata_q;
  logic [3:0]    wstrb;

  axil_to_reg #(.AW(AW)) u_bus (
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
    .werr_i  (1'b0),
    .rerr_i  (1'b0)
  );

  logic [31:0] mem [WORDS];

  always_ff @(posedge clk_i) begin
    if (we) begin
      for (int unsigned b = 0; b < 4; b++) begin
        if (wstrb[b]) mem[waddr[AW-1:2]][8*b +: 8] <= wdata[8*b +: 8];
      end
    end
    if (re) rdata_q <= mem[raddr[AW-1:2]];
  end
endmodule
