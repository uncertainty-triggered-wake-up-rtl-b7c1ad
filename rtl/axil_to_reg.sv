// axil_to_reg -- AXI-Lite slave front for simple register/memory blocks.
//
// A write is accepted when address and data are both valid (awready and
// wready rise together) and produces a one-cycle we_o strobe; the B response
// follows on the next cycle and stays until bready.  A read produces a
// one-cycle re_o strobe; the block must present the read data, registered,
// on rdata_i from the next cycle on and hold it until the next re_o.  R is
// valid that next cycle and stays until rready.  One transaction of each
// kind is outstanding at a time.  This handshake is this implementation's
// choice; the paper only names the bus.
module axil_to_reg
  import soc_pkg::*;
#(
  parameter int unsigned AW = 12   // address bits passed to the block
) (
  input  logic              clk_i,
  input  logic              rst_ni,
  input  axil_req_t         req_i,
  output axil_resp_t        resp_o,
  output logic              we_o,
  output logic [AW-1:0]     waddr_o,
  output logic [31:0]       wdata_o,
  output logic [3:0]        wstrb_o,
  output logic              re_o,
  output logic [AW-1:0]     raddr_o,
  input  logic [31:0]       rdata_i,
  input  logic              werr_i,    // write to an unknown offset
  input  logic              rerr_i     // read from an unknown offset
);
  logic bvalid_q, rvalid_q, berr_q, rerr_q;

  assign we_o    = req_i.awvalid & req_i.wvalid & ~bvalid_q;
  assign waddr_o = req_i.awaddr[AW-1:0];
  assign wdata_o = req_i.wdata;
  assign wstrb_o = req_i.wstrb;
  assign re_o    = req_i.arvalid & ~rvalid_q;
  assign raddr_o = req_i.araddr[AW-1:0];

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      bvalid_q <= 1'b0;
      rvalid_q <= 1'b0;
      berr_q   <= 1'b0;
      rerr_q   <= 1'b0;
    end else begin
      if (we_o) begin
        bvalid_q <= 1'b1;
        berr_q   <= werr_i;
      end else if (req_i.bready) begin
        bvalid_q <= 1'b0;
      end
      if (re_o) begin
        rvalid_q <= 1'b1;
        rerr_q   <= rerr_i;
      end else if (req_i.rready) begin
        rvalid_q <= 1'b0;
      end
    end
  end

  always_comb begin
    resp_o         = '0;
    resp_o.awready = we_o;
    resp_o.wready  = we_o;
    resp_o.bvalid  = bvalid_q;
    resp_o.bresp   = berr_q ? RESP_DECERR : RESP_OKAY;
    resp_o.arready = re_o;
    resp_o.rvalid  = rvalid_q;
    resp_o.rdata   = rdata_i;
    resp_o.rresp   = rerr_q ? RESP_DECERR : RESP_OKAY;
  end
endmodule
