// axil_master_bfm -- AXI-Lite master used by the testbenches.
//
// Drives the request one time unit after a rising edge and samples the
// response at the falling edge, so it never races with the design.  write()
// and read() run one complete transaction and return the response code;
// `cycles` returns how many rising edges the transaction took, from the
// edge after the request is raised to the edge that completes it.
module axil_master_bfm
  import soc_pkg::*;
(
  input  logic       clk,
  output axil_req_t  req,
  input  axil_resp_t resp
);
  initial req = '0;

  task automatic write(input logic [31:0] addr, input logic [31:0] data,
                       input logic [3:0] strb, output logic [1:0] bresp,
                       output int cycles);
    logic aw_ok, w_ok, a, w, b;
    cycles = 0;
    @(posedge clk); #1;
    req.awaddr = addr; req.awvalid = 1'b1;
    req.wdata  = data; req.wstrb   = strb; req.wvalid = 1'b1;
    aw_ok = 1'b0; w_ok = 1'b0;
    while (!(aw_ok && w_ok)) begin
      @(negedge clk);
      a = resp.awready & req.awvalid;
      w = resp.wready  & req.wvalid;
      @(posedge clk); #1; cycles++;
      if (a) begin req.awvalid = 1'b0; aw_ok = 1'b1; end
      if (w) begin req.wvalid  = 1'b0; w_ok  = 1'b1; end
    end
    req.bready = 1'b1;
    b = 1'b0;
    while (!b) begin
      @(negedge clk);
      b = resp.bvalid;
      bresp = resp.bresp;
      @(posedge clk); #1; cycles++;
    end
    req.bready = 1'b0;
  endtask

  task automatic read(input logic [31:0] addr, output logic [31:0] data,
                      output logic [1:0] rresp, output int cycles);
    logic a, r;
    cycles = 0;
    @(posedge clk); #1;
    req.araddr = addr; req.arvalid = 1'b1;
    a = 1'b0;
    while (!a) begin
      @(negedge clk);
      a = resp.arready;
      @(posedge clk); #1; cycles++;
    end
    req.arvalid = 1'b0;
    req.rready  = 1'b1;
    r = 1'b0;
    while (!r) begin
      @(negedge clk);
      r = resp.rvalid;
      data  = resp.rdata;
      rresp = resp.rresp;
      @(posedge clk); #1; cycles++;
    end
    req.rready = 1'b0;
  endtask

  // convenience forms
  task automatic wr(input logic [31:0] addr, input logic [31:0] data);
    logic [1:0] r; int c;
    write(addr, data, 4'hF, r, c);
  endtask

  task automatic rd(input logic [31:0] addr, output logic [31:0] data);
    logic [1:0] r; int c;
    read(addr, data, r, c);
  endtask
endmodule
