// tb_axil_gpio -- output and direction registers, synchronized input
// (two-cycle delay) and an error response on an unknown offset.
//
// Clock period 10 ns; requests come from axil_master_bfm.  The paper only
// names the GPIO, so everything checked here is this design's own register
// behaviour.
module tb_axil_gpio;
  import soc_pkg::*;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;   // a falling edge, so the asynchronous resets act at once
  always #5 clk = ~clk;
  axil_req_t  req;
  axil_resp_t resp;
  logic [7:0] gin, gout, goe;
  int checks = 0, failures = 0;

  axil_gpio dut (.clk_i(clk), .rst_ni(rst_n), .bus_req_i(req), .bus_resp_o(resp),
                 .gpio_i(gin), .gpio_o(gout), .gpio_oe_o(goe));
  axil_master_bfm bfm (.clk(clk), .req(req), .resp(resp));

  task automatic check(input logic [31:0] got, exp, input string what);
    checks++;
    if (got !== exp) begin failures++; $display("FAIL %s: %h expected %h", what, got, exp); end
  endtask

  initial begin
    logic [31:0] d; logic [1:0] r; int c;
    gin = 0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    check(32'(gout), 0, "reset out");
    for (int i = 0; i < 20; i++) begin
      logic [7:0] v, o, inp;
      v = 8'($urandom); o = 8'($urandom); inp = 8'($urandom);
      bfm.wr(GPIO_BASE + 0, 32'(v));
      bfm.wr(GPIO_BASE + 8, 32'(o));
      check(32'(gout), 32'(v), "out pins");
      check(32'(goe), 32'(o), "dir pins");
      bfm.rd(GPIO_BASE + 0, d); check(d, 32'(v), "out readback");
      bfm.rd(GPIO_BASE + 8, d); check(d, 32'(o), "dir readback");
      gin = inp;
      repeat (3) @(posedge clk);
      bfm.rd(GPIO_BASE + 4, d); check(d, 32'(inp), "input");
    end
    bfm.write(GPIO_BASE + 4, 0, 4'hF, r, c);
    check(32'(r), 32'(RESP_DECERR), "write to IN refused");
    bfm.read(GPIO_BASE + 12, d, r, c);
    check(32'(r), 32'(RESP_DECERR), "unknown offset");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
