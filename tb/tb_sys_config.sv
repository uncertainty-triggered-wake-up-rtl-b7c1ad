// tb_sys_config -- clock-enable and divider registers, the one-cycle sleep
// pulse, the power-manager read-back, and the clk_divider ratio it drives:
// with value d the divider enable is high one cycle in d+1.
//
// Clock period 10 ns.  Gating and the divider follow the paper; the
// register layout is this design's own.
module tb_sys_config;
  import soc_pkg::*;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;   // a falling edge, so the asynchronous resets act at once
  always #5 clk = ~clk;
  axil_req_t  req;
  axil_resp_t resp;
  logic [4:0] en;
  logic [7:0] div;
  logic       sleep, div_en;
  int checks = 0, failures = 0, sleeps = 0;

  sys_config dut (.clk_i(clk), .rst_ni(rst_n), .bus_req_i(req), .bus_resp_o(resp),
                  .clk_en_o(en), .clk_div_o(div), .sleep_req_o(sleep),
                  .pm_state_i(PM_RUN), .pm_wakes_i(16'd42));
  clk_divider u_div (.clk_i(clk), .rst_ni(rst_n), .div_i(div), .en_o(div_en));
  axil_master_bfm bfm (.clk(clk), .req(req), .resp(resp));

  always @(posedge clk) if (sleep) sleeps++;

  task automatic check(input logic [31:0] got, exp, input string what);
    checks++;
    if (got !== exp) begin failures++; $display("FAIL %s: %h expected %h", what, got, exp); end
  endtask

  initial begin
    logic [31:0] d; int highs;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    check(32'(en), 32'h1F, "all enabled after reset");
    check(32'(div), 0, "divider 0 after reset");
    bfm.wr(SYS_BASE + 32'(SYS_CLK_EN), 32'h15);
    check(32'(en), 32'h15, "enables written");
    bfm.rd(SYS_BASE + 32'(SYS_CLK_EN), d); check(d, 32'h15, "enables read");
    bfm.rd(SYS_BASE + 32'(SYS_PM), d); check(d, {16'd42, 13'b0, 3'(PM_RUN)}, "pm read");
    for (int v = 0; v < 6; v++) begin
      bfm.wr(SYS_BASE + 32'(SYS_CLK_DIV), 32'(v));
      check(32'(div), 32'(v), "divider written");
      repeat (10) @(posedge clk);
      highs = 0;
      for (int k = 0; k < 60 * (v + 1); k++) begin @(negedge clk); if (div_en) highs++; end
      check(32'(highs), 32'd60, $sformatf("divide by %0d", v + 1));
    end
    bfm.wr(SYS_BASE + 32'(SYS_CLK_DIV), 0);
    bfm.wr(SYS_BASE + 32'(SYS_SLEEP), 1);
    repeat (3) @(posedge clk);
    check(32'(sleeps), 1, "one sleep pulse");
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
