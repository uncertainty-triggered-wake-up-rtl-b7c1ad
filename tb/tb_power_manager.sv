// tb_power_manager -- start-up sequence after reset, sleep sequence,
// wake sequence with its cycle counts (power before clock before reset
// release), and a wake request arriving while the back end is going down,
// which must be served afterwards.
//
// Clock period 10 ns, step delays of 8 and 4 cycles (the defaults, passed
// explicitly so the expected counts are visible).  The restore-before-run order follows the paper; the step
// counts are this design's own.
module tb_power_manager;
  import soc_pkg::*;
  localparam int PWR = 8, CLK = 4;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;   // a falling edge, so the asynchronous resets act at once
  always #5 clk = ~clk;
  logic wake, sleep, pwr, iso_n, cen, rstn;
  pm_state_e st;
  logic [15:0] wakes;
  int checks = 0, failures = 0, order_err = 0;

  power_manager #(.PWR_CYCLES(PWR), .CLK_CYCLES(CLK)) dut (
    .clk_i(clk), .rst_ni(rst_n), .wake_req_i(wake), .sleep_req_i(sleep),
    .pwr_en_o(pwr), .iso_no(iso_n), .clk_en_o(cen), .rst_no(rstn),
    .state_o(st), .wakes_o(wakes)
  );

  // ordering rules checked every cycle
  always @(negedge clk) if (rst_n) begin
    if (cen && !pwr)   order_err++;
    if (rstn && !cen)  order_err++;
    if (iso_n && !rstn) order_err++;
  end

  task automatic check(input int got, exp, input string what);
    checks++;
    if (got != exp) begin failures++; $display("FAIL %s: %0d expected %0d", what, got, exp); end
  endtask

  // cycles from now until reset release
  task automatic wait_run(output int n);
    n = 0;
    while (!rstn && n < 100) begin @(posedge clk); #1 n++; end
  endtask

  task automatic wait_sleep(output int n);
    n = 0;
    while (st != PM_SLEEP && n < 100) begin @(posedge clk); #1 n++; end
  endtask

  initial begin
    int n;
    wake = 0; sleep = 0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    check(int'(pwr), 0, "off in reset");
    wait_run(n);
    check(n, 1 + PWR + CLK, "start-up cycles");
    check(int'(wakes), 0, "start-up is not a wake");
    // back to sleep
    sleep = 1; @(posedge clk); #1 sleep = 0;
    wait_sleep(n);
    check(n, 2 + PWR, "sleep cycles");
    check(int'(pwr), 0, "power off in sleep");
    check(int'(cen), 0, "clock off in sleep");
    repeat (5) @(posedge clk); #1;
    // wake
    wake = 1; @(posedge clk); #1 wake = 0;
    wait_run(n);
    check(n, PWR + CLK, "wake cycles after request");
    check(int'(wakes), 1, "wake counted");
    // wake request while going down
    sleep = 1; @(posedge clk); #1 sleep = 0;
    @(posedge clk); #1 wake = 1; @(posedge clk); #1 wake = 0;
    wait_sleep(n);
    @(posedge clk); #1;
    check(int'(st != PM_SLEEP), 1, "pending wake served");
    wait_run(n);
    check(int'(rstn), 1, "running again");
    check(int'(wakes), 2, "second wake counted");
    // a wake while running changes nothing now and is served after sleep
    wake = 1; @(posedge clk); #1 wake = 0;
    repeat (3) @(posedge clk); #1;
    check(int'(st), int'(PM_RUN), "still running");
    check(order_err, 0, "power/clock/reset ordering");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
