// cpu_model -- behavioural stand-in for the RISC-V core and its firmware.
//
// Every time its reset is released it runs the firmware entry point:
//   * it reads the front-end STATUS register;
//   * wake flag clear (true start-up): platform initialisation - waits for
//     the debugger to finish loading (load_done_i), exercises the clock
//     divider and the module clock gating once, configures the front end
//     (PERIOD, CTRL), then requests sleep;
//   * wake flag set (wake-up service): reads the scores, the 32 buffered
//     MLP features and the whole weight image from the program memory,
//     sets the clock divider to 0, runs the MLP, writes the class to DECISION,
//     logs it in the data memory, reads the front-end counters, spends a
//     random 0..3000 cycles on other work (so that the next wake request
//     sometimes arrives before it sleeps) and requests sleep.
// All accesses go over the SoC's AXI-Lite CPU port with the gated CPU clock.
module cpu_model
  import soc_pkg::*;
  import mlp_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  output axil_req_t   req,
  input  axil_resp_t  resp,
  input  logic        load_done_i,
  input  logic [31:0] period_i,
  input  logic [2:0]  ctrl_i
);
  axil_master_bfm bfm (.clk(clk), .req(req), .resp(resp));

  int startups = 0, services = 0, div_tests = 0, gate_tests = 0;
  int last_class = -1;
  img_t img;

  task automatic startup();
    logic [31:0] d;
    startups++;
    wait (load_done_i);
    if (startups == 1) begin
      // clock divider: divide by 3, a few accesses, back to full speed
      bfm.wr(SYS_BASE + 32'(SYS_CLK_DIV), 32'd2);
      bfm.rd(SYS_BASE + 32'(SYS_CLK_DIV), d);
      bfm.wr(DMEM_BASE + 32'h100, 32'hD1D1_0003);
      bfm.wr(SYS_BASE + 32'(SYS_CLK_DIV), 32'd0);
      div_tests++;
      // activity gating: stop the GPIO clock, then restart it
      bfm.wr(SYS_BASE + 32'(SYS_CLK_EN), 32'h1F & ~(32'd1 << GATE_GPIO));
      bfm.wr(SYS_BASE + 32'(SYS_CLK_EN), 32'h1F);
      bfm.wr(GPIO_BASE + 8, 32'hFF);
      bfm.wr(GPIO_BASE + 0, 32'h5A);
      gate_tests++;
    end
    bfm.wr(FE_BASE + 32'(FE_PERIOD), period_i);
    bfm.wr(FE_BASE + 32'(FE_CTRL), 32'(ctrl_i));
    bfm.wr(SYS_BASE + 32'(SYS_SLEEP), 32'd1);
  endtask

  task automatic service();
    logic [31:0] d;
    byte signed feat [32];
    services++;
    bfm.wr(SYS_BASE + 32'(SYS_CLK_DIV), 32'd0);      // clk_set_div_value(0)
    bfm.rd(FE_BASE + 32'(FE_SCORES0), d);
    bfm.rd(FE_BASE + 32'(FE_SCORES1), d);
    for (int w = 0; w < 8; w++) begin
      bfm.rd(FE_BASE + 32'(FE_MLPBUF) + 32'(4 * w), d);
      for (int b = 0; b < 4; b++) feat[4 * w + b] = byte'(d[8*b +: 8]);
    end
    for (int w = 0; w < IMG_WORDS; w++) begin
      bfm.rd(PMEM_BASE + IMG_BASE + 32'(4 * w), d);
      for (int b = 0; b < 4; b++) img[4 * w + b] = byte'(d[8*b +: 8]);
    end
    last_class = classify(img, feat);
    bfm.wr(FE_BASE + 32'(FE_DECISION), 32'(last_class));
    // bookkeeping after answering: result log and front-end counters
    bfm.wr(DMEM_BASE + 32'(4 * (services % 64)), 32'(last_class));
    bfm.rd(FE_BASE + 32'(FE_BEATS), d);
    bfm.rd(FE_BASE + 32'(FE_STALLS), d);
    repeat ($urandom_range(0, 3000)) @(posedge clk);   // other firmware work, of varying length
    bfm.wr(SYS_BASE + 32'(SYS_SLEEP), 32'd1);
  endtask

  initial begin
    logic [31:0] st;
    forever begin
      wait (rst_n === 1'b1);
      bfm.rd(FE_BASE + 32'(FE_STATUS), st);
      if (st[0]) service();
      else       startup();
      wait (rst_n === 1'b0);
    end
  end
endmodule
