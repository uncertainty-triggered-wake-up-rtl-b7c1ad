// tb_soc_top -- end-to-end test of the whole SoC at its default size
// (1 Mb program and data memories, reset period 2000), no overrides.
//
// Flow: power-on reset -> the power manager brings the back end up once
// (start-up) -> a JTAG host reads IDCODE, loads the log-likelihood table
// into the front end and the MLP weight image into the program memory,
// reads parts back, and provokes a decode error -> the firmware model
// (cpu_model) exercises the clock divider and clock gating, configures
// the front end and sends the back end to sleep -> a sensor model streams
// NBEATS records.  Every final decision is compared with a reference:
// the Bayesian scores, the wake policy and, for wake-ups, the MLP.
//
// Mechanisms counted (each must happen at least once): local decision,
// wake on abnormal / ambiguous / invalid output, start-up versus wake-up
// firmware path, power-up sequence, held input (stall), wake request kept
// pending while the back end is still up, clock division, module clock
// gating, GPIO output, JTAG load, decode error.
//
// Root (back-end) clock period 10 ns, front-end clock 1 us; TCK period
// 20 ns.  The firmware protocol (STATUS,
// SCORES, MLPBUF, DECISION, SLEEP) is this design's own; the wake-by-reset
// flow and the MLP layer sizes follow the paper.
module tb_soc_top;
  import soc_pkg::*;
  import mlp_pkg::*;
  localparam int PERIOD = 60, NBEATS = 150;   // PERIOD in front-end cycles (60 us)

  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;   // a falling edge, so the asynchronous resets act at once
  always #5 clk = ~clk;

  logic s_req, s_valid = 0, s_ready;
  logic [31:0] s_data = 0;
  logic cpu_clk, cpu_rst_n;
  axil_req_t  cpu_req;
  axil_resp_t cpu_resp;
  logic tck, tms, tdi, trst_n, tdo;
  logic [7:0] gpio_o, gpio_oe;
  logic be_pwr, fv, fbe;
  logic [1:0] fcls;
  logic load_done = 0;

  soc_top dut (
    .clk_i(clk), .rst_ni(rst_n),
    .sensor_req_o(s_req), .sensor_valid_i(s_valid), .sensor_data_i(s_data), .sensor_ready_o(s_ready),
    .cpu_clk_o(cpu_clk), .cpu_rst_no(cpu_rst_n), .cpu_req_i(cpu_req), .cpu_resp_o(cpu_resp),
    .tck_i(tck), .tms_i(tms), .tdi_i(tdi), .trst_ni(trst_n), .tdo_o(tdo),
    .gpio_i(8'hC3), .gpio_o(gpio_o), .gpio_oe_o(gpio_oe),
    .be_pwr_en_o(be_pwr),
    .final_valid_o(fv), .final_class_o(fcls), .final_by_backend_o(fbe)
  );

  cpu_model cpu (.clk(cpu_clk), .rst_n(cpu_rst_n), .req(cpu_req), .resp(cpu_resp),
                 .load_done_i(load_done), .period_i(PERIOD), .ctrl_i(3'b111));
  jtag_host #(.HALF(10)) jtag (.tck(tck), .tms(tms), .tdi(tdi), .trst_n(trst_n), .tdo(tdo));

  int checks = 0, failures = 0;
  logic [7:0]  tab [4][4][8];
  logic [31:0] rec [NBEATS][9];
  img_t img;
  int sent = 0;

  task automatic check(input logic [31:0] got, exp, input string what);
    checks++;
    if (got !== exp) begin failures++; $display("FAIL %s: %h expected %h", what, got, exp); end
  endtask

  function automatic logic [9:0] ref_score(int b, int c);
    int s; logic [7:0] code;
    s = 0;
    for (int f = 0; f < 4; f++) begin
      code = tab[c][f][rec[b][0][4*f +: 3]];
      if (s == 1023 || code == 8'hFF) s = 1023;
      else s = (s + int'(code) >= 1023) ? 1022 : s + int'(code);
    end
    return 10'(s);
  endfunction

  // ---------------------------------------------------------------- sensor
  // the sensor is clocked with the front end
  initial begin
    forever begin
      @(negedge dut.clk_fe);
      if (s_req && sent < NBEATS) begin
        for (int w = 0; w < 9; w++) begin
          s_valid = 1; s_data = rec[sent][w];
          while (!s_ready) @(negedge dut.clk_fe);
          @(negedge dut.clk_fe);
          s_valid = 0;
        end
        sent++;
      end
    end
  end

  // ---------------------------------------------------------------- monitors
  int fv_cnt = 0, n_pwr_up = 0, n_pending = 0, n_div = 0, n_div_skip = 0;
  int n_gpio_gated = 0, n_gpio_seen = 0;
  logic [1:0] fv_cls_q [$];
  logic       fv_be_q  [$];
  logic be_pwr_q = 0;
  always @(negedge dut.clk_fe) begin
    if (fv) begin fv_cnt++; fv_cls_q.push_back(fcls); fv_be_q.push_back(fbe); end
    if (dut.wake_req && dut.pm_state != PM_SLEEP) n_pending++;
  end
  always @(posedge clk) begin
    #1;
    if (be_pwr && !be_pwr_q) n_pwr_up++;
    be_pwr_q = be_pwr;
    if (dut.pm_state == PM_RUN && dut.clk_div == 8'd2) begin
      if (cpu_clk) n_div++; else n_div_skip++;
    end
    if (cpu_clk && !dut.mod_en[GATE_GPIO]) n_gpio_gated++;
    if (gpio_o == 8'h5A && gpio_oe == 8'hFF) n_gpio_seen++;
  end

  // ---------------------------------------------------------------- main
  initial begin
    logic [31:0] d, id;
    logic err;
    logic [9:0] sc [4];
    int best, exp_cls, n_local, n_wake, n_abn, n_amb, n_inv, n_decerr;
    byte signed feat [32];
    n_local = 0; n_wake = 0; n_abn = 0; n_amb = 0; n_inv = 0; n_decerr = 0;

    for (int b = 0; b < NBEATS; b++) begin
      rec[b][0] = 0;
      for (int f = 0; f < 4; f++) rec[b][0][4*f +: 3] = 3'($urandom_range(0, 7));
      for (int w = 1; w < 9; w++) rec[b][w] = $urandom;
    end
    for (int b = 0; b < 3; b++) rec[b][0] = 0;   // first inputs clearly normal
    for (int c = 0; c < 4; c++) for (int f = 0; f < 4; f++) for (int l = 0; l < 8; l++)
      tab[c][f][l] = (f == c && l == 7) ? 8'hFF : (l == 0) ? (c == 0 ? 8'd0 : 8'd5)
                                                  : 8'($urandom_range(0, 6));
    for (int i = 0; i < IMG_WORDS * 4; i++)
      img[i] = i < IMG_BYTES ? byte'($urandom_range(0, 48)) - 8'sd24 : 8'sd0;

    repeat (3) @(posedge clk);
    #1 rst_n = 1;

    // ---- debug: identify, load, read back, decode error
    wait (cpu_rst_n === 1'b1);
    jtag.reset_tap();
    jtag.read_idcode(id);
    check(id, 32'h1BA7E5A1, "IDCODE");
    for (int c = 0; c < 4; c++) for (int f = 0; f < 4; f++) for (int h = 0; h < 2; h++)
      jtag.dbg_write(FE_BASE + 32'(FE_LLTAB) + 32'(32 * c + 8 * f + 4 * h),
                     {tab[c][f][4*h+3], tab[c][f][4*h+2], tab[c][f][4*h+1], tab[c][f][4*h]});
    for (int w = 0; w < IMG_WORDS; w++)
      jtag.dbg_write(PMEM_BASE + IMG_BASE + 32'(4 * w),
                     {img[4*w+3], img[4*w+2], img[4*w+1], img[4*w]});
    for (int w = 0; w < IMG_WORDS; w += 97) begin
      jtag.dbg_read(PMEM_BASE + IMG_BASE + 32'(4 * w), d);
      check(d, {img[4*w+3], img[4*w+2], img[4*w+1], img[4*w]}, "weight read-back");
    end
    jtag.dbg_read(FE_BASE + 32'(FE_LLTAB) + 32'd36, d);
    check(d, {tab[1][0][7], tab[1][0][6], tab[1][0][5], tab[1][0][4]}, "table read-back");
    jtag.dbg_access(1'b0, 32'h5000_0000, 32'b0, d, err);
    check(32'(err), 1, "unmapped address gives an error");
    if (err) n_decerr++;
    load_done = 1;
    $display("[%0t] image loaded over JTAG", $time);

    // ---- monitoring
    for (int b = 0; b < NBEATS; b++) begin
      for (int c = 0; c < 4; c++) sc[c] = ref_score(b, c);
      best = 0;
      for (int c = 1; c < 4; c++) if (sc[c] < sc[best]) best = c;
      while (fv_cls_q.size() == 0) @(negedge clk);
      if (best != 0 || sc[0] == sc[1] || sc[0] == sc[2] || sc[0] == sc[3] ||
          sc[0] == 1023 || sc[1] == 1023 || sc[2] == 1023 || sc[3] == 1023) begin
        n_wake++;
        if (best != 0) n_abn++;
        else if (sc[0] == sc[1] || sc[0] == sc[2] || sc[0] == sc[3]) n_amb++;
        if (sc[0] == 1023 || sc[1] == 1023 || sc[2] == 1023 || sc[3] == 1023) n_inv++;
        for (int i = 0; i < 32; i++) feat[i] = byte'(rec[b][1 + i / 4][8 * (i % 4) +: 8]);
        exp_cls = classify(img, feat);
        check({30'b0, fv_cls_q.pop_front()}, 32'(exp_cls), $sformatf("beat %0d back-end class", b));
        check(32'(fv_be_q.pop_front()), 1, $sformatf("beat %0d decided by the back end", b));
      end else begin
        n_local++;
        check({30'b0, fv_cls_q.pop_front()}, 0, $sformatf("beat %0d local class", b));
        check(32'(fv_be_q.pop_front()), 0, $sformatf("beat %0d decided locally", b));
      end
    end
    wait (dut.pm_state == PM_SLEEP);
    repeat (20) @(posedge clk);

    check(32'(cpu.startups), 1, "one start-up");
    check(32'(cpu.services), 32'(n_wake), "one firmware service per wake-up");
    check(32'(dut.u_pm.wakes_o), 32'(n_wake), "power-manager wake count");
    check(32'(n_pwr_up), 32'(n_wake + 1), "power-up sequences");
    check(32'(dut.u_fe.beats_q), NBEATS, "front-end input count");
    check(32'(dut.u_fe.wakes_q), 32'(n_wake), "front-end wake count");
    check(32'(n_div_skip >= 2 * n_div - 2 && n_div_skip <= 2 * n_div + 2), 1,
          "divide-by-3 clock while CLK_DIV=2");

    $display("inputs %0d: local %0d, wake %0d (abnormal %0d, ambiguous %0d, invalid %0d)",
             NBEATS, n_local, n_wake, n_abn, n_amb, n_inv);
    $display("start-ups %0d, services %0d, power-ups %0d, stalls %0d, pending wakes %0d",
             cpu.startups, cpu.services, n_pwr_up, dut.u_fe.stalls_q, n_pending);
    $display("divided cycles %0d/%0d, gpio gated %0d, gpio seen %0d, decode errors %0d",
             n_div, n_div_skip, n_gpio_gated, n_gpio_seen, n_decerr);
    check(32'(n_local        > 0), 1, "mechanism: local decision");
    check(32'(n_abn          > 0), 1, "mechanism: wake on abnormal");
    check(32'(n_amb          > 0), 1, "mechanism: wake on ambiguous");
    check(32'(n_inv          > 0), 1, "mechanism: wake on invalid");
    check(32'(cpu.startups   > 0), 1, "mechanism: start-up path");
    check(32'(cpu.services   > 0), 1, "mechanism: wake-up path");
    check(32'(n_pwr_up       > 1), 1, "mechanism: power-up sequence");
    check(32'(dut.u_fe.stalls_q > 0), 1, "mechanism: input held during service");
    check(32'(n_pending      > 0), 1, "mechanism: pending wake request");
    check(32'(n_div          > 0), 1, "mechanism: clock division");
    check(32'(n_gpio_gated   > 0), 1, "mechanism: module clock gating");
    check(32'(n_gpio_seen    > 0), 1, "mechanism: GPIO output");
    check(32'(n_decerr       > 0), 1, "mechanism: decode error");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #60000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
