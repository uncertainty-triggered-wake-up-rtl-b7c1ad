// soc_top -- uncertainty-triggered wake-up SoC.
//
// Two sides, clocked at different rates from one clock tree:
//   always-on front end : the Bayesian machine, the front-end controller
//                         (control logic, DMA, wake-up controller, status
//                         registers), the power manager and the GPIO
//                         peripheral;
//   programmable back end: the AXI-Lite interconnect, program and data
//                         memories, system configuration unit and the
//                         JTAG debug master, plus the CPU, which is not part
//                         of this RTL: its AXI-Lite master port, gated clock
//                         and reset are ports of this module.
// The back end is power- and clock-gated while the front end screens
// inputs.  When the front end decides to wake it, the power manager powers
// it up, starts its clock and releases its reset; the CPU boots from its
// reset vector, reads the front-end STATUS register to see why, runs the
// MLP on the buffered features, writes its class to DECISION and requests
// sleep through the system configuration unit.
//
// Clocks: clk_i is the root and the back-end rate (100 MHz in the paper's
// chip).  A fixed divide-by-FE_DIV enable gates it into clk_fe, the
// front-end clock (1 MHz with the defaults), which runs the Bayesian
// machine, the front-end controller and, through its own module gate, the
// GPIO peripheral, so the pins keep their state while the back end sleeps.
// The programmable divider of the system configuration unit, together with
// the power manager's enable, gates the root into clk_be, the back-end
// clock; per-module gates of clk_be give the CPU, memory and debug clocks.
// The power manager itself runs on the root clock.  Because every clock is
// a gated copy of clk_i, their edges coincide and no synchronizers are
// needed: wake and sleep requests are taken on the root cycle that ends
// with an edge of the clock that made them, and the two always-on bus
// slaves (front-end registers, GPIO) sit behind axil_tick_bridge, which
// lets a handshake happen only on an edge both clocks see.  Only the JTAG
// clock tck_i is asynchronous.  The always-on slaves are reached through
// the back-end interconnect, so only the running CPU or debugger can
// access them.  While the back end is not running, its bus masters and the
// outputs of the system configuration unit are isolated (clamped).  rst_ni is the chip reset (asynchronous assert, deassert
// synchronous to clk_i).
//
// The split into these blocks, the wake path and the two clock rates follow
// the paper; deriving both clocks from one root, the bus bridges, the
// isolation of the CPU port while the back end is down and the address map
// (soc_pkg) are this implementation's choices.
// Lint notes: the back-end reset (cpu_rst_no) is flagged as used both
// asynchronously and synchronously.  The synchronous use is the
// `disable iff` of the interconnect's protocol assertions, which are
// checkers, not logic; every flip-flop uses the reset asynchronously.
module soc_top
  import soc_pkg::*;
#(
  parameter int unsigned MEM_W        = MEM_WORDS,  // words per memory (1 Mb)
  parameter int unsigned FE_DIV       = 100,        // root (back-end) / front-end clock
  parameter int unsigned PERIOD_RESET = 2000,       // monitoring period after reset
  parameter int unsigned N_GPIO       = 8
) (
  input  logic              clk_i,
  input  logic              rst_ni,
  // sensor interface (feature records)
  output logic              sensor_req_o,
  input  logic              sensor_valid_i,
  input  logic [31:0]       sensor_data_i,
  output logic              sensor_ready_o,
  // CPU core port
  output logic              cpu_clk_o,
  output logic              cpu_rst_no,
  input  axil_req_t         cpu_req_i,
  output axil_resp_t        cpu_resp_o,
  // JTAG
  input  logic              tck_i,
  input  logic              tms_i,
  input  logic              tdi_i,
  input  logic              trst_ni,
  output logic              tdo_o,
  // GPIO
  input  logic [N_GPIO-1:0] gpio_i,
  output logic [N_GPIO-1:0] gpio_o,
  output logic [N_GPIO-1:0] gpio_oe_o,
  // power switch of the back-end domain
  output logic              be_pwr_en_o,
  // final decision for each input
  output logic              final_valid_o,
  output logic [1:0]        final_class_o,
  output logic              final_by_backend_o
);
  // ------------------------------------------------------------ clocks and resets
  logic               fe_en, div_en, be_en, clk_fe, clk_be;
  logic [7:0]         clk_div;
  logic               pm_clk_en, pm_rst_n, pm_iso_n, be_rst_n;
  logic [N_GATED-1:0] mod_en;
  logic [N_GATED-1:0] mod_clk;
  pm_state_e          pm_state;
  logic [15:0]        pm_wakes;
  logic               wake_req, sleep_req;
  logic [7:0]         sys_clk_div;
  logic [N_GATED-1:0] sys_mod_en;
  logic               sys_sleep;

  // isolation of the system configuration unit: while the back end is not
  // running its outputs are clamped to a safe state (undivided clock, module
  // clocks enabled, no sleep request), so the back end is clocked while
  // its reset is held and the always-on GPIO keeps its clock
  assign clk_div   = pm_iso_n ? sys_clk_div : '0;
  assign mod_en    = pm_iso_n ? sys_mod_en  : '1;
  assign sleep_req = pm_iso_n & sys_sleep;

  // front-end clock: fixed division of the root clock
  clk_divider #(.DIV_W(16)) u_div_fe (
    .clk_i, .rst_ni, .div_i(16'(FE_DIV - 1)), .en_o(fe_en)
  );
  clk_gate u_cg_fe (.clk_i(clk_i), .en_i(fe_en), .test_en_i(1'b0), .gclk_o(clk_fe));

  // back-end clock: programmable division, gated by the power manager
  clk_divider #(.DIV_W(8)) u_div (
    .clk_i, .rst_ni, .div_i(clk_div), .en_o(div_en)
  );
  assign be_en = div_en & pm_clk_en;
  clk_gate u_cg_be (.clk_i(clk_i), .en_i(be_en), .test_en_i(1'b0), .gclk_o(clk_be));

  // module clocks: the GPIO peripheral is always on and gated from the
  // front-end clock, the other modules belong to the back end
  for (genvar g = 0; g < N_GATED; g++) begin : g_mod_clk
    if (g == GATE_GPIO) begin : g_aon
      clk_gate u_cg (.clk_i(clk_fe), .en_i(mod_en[g]), .test_en_i(1'b0), .gclk_o(mod_clk[g]));
    end else begin : g_be
      clk_gate u_cg (.clk_i(clk_be), .en_i(mod_en[g]), .test_en_i(1'b0), .gclk_o(mod_clk[g]));
    end
  end

  assign be_rst_n   = rst_ni & pm_rst_n;
  assign cpu_clk_o  = mod_clk[GATE_CPU];
  assign cpu_rst_no = be_rst_n;

  // The power manager runs on the root clock.  Each request is held for a
  // whole cycle of the slower clock that makes it and is taken only on the
  // root cycle that ends with that clock's edge, so it counts once.
  power_manager u_pm (
    .clk_i       (clk_i),
    .rst_ni,
    .wake_req_i  (wake_req & fe_en),
    .sleep_req_i (sleep_req & be_en),
    .pwr_en_o    (be_pwr_en_o),
    .iso_no      (pm_iso_n),
    .clk_en_o    (pm_clk_en),
    .rst_no      (pm_rst_n),
    .state_o     (pm_state),
    .wakes_o     (pm_wakes)
  );

  // ------------------------------------------------------------ front end
  logic                                  bm_start, bm_done;
  logic [N_FEATURES-1:0][FEAT_W-1:0]     bm_features;
  logic [N_CLASSES-1:0][SCORE_W-1:0]     bm_scores;
  logic                                  bm_prog_en;
  logic [1:0]                            bm_prog_class, bm_prog_feature;
  logic [N_LEVELS-1:0]                   bm_prog_mask;
  logic [N_LEVELS*LL_W-1:0]              bm_prog_word, bm_prog_rdword;

  bayesian_machine u_bm (
    .clk_i          (clk_fe),
    .rst_ni,
    .start_i        (bm_start),
    .features_i     (bm_features),
    .done_o         (bm_done),
    .scores_o       (bm_scores),
    .prog_en_i      (bm_prog_en),
    .prog_class_i   (bm_prog_class),
    .prog_feature_i (bm_prog_feature),
    .prog_mask_i    (bm_prog_mask),
    .prog_word_i    (bm_prog_word),
    .prog_rdword_o  (bm_prog_rdword)
  );

  // bus slaves as the interconnect sees them; the two always-on slaves are
  // reached through bridges to the front-end clock
  axil_req_t  [N_SLAVES-1:0] slv_req;
  axil_resp_t [N_SLAVES-1:0] slv_resp;
  axil_req_t                 fe_req,  gpio_req;
  axil_resp_t                fe_resp, gpio_resp;

  axil_tick_bridge u_br_fe (
    .m_tick_i (be_en),
    .s_tick_i (fe_en),
    .m_req_i  (slv_req[SLV_FE]),
    .m_resp_o (slv_resp[SLV_FE]),
    .s_req_o  (fe_req),
    .s_resp_i (fe_resp)
  );

  axil_tick_bridge u_br_gpio (
    .m_tick_i (be_en),
    .s_tick_i (fe_en & mod_en[GATE_GPIO]),
    .m_req_i  (slv_req[SLV_GPIO]),
    .m_resp_o (slv_resp[SLV_GPIO]),
    .s_req_o  (gpio_req),
    .s_resp_i (gpio_resp)
  );

  fe_controller #(.PERIOD_RESET(PERIOD_RESET)) u_fe (
    .clk_i              (clk_fe),
    .rst_ni,
    .bus_req_i          (fe_req),
    .bus_resp_o         (fe_resp),
    .sensor_req_o,
    .sensor_valid_i,
    .sensor_data_i,
    .sensor_ready_o,
    .bm_start_o         (bm_start),
    .bm_features_o      (bm_features),
    .bm_done_i          (bm_done),
    .bm_scores_i        (bm_scores),
    .bm_prog_en_o       (bm_prog_en),
    .bm_prog_class_o    (bm_prog_class),
    .bm_prog_feature_o  (bm_prog_feature),
    .bm_prog_mask_o     (bm_prog_mask),
    .bm_prog_word_o     (bm_prog_word),
    .bm_prog_rdword_i   (bm_prog_rdword),
    .wake_req_o         (wake_req),
    .final_valid_o,
    .final_class_o,
    .final_by_backend_o
  );

  // ------------------------------------------------------------ back end
  axil_req_t  [1:0] mst_req;
  axil_resp_t [1:0] mst_resp;
  axil_req_t        dbg_req;

  // isolation: nothing from the CPU reaches the bus unless the back end runs
  assign mst_req[0] = pm_iso_n ? cpu_req_i : '0;
  assign mst_req[1] = pm_iso_n ? dbg_req   : '0;
  assign cpu_resp_o = mst_resp[0];

  axil_interconnect #(.N_MASTERS(2)) u_xbar (
    .clk_i      (clk_be),
    .rst_ni     (be_rst_n),
    .mst_req_i  (mst_req),
    .mst_resp_o (mst_resp),
    .slv_req_o  (slv_req),
    .slv_resp_i (slv_resp)
  );

  jtag_debug u_dbg (
    .tck_i, .tms_i, .tdi_i, .trst_ni, .tdo_o,
    .clk_i      (mod_clk[GATE_DBG]),
    .rst_ni     (be_rst_n),
    .bus_req_o  (dbg_req),
    .bus_resp_i (mst_resp[1])
  );

  axil_sram #(.WORDS(MEM_W)) u_pmem (
    .clk_i      (mod_clk[GATE_PMEM]),
    .rst_ni     (be_rst_n),
    .bus_req_i  (slv_req[SLV_PMEM]),
    .bus_resp_o (slv_resp[SLV_PMEM])
  );

  axil_sram #(.WORDS(MEM_W)) u_dmem (
    .clk_i      (mod_clk[GATE_DMEM]),
    .rst_ni     (be_rst_n),
    .bus_req_i  (slv_req[SLV_DMEM]),
    .bus_resp_o (slv_resp[SLV_DMEM])
  );

  sys_config u_sys (
    .clk_i       (clk_be),
    .rst_ni      (be_rst_n),
    .bus_req_i   (slv_req[SLV_SYS]),
    .bus_resp_o  (slv_resp[SLV_SYS]),
    .clk_en_o    (sys_mod_en),
    .clk_div_o   (sys_clk_div),
    .sleep_req_o (sys_sleep),
    .pm_state_i  (pm_state),
    .pm_wakes_i  (pm_wakes)
  );

  axil_gpio #(.N_GPIO(N_GPIO)) u_gpio (
    .clk_i      (mod_clk[GATE_GPIO]),
    .rst_ni,
    .bus_req_i  (gpio_req),
    .bus_resp_o (gpio_resp),
    .gpio_i,
    .gpio_o,
    .gpio_oe_o
  );
endmodule
