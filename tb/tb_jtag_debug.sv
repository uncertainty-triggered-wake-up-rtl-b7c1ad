// tb_jtag_debug -- reads IDCODE through the TAP, then writes and reads a
// memory through the DBG bus-access register (TCK asynchronous to the bus
// clock), checks the error bit on an unmapped address via an interconnect,
// and that BYPASS is a one-bit register.
//
// Bus clock period 10 ns, TCK period 34 ns (unrelated to the bus clock).  The
// paper only names the JTAG interface; the DBG/STAT registers are this
// design's own.
module tb_jtag_debug;
  import soc_pkg::*;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;   // a falling edge, so the asynchronous resets act at once
  always #5 clk = ~clk;
  logic tck, tms, tdi, trst_n, tdo;
  axil_req_t  dreq;
  axil_resp_t dresp;
  axil_req_t  [1:0] mreq;
  axil_resp_t [1:0] mresp;
  axil_req_t  [4:0] sreq;
  axil_resp_t [4:0] sresp;
  int checks = 0, failures = 0;

  jtag_debug dut (.tck_i(tck), .tms_i(tms), .tdi_i(tdi), .trst_ni(trst_n), .tdo_o(tdo),
                  .clk_i(clk), .rst_ni(rst_n), .bus_req_o(dreq), .bus_resp_i(dresp));
  jtag_host #(.HALF(17)) host (.tck(tck), .tms(tms), .tdi(tdi), .trst_n(trst_n), .tdo(tdo));

  assign mreq[0] = '0;
  assign mreq[1] = dreq;
  assign dresp   = mresp[1];
  axil_interconnect u_xbar (.clk_i(clk), .rst_ni(rst_n), .mst_req_i(mreq), .mst_resp_o(mresp),
                            .slv_req_o(sreq), .slv_resp_i(sresp));
  for (genvar s = 0; s < 4; s++) begin : g_slv
    axil_sram #(.WORDS(64)) u_mem (.clk_i(clk), .rst_ni(rst_n), .bus_req_i(sreq[s]), .bus_resp_o(sresp[s]));
  end
  assign sresp[4] = '0;   // GPIO slot left empty: never addressed here

  initial begin
    logic [31:0] id, d, exp [16]; logic e; logic [64:0] o;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    host.reset_tap();
    host.read_idcode(id);
    checks++;
    if (id !== 32'h1BA7_E5A1) begin failures++; $display("FAIL IDCODE %h", id); end
    // bypass: a 1 shifted in appears after one bit
    host.shift_ir(4'b1111);
    host.shift_dr(65'b10, 3, o);
    checks++;
    if (o[2:0] !== 3'b100) begin failures++; $display("FAIL bypass %b", o[2:0]); end
    for (int i = 0; i < 16; i++) begin
      exp[i] = $urandom;
      host.dbg_write(DMEM_BASE + 32'(4 * i), exp[i]);
    end
    for (int i = 15; i >= 0; i--) begin
      host.dbg_read(DMEM_BASE + 32'(4 * i), d);
      checks++;
      if (d !== exp[i]) begin failures++; $display("FAIL word %0d read %h expected %h", i, d, exp[i]); end
    end
    host.dbg_access(1'b0, 32'h7000_0000, 0, d, e);
    checks++;
    if (e !== 1'b1) begin failures++; $display("FAIL no error bit on unmapped read"); end
    host.dbg_access(1'b0, PMEM_BASE, 0, d, e);
    checks++;
    if (e !== 1'b0) begin failures++; $display("FAIL error bit on good read"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #5000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
