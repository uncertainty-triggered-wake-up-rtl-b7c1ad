// tb_axil_interconnect -- two masters issue random reads and writes at the
// same time to five memory slaves; every read must return what that
// address last received, each slave must see only its own addresses, an
// unmapped address must get DECERR, and an uncontended read must take one
// cycle more than the slave alone (3 cycles).
//
// Clock period 10 ns; two axil_master_bfm instances and five small
// axil_sram slaves.  The bus type follows the paper (AXI-Lite); the
// address map, arbitration and latency are this design's own.
module tb_axil_interconnect;
  import soc_pkg::*;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;   // a falling edge, so the asynchronous resets act at once
  always #5 clk = ~clk;
  axil_req_t  [1:0] mreq;
  axil_resp_t [1:0] mresp;
  axil_req_t  [4:0] sreq;
  axil_resp_t [4:0] sresp;
  int checks = 0, failures = 0;
  logic [31:0] base [5] = '{PMEM_BASE, DMEM_BASE, FE_BASE, SYS_BASE, GPIO_BASE};

  axil_interconnect dut (.clk_i(clk), .rst_ni(rst_n), .mst_req_i(mreq), .mst_resp_o(mresp),
                         .slv_req_o(sreq), .slv_resp_i(sresp));
  for (genvar s = 0; s < 5; s++) begin : g_slv
    axil_sram #(.WORDS(64)) u_mem (.clk_i(clk), .rst_ni(rst_n), .bus_req_i(sreq[s]), .bus_resp_o(sresp[s]));
  end
  axil_master_bfm m0 (.clk(clk), .req(mreq[0]), .resp(mresp[0]));
  axil_master_bfm m1 (.clk(clk), .req(mreq[1]), .resp(mresp[1]));

  // each master owns half of every slave's 64 words
  task automatic traffic(int m, int n);
    logic [31:0] shadow [5][32];
    logic [31:0] d, a; logic [1:0] r; int c, s, w;
    for (int i = 0; i < 5; i++) for (int j = 0; j < 32; j++) shadow[i][j] = 32'hFFFF_FFFF;
    for (int i = 0; i < n; i++) begin
      s = $urandom_range(0, 4); w = $urandom_range(0, 31);
      a = base[s] + 32'((m * 32 + w) * 4);
      if ($urandom_range(0, 1) == 0 || shadow[s][w] === 32'hFFFF_FFFF) begin
        d = $urandom;
        if (m == 0) m0.write(a, d, 4'hF, r, c); else m1.write(a, d, 4'hF, r, c);
        shadow[s][w] = d;
      end else begin
        if (m == 0) m0.read(a, d, r, c); else m1.read(a, d, r, c);
        checks++;
        if (d !== shadow[s][w] || r != RESP_OKAY) begin
          failures++;
          $display("FAIL master %0d addr %h read %h expected %h", m, a, d, shadow[s][w]);
        end
      end
    end
  endtask

  // slaves must only see addresses of their own region
  always @(posedge clk) begin
    for (int s = 0; s < 5; s++) begin
      if (sreq[s].arvalid && (sreq[s].araddr & 32'hF000_0000) != base[s]) begin
        failures++; $display("FAIL slave %0d got read address %h", s, sreq[s].araddr);
      end
      if (sreq[s].awvalid && (sreq[s].awaddr & 32'hF000_0000) != base[s]) begin
        failures++; $display("FAIL slave %0d got write address %h", s, sreq[s].awaddr);
      end
    end
  end

  initial begin
    logic [31:0] d; logic [1:0] r; int c;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    m0.write(DMEM_BASE + 4, 32'h1234_5678, 4'hF, r, c);
    m0.read(DMEM_BASE + 4, d, r, c);
    checks++;
    if (d !== 32'h1234_5678 || c != 3) begin failures++; $display("FAIL single read %h in %0d cycles", d, c); end
    m1.write(32'h5000_0000, 0, 4'hF, r, c);
    checks++;
    if (r != RESP_DECERR) begin failures++; $display("FAIL unmapped write resp %0d", r); end
    m0.read(32'h9000_0010, d, r, c);
    checks++;
    if (r != RESP_DECERR) begin failures++; $display("FAIL unmapped read resp %0d", r); end
    fork
      traffic(0, 400);
      traffic(1, 400);
    join
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #3000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
