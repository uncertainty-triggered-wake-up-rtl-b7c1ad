// tb_axil_sram -- full-size (1 Mb) memory: random word and byte-strobe
// writes checked against a shadow copy, first and last word, and the read
// and write latency through the AXI-Lite port.
//
// Runs the memory at its full 32768-word default.  The 1 Mb size follows
// the paper; the one-cycle latency is this design's own.
module tb_axil_sram;
  import soc_pkg::*;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;   // a falling edge, so the asynchronous resets act at once
  always #5 clk = ~clk;
  axil_req_t  req;
  axil_resp_t resp;
  int checks = 0, failures = 0;
  logic [31:0] shadow [int];

  axil_sram dut (.clk_i(clk), .rst_ni(rst_n), .bus_req_i(req), .bus_resp_o(resp));
  axil_master_bfm bfm (.clk(clk), .req(req), .resp(resp));

  initial begin
    logic [31:0] d, a, v; logic [1:0] r; int c; logic [3:0] s;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    // corners of the 32768-word array
    for (int k = 0; k < 2; k++) begin
      a = k == 0 ? 32'h0 : 32'((MEM_WORDS - 1) * 4);
      bfm.write(a, 32'hC0DE_0000 + k, 4'hF, r, c); shadow[a] = 32'hC0DE_0000 + k;
      checks++;
      if (c != 2 || r != RESP_OKAY) begin failures++; $display("FAIL write took %0d cycles resp %0d", c, r); end
    end
    for (int i = 0; i < 400; i++) begin
      a = 32'($urandom_range(0, MEM_WORDS - 1)) << 2;
      v = $urandom;
      s = shadow.exists(a) ? 4'($urandom_range(1, 15)) : 4'hF;
      bfm.write(a, v, s, r, c);
      if (!shadow.exists(a)) shadow[a] = 0;
      for (int b = 0; b < 4; b++) if (s[b]) shadow[a][8*b +: 8] = v[8*b +: 8];
    end
    foreach (shadow[k]) begin
      bfm.read(k, d, r, c);
      checks++;
      if (d !== shadow[k]) begin failures++; $display("FAIL addr %h read %h expected %h", k, d, shadow[k]); end
      checks++;
      if (c != 2) begin failures++; $display("FAIL read took %0d cycles", c); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end


  initial begin
    #2000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
