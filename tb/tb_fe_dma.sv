// tb_fe_dma -- streams records with random gaps and checks the request
// pulse, the buffer writes (index and data), done, and the one-word-per-
// cycle rate when the sensor never pauses.
//
// Clock period 10 ns, the sensor model drives on the falling edge.  The
// record format and handshake are this design's own; the paper only names
// the DMA engine.
module tb_fe_dma;
  localparam int N = 9;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;   // a falling edge, so the asynchronous resets act at once
  always #5 clk = ~clk;

  logic        start, done, req, valid, ready, wr;
  logic [3:0]  idx;
  logic [31:0] data, wdata;
  logic [31:0] got [N];
  int checks = 0, failures = 0, reqs = 0, nwr = 0;

  fe_dma #(.N_WORDS(N)) dut (
    .clk_i(clk), .rst_ni(rst_n), .start_i(start),  .done_o(done),
    .req_o(req), .valid_i(valid), .data_i(data), .ready_o(ready),
    .wr_o(wr), .wr_idx_o(idx), .wr_data_o(wdata)
  );

  always @(posedge clk) begin
    if (req) reqs++;
    if (wr) begin got[idx] <= wdata; nwr++; end
  end

  task automatic transfer(int gap_pct, int base, output int cycles);
    int sent;
    @(posedge clk); #1 start = 1;
    @(posedge clk); #1 start = 0;
    cycles = 1; sent = 0;
    while (!done) begin
      if (sent < N && ready && ($urandom_range(0, 99) >= gap_pct)) begin
        valid = 1; data = 32'(base + sent * 7);
      end else valid = 0;
      @(negedge clk);
      if (valid && ready) sent++;
      @(posedge clk); #1; cycles++;
      valid = 0;
      if (cycles > 500) break;
    end
  endtask

  initial begin
    int cyc, r0, w0;
    start = 0; valid = 0; data = 0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    for (int t = 0; t < 20; t++) begin
      r0 = reqs; w0 = nwr;
      transfer(t == 0 ? 0 : 40, 1000 * t, cyc);
      @(posedge clk);
      checks++;
      if (reqs - r0 != 1) begin failures++; $display("FAIL transfer %0d: %0d requests", t, reqs - r0); end
      checks++;
      if (nwr - w0 != N) begin failures++; $display("FAIL transfer %0d: %0d writes", t, nwr - w0); end
      for (int i = 0; i < N; i++) begin
        checks++;
        if (got[i] !== 32'(1000 * t + i * 7)) begin
          failures++; $display("FAIL transfer %0d word %0d = %0d", t, i, got[i]);
        end
      end
      if (t == 0) begin
        checks++;
        if (cyc != N + 1) begin failures++; $display("FAIL back-to-back transfer took %0d cycles", cyc); end
      end
    end
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
