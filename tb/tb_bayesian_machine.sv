// tb_bayesian_machine -- programs random log-likelihood tables into the 16
// arrays, runs random inputs and compares the four class scores with a
// reference sum (absorbing zero code, saturation), and checks that done
// comes exactly two cycles after start.
//
// Clock period 10 ns; default sizes (4 features, 4 classes, 8 levels,
// 8-bit codes), which follow the paper.  The two-cycle latency, the
// saturation and the zero code are this design's own.
module tb_bayesian_machine;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;   // a falling edge, so the asynchronous resets act at once
  always #5 clk = ~clk;

  logic             start, done, prog_en;
  logic [3:0][2:0]  feats;
  logic [3:0][9:0]  scores;
  logic [1:0]       pcls, pfeat;
  logic [7:0]       pmask;
  logic [63:0]      pword, prd;
  logic [7:0]       tab [4][4][8];   // [class][feature][level]
  int checks = 0, failures = 0;

  bayesian_machine dut (
    .clk_i(clk), .rst_ni(rst_n), .start_i(start), .features_i(feats), 
    .done_o(done), .scores_o(scores), .prog_en_i(prog_en), .prog_class_i(pcls),
    .prog_feature_i(pfeat), .prog_mask_i(pmask), .prog_word_i(pword), .prog_rdword_o(prd)
  );

  function automatic logic [9:0] ref_score(int c);
    logic [10:0] s;
    s = 0;
    for (int f = 0; f < 4; f++) begin
      if (s == 11'h3FF || tab[c][f][feats[f]] == 8'hFF) s = 11'h3FF;
      else begin
        s = s + 11'(tab[c][f][feats[f]]);
        if (s >= 11'h3FF) s = 11'h3FE;
      end
    end
    return s[9:0];
  endfunction

  task automatic program_all(int zero_pct);
    for (int c = 0; c < 4; c++) for (int f = 0; f < 4; f++) begin
      for (int l = 0; l < 8; l++) begin
        tab[c][f][l] = ($urandom_range(0, 99) < zero_pct) ? 8'hFF : 8'($urandom_range(0, 254));
        pword[8*l +: 8] = tab[c][f][l];
      end
      @(posedge clk); #1;
      pcls = 2'(c); pfeat = 2'(f); pmask = '1; prog_en = 1;
      @(posedge clk); #1 prog_en = 0;
      checks++;
      if (prd !== pword) begin failures++; $display("FAIL verify read c%0d f%0d", c, f); end
    end
  endtask

  task automatic infer_and_check(string what);
    int lat;
    @(posedge clk); #1;
    for (int f = 0; f < 4; f++) feats[f] = 3'($urandom_range(0, 7));
    start = 1;
    @(posedge clk); #1 start = 0;
    lat = 1;
    while (!done && lat < 10) begin @(posedge clk); #1 lat++; end
    checks++;
    if (lat != 2) begin failures++; $display("FAIL %s latency %0d", what, lat); end
    for (int c = 0; c < 4; c++) begin
      checks++;
      if (scores[c] !== ref_score(c)) begin
        failures++;
        $display("FAIL %s class %0d score %0d expected %0d", what, c, scores[c], ref_score(c));
      end
    end
  endtask

  initial begin
    start = 0; prog_en = 0; feats = '0; pcls = 0; pfeat = 0; pmask = 0; pword = 0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    program_all(0);
    for (int i = 0; i < 200; i++) infer_and_check($sformatf("clean %0d", i));
    program_all(5);
    for (int i = 0; i < 200; i++) infer_and_check($sformatf("with zeros %0d", i));
    // saturation: all codes 254 -> 4*254 = 1016 stays exact; masked update of one level
    for (int c = 0; c < 4; c++) for (int f = 0; f < 4; f++) for (int l = 0; l < 8; l++) tab[c][f][l] = 8'd254;
    for (int c = 0; c < 4; c++) for (int f = 0; f < 4; f++) begin
      @(posedge clk); #1;
      pcls = 2'(c); pfeat = 2'(f); pmask = '1; pword = {8{8'd254}}; prog_en = 1;
      @(posedge clk); #1 prog_en = 0;
    end
    infer_and_check("large codes");
    checks++;
    if (scores[0] !== 10'd1016) begin failures++; $display("FAIL 4x254 = %0d", scores[0]); end
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
