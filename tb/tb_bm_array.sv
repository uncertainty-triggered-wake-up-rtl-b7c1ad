// tb_bm_array -- checks programming with code masks, the one-cycle
// registered read selected by the feature level, and the verify word.
//
// Drives the array ports directly, clock period 10 ns.  Eight 8-bit codes
// per array follow the paper; the read register and the masked write are
// this design's own.
module tb_bm_array;
  localparam int LEVELS = 8, LL_W = 8;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;   // a falling edge, so the asynchronous resets act at once
  always #5 clk = ~clk;

  logic                   rd_en, prog_en;
  logic [2:0]             level;
  logic [LL_W-1:0]        code;
  logic [LEVELS-1:0]      mask;
  logic [LEVELS*LL_W-1:0] pword, word;
  logic [LEVELS-1:0][LL_W-1:0] ref_cells;

  int checks = 0, failures = 0;

  bm_array #(.LEVELS(LEVELS), .LL_W(LL_W)) dut (
    .clk_i(clk), .rst_ni(rst_n), .rd_en_i(rd_en), .level_i(level), .code_o(code),
    .prog_en_i(prog_en), .prog_mask_i(mask), .prog_word_i(pword), .word_o(word)
  );

  task automatic check(input logic [63:0] got, exp, input string what);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %h expected %h", what, got, exp);
    end
  endtask

  initial begin
    #20000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rd_en = 0; prog_en = 0; level = 0; mask = 0; pword = 0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    // program all codes
    @(posedge clk); #1;
    for (int l = 0; l < LEVELS; l++) ref_cells[l] = 8'(8'h10 * l + l + 3);
    pword = ref_cells; mask = '1; prog_en = 1;
    @(posedge clk); #1 prog_en = 0;
    check(word, ref_cells, "full program");
    // partial reprogramming: only codes 2 and 5
    pword = {8{8'hA5}}; mask = 8'b0010_0100; prog_en = 1;
    @(posedge clk); #1 prog_en = 0;
    ref_cells[2] = 8'hA5; ref_cells[5] = 8'hA5;
    check(word, ref_cells, "masked program");
    // reads: code appears one cycle after rd_en, then holds
    for (int l = 0; l < LEVELS; l++) begin
      level = 3'(7 - l); rd_en = 1;
      @(posedge clk); #1 rd_en = 0;
      check(64'(code), 64'(ref_cells[7 - l]), $sformatf("read level %0d", 7 - l));
      level = 3'(l);
      @(posedge clk); #1;
      check(64'(code), 64'(ref_cells[7 - l]), "held without rd_en");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
