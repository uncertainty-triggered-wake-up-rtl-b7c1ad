// tb_wake_policy -- compares the policy against an independent reference
// on directed cases (ties, zero codes) and random score sets.
//
// Purely combinational: inputs are applied and the outputs checked after
// 1 ns.  The three wake criteria follow the paper; the tie-breaking order
// and the enables are this design's own.
module tb_wake_policy;
  import soc_pkg::*;
  logic [3:0][9:0] scores;
  logic            en_abn, en_unc;
  logic [1:0]      cls;
  wake_cause_t     cause;
  logic            wake;
  int checks = 0, failures = 0;

  wake_policy dut (.scores_i(scores), .en_abnormal_i(en_abn), .en_uncertain_i(en_unc),
                   .class_o(cls), .cause_o(cause), .wake_o(wake));

  // reference: argmin with lowest index on ties
  task automatic check_one(string what);
    int best; logic abn, amb, inv, w;
    best = 0;
    if (scores[1] < scores[best]) best = 1;
    if (scores[2] < scores[best]) best = 2;
    if (scores[3] < scores[best]) best = 3;
    abn = best != 0;
    amb = best == 0 && (scores[1] == scores[0] || scores[2] == scores[0] || scores[3] == scores[0]);
    inv = scores[0] == 10'h3FF || scores[1] == 10'h3FF || scores[2] == 10'h3FF || scores[3] == 10'h3FF;
    w = (en_abn && abn) || (en_unc && (amb || inv));
    #1;
    checks++;
    if (cls !== 2'(best) || cause.abnormal !== abn || cause.ambiguous !== amb ||
        cause.invalid !== inv || wake !== w) begin
      failures++;
      $display("FAIL %s: scores %p got cls=%0d cause=%b wake=%b expected cls=%0d %b%b%b wake=%b",
               what, scores, cls, cause, wake, best, inv, amb, abn, w);
    end
  endtask

  initial begin
    en_abn = 1; en_unc = 1;
    scores = {10'd50, 10'd40, 10'd30, 10'd10}; check_one("clear normal");
    if (wake !== 1'b0) begin failures++; $display("FAIL clear normal woke"); end
    checks++;
    scores = {10'd50, 10'd5, 10'd30, 10'd10};  check_one("abnormal R");
    if (wake !== 1'b1 || cls !== 2'd2) begin failures++; $display("FAIL abnormal R"); end
    checks++;
    scores = {10'd50, 10'd40, 10'd10, 10'd10}; check_one("tie N/L");
    if (wake !== 1'b1 || cls !== 2'd0 || !cause.ambiguous) begin failures++; $display("FAIL tie"); end
    checks++;
    scores = {10'd10, 10'd40, 10'd20, 10'd10}; check_one("tie N/P");
    scores = {10'd5, 10'd5, 10'd40, 10'd10};   check_one("tie L/P abnormal");
    scores = {10'h3FF, 10'd40, 10'd30, 10'd10}; check_one("zero P");
    if (wake !== 1'b1 || !cause.invalid || cls !== 2'd0) begin failures++; $display("FAIL zero"); end
    checks++;
    scores = {4{10'h3FF}}; check_one("all zero");
    en_unc = 0;
    scores = {10'h3FF, 10'd40, 10'd30, 10'd10}; check_one("zero, uncertainty off");
    scores = {10'd50, 10'd40, 10'd10, 10'd10}; check_one("tie, uncertainty off");
    en_abn = 0;
    scores = {10'd50, 10'd5, 10'd30, 10'd10};  check_one("abnormal, all off");
    for (int i = 0; i < 2000; i++) begin
      en_abn = 1'($urandom); en_unc = 1'($urandom);
      for (int c = 0; c < 4; c++) begin
        case ($urandom_range(0, 9))
          0:       scores[c] = 10'h3FF;
          1, 2:    scores[c] = scores[0];
          default: scores[c] = 10'($urandom_range(0, 40));
        endcase
      end
      check_one($sformatf("random %0d", i));
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
