// wake_policy -- front-end decision and wake-up criterion.
//
// Purely combinational.  From the N_CLASSES log-scores (smaller = more
// probable) it picks the winning class; on equal scores the lower class
// index wins, so a tie between the normal class and an abnormal one yields
// "normal", which is exactly the case the ambiguity test looks for.
// It then raises wake_o when
//   * abnormal : the winner is an abnormal class (L, R or P), and wake on
//                abnormal is enabled;
//   * ambiguous: the winner is normal but an abnormal class has the same
//                score, and wake on uncertainty is enabled;
//   * invalid  : some class score is the zero-probability code, and wake on
//                uncertainty is enabled.
// The three criteria are the paper's policy.  The two enable inputs (to run
// the front end alone or with the full policy) and the tie-breaking order
// are this implementation's choices.
module wake_policy
  import soc_pkg::*;
#(
  parameter int unsigned NC = N_CLASSES,
  parameter int unsigned SW = SCORE_W
) (
  input  logic [NC-1:0][SW-1:0] scores_i,
  input  logic                  en_abnormal_i,
  input  logic                  en_uncertain_i,
  output logic [$clog2(NC)-1:0] class_o,
  output wake_cause_t           cause_o,   // conditions met, whatever the enables
  output logic                  wake_o
);
  localparam logic [SW-1:0] ZERO = '1;

  logic [SW-1:0] best;

  always_comb begin
    class_o = '0;
    best    = scores_i[0];
    for (int unsigned c = 1; c < NC; c++) begin
      if (scores_i[c] < best) begin
        best    = scores_i[c];
        class_o = c[$clog2(NC)-1:0];
      end
    end

    cause_o = '0;
    cause_o.abnormal = (class_o != '0);
    for (int unsigned c = 1; c < NC; c++) begin
      if (class_o == '0 && scores_i[c] == scores_i[0]) cause_o.ambiguous = 1'b1;
    end
    for (int unsigned c = 0; c < NC; c++) begin
      if (scores_i[c] == ZERO) cause_o.invalid = 1'b1;
    end

    wake_o = (en_abnormal_i  & cause_o.abnormal)
           | (en_uncertain_i & (cause_o.ambiguous | cause_o.invalid));
  end
endmodule
