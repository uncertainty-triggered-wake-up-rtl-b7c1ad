// bayesian_machine -- logarithmic Bayesian classifier of the front end.
//
// N_FEATURES x N_CLASSES memristor arrays (4 x 4 = 16) hold the log
// likelihoods log P(F_i | class).  A start pulse latches the quantized
// features; each feature column addresses its arrays, one per class, and
// every class row sums its N_FEATURES codes through an adder chain that runs
// from the first feature column to the last ("previous column -> adder ->
// next column").  The result is the class log-score, i.e. the code of
// P(class | F_1..F_4) up to a common constant (the class prior is uniform on
// the balanced training set and is not stored).  Smaller is more likely.
//
// Timing: start_i (cycle 0) -> arrays read, codes registered (cycle 1) ->
// adder chains settle and scores are registered, done_o high for one cycle
// (cycle 2).  scores_o holds until the next inference.
//
// The adders saturate: the all-ones code (probability zero) is absorbing,
// and an ordinary sum that would reach all-ones clips one below it.  With
// SCORE_W = 10 four 8-bit codes never clip, so only a stored or read-back
// all-ones code can mark a class invalid.  The array/adder organisation
// follows the paper's figure of the die; the two-cycle timing, the
// saturation rule and the zero code are this implementation's choices.
module bayesian_machine
  import soc_pkg::*;
#(
  parameter int unsigned NF      = N_FEATURES,
  parameter int unsigned NC      = N_CLASSES,
  parameter int unsigned LEVELS  = N_LEVELS,
  parameter int unsigned LLW     = LL_W,
  parameter int unsigned SW      = SCORE_W
) (
  input  logic                          clk_i,
  input  logic                          rst_ni,
  // inference
  input  logic                          start_i,
  input  logic [NF-1:0][$clog2(LEVELS)-1:0] features_i,
  output logic                          done_o,
  output logic [NC-1:0][SW-1:0]         scores_o,
  // programming: one array word, with a per-code mask
  input  logic                          prog_en_i,
  input  logic [$clog2(NC)-1:0]         prog_class_i,
  input  logic [$clog2(NF)-1:0]         prog_feature_i,
  input  logic [LEVELS-1:0]             prog_mask_i,
  input  logic [LEVELS*LLW-1:0]         prog_word_i,
  output logic [LEVELS*LLW-1:0]         prog_rdword_o
);
  localparam logic [SW-1:0] ZERO = '1;

  logic [NC-1:0][NF-1:0][LLW-1:0]        codes;
  logic [NC-1:0][NF-1:0][LEVELS*LLW-1:0] words;
  logic                                  rd_q, sum_q;

  // Saturating log-domain addition with an absorbing zero-probability code.
  function automatic logic [SW-1:0] ll_add(logic [SW-1:0] acc, logic [LLW-1:0] code);
    logic [SW:0] s;
    if (acc == ZERO || code == {LLW{1'b1}}) return ZERO;
    s = {1'b0, acc} + SW'(code);
    if (s >= {1'b0, ZERO}) return ZERO - 1'b1;
    return s[SW-1:0];
  endfunction

  for (genvar c = 0; c < NC; c++) begin : g_class
    for (genvar f = 0; f < NF; f++) begin : g_feat
      bm_array #(.LEVELS(LEVELS), .LL_W(LLW)) u_array (
        .clk_i,
        .rst_ni,
        .rd_en_i     (start_i),
        .level_i     (features_i[f]),
        .code_o      (codes[c][f]),
        .prog_en_i   (prog_en_i && prog_class_i == c && prog_feature_i == f),
        .prog_mask_i,
        .prog_word_i,
        .word_o      (words[c][f])
      );
    end
  end

  // Adder chain along each class row.
  logic [NC-1:0][NF:0][SW-1:0] chain;
  always_comb begin
    for (int unsigned c = 0; c < NC; c++) begin
      chain[c][0] = '0;
      for (int unsigned f = 0; f < NF; f++) chain[c][f+1] = ll_add(chain[c][f], codes[c][f]);
    end
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      rd_q     <= 1'b0;
      sum_q    <= 1'b0;
      scores_o <= '0;
    end else begin
      rd_q  <= start_i;
      sum_q <= rd_q;
      if (rd_q) begin
        for (int unsigned c = 0; c < NC; c++) scores_o[c] <= chain[c][NF];
      end
    end
  end

  assign done_o        = sum_q;
  assign prog_rdword_o = words[prog_class_i][prog_feature_i];
endmodule
