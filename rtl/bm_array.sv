// bm_array -- digital model of one memristor array of the Bayesian machine.
//
// Each array serves one (feature, class) pair.  It stores the LEVELS
// log-likelihood codes log P(F_i = level | class), LL_W bits each, as one
// LEVELS*LL_W-bit word (8 x 8 = 64 bits, the array word size the paper
// gives).  During inference the quantized feature value selects one code;
// the selected code is latched in the read register (the sense-amplifier
// output) on the cycle rd_en_i is high, so code_o is valid one cycle later
// and held until the next read.
//
// Programming writes the word with a per-code enable mask, which stands for
// the row/column-decoded SET/RESET pulses of the 2T2R cells; the cells, the
// precharge sense amplifiers and the level shifters are analog and are not
// modelled: a stored bit reads back exactly.  word_o returns the whole word
// for program-verify reads.  The stored word is non-volatile in the real
// part, so it has no reset; contents are defined by programming.
module bm_array #(
  parameter int unsigned LEVELS = 8,   // quantization levels of the feature (paper: 8)
  parameter int unsigned LL_W   = 8    // log-likelihood code width (paper: 8)
) (
  input  logic                     clk_i,
  input  logic                     rst_ni,
  // inference read
  input  logic                     rd_en_i,
  input  logic [$clog2(LEVELS)-1:0] level_i,
  output logic [LL_W-1:0]          code_o,
  // programming
  input  logic                     prog_en_i,
  input  logic [LEVELS-1:0]        prog_mask_i,   // one bit per code
  input  logic [LEVELS*LL_W-1:0]   prog_word_i,
  output logic [LEVELS*LL_W-1:0]   word_o
);
  logic [LEVELS-1:0][LL_W-1:0] cells;

  always_ff @(posedge clk_i) begin
    if (prog_en_i) begin
      for (int unsigned l = 0; l < LEVELS; l++) begin
        if (prog_mask_i[l]) cells[l] <= prog_word_i[l*LL_W +: LL_W];
      end
    end
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni)      code_o <= '0;
    else if (rd_en_i) code_o <= cells[level_i];
  end

  assign word_o = cells;
endmodule
