// soc_pkg -- types and constants shared by the wake-up SoC.
//
// The front end is a logarithmic Bayesian classifier with 4 quantized
// features and 4 beat classes (N, L, R, P); each (feature, class) pair owns
// one memristor array holding eight 8-bit log-likelihood codes, one per
// quantization level.  A code n stands for the probability p = B^(n/m)
// (B = 0.15, m = 16), so a smaller code means a more likely event and the
// best class is the one with the smallest summed score.
//
// The feature, class, level and code sizes follow the paper.  The score
// width, the code reserved for "probability zero", the AXI-Lite structs and
// the whole address/register map are choices of this implementation.
package soc_pkg;

  // ---------------------------------------------------------------- classifier
  localparam int unsigned N_FEATURES   = 4;   // quantized FFT features seen by the front end
  localparam int unsigned N_CLASSES    = 4;   // N, L, R, P
  localparam int unsigned N_LEVELS     = 8;   // quantization levels per feature
  localparam int unsigned FEAT_W       = $clog2(N_LEVELS);
  localparam int unsigned LL_W         = 8;   // log-likelihood code width
  localparam int unsigned SCORE_W      = 10;  // class score width: 4 x 254 fits below 2^10-1
  localparam int unsigned MLP_FEATURES = 32;  // int8 features buffered for the back-end MLP

  // The all-ones log code (and the all-ones score) stands for probability
  // zero ("minus infinity" in the log domain).  The smoothed model never
  // stores it, so a class score that carries it marks an invalid output.

  typedef enum logic [1:0] {
    CLS_N = 2'd0,   // normal beat
    CLS_L = 2'd1,   // left bundle branch block
    CLS_R = 2'd2,   // right bundle branch block
    CLS_P = 2'd3    // paced beat
  } beat_class_e;

  typedef logic [FEAT_W-1:0]  feat_t;
  typedef logic [SCORE_W-1:0] score_t;

  // Why a beat woke the back end.
  typedef struct packed {
    logic invalid;    // a class score decodes to probability zero
    logic ambiguous;  // normal winner tied with an abnormal class
    logic abnormal;   // winning class is L, R or P
  } wake_cause_t;

  // ---------------------------------------------------------------- AXI-Lite
  typedef struct packed {
    logic [31:0] awaddr;
    logic        awvalid;
    logic [31:0] wdata;
    logic [3:0]  wstrb;
    logic        wvalid;
    logic        bready;
    logic [31:0] araddr;
    logic        arvalid;
    logic        rready;
  } axil_req_t;

  typedef struct packed {
    logic        awready;
    logic        wready;
    logic [1:0]  bresp;
    logic        bvalid;
    logic        arready;
    logic [31:0] rdata;
    logic [1:0]  rresp;
    logic        rvalid;
  } axil_resp_t;

  localparam logic [1:0] RESP_OKAY   = 2'b00;
  localparam logic [1:0] RESP_DECERR = 2'b11;

  // ---------------------------------------------------------------- address map
  // Slaves are decoded on address bits [31:28].
  localparam int unsigned N_SLAVES = 5;
  localparam int unsigned SLV_PMEM = 0;  // program memory: firmware and MLP weights
  localparam int unsigned SLV_DMEM = 1;  // data memory: variables
  localparam int unsigned SLV_FE   = 2;  // front-end controller registers
  localparam int unsigned SLV_SYS  = 3;  // system configuration / power
  localparam int unsigned SLV_GPIO = 4;  // general-purpose I/O

  localparam logic [31:0] PMEM_BASE = 32'h0000_0000;
  localparam logic [31:0] DMEM_BASE = 32'h1000_0000;
  localparam logic [31:0] FE_BASE   = 32'h2000_0000;
  localparam logic [31:0] SYS_BASE  = 32'h3000_0000;
  localparam logic [31:0] GPIO_BASE = 32'h4000_0000;

  // 1 Mb memories: 32768 words of 32 bits.
  localparam int unsigned MEM_WORDS = 32768;

  // Front-end controller register offsets.
  localparam logic [11:0] FE_CTRL     = 12'h000;  // [0] monitor, [1] wake on abnormal, [2] wake on ambiguous/invalid
  localparam logic [11:0] FE_PERIOD   = 12'h004;  // monitoring period in cycles
  localparam logic [11:0] FE_STATUS   = 12'h008;  // see fe_controller
  localparam logic [11:0] FE_SCORES0  = 12'h00C;  // {score L, score N}
  localparam logic [11:0] FE_SCORES1  = 12'h010;  // {score P, score R}
  localparam logic [11:0] FE_DECISION = 12'h014;  // write: final class from the back end
  localparam logic [11:0] FE_LAST     = 12'h018;  // last final decision
  localparam logic [11:0] FE_BEATS    = 12'h01C;  // inputs classified
  localparam logic [11:0] FE_WAKES    = 12'h020;  // wake-ups raised
  localparam logic [11:0] FE_STALLS   = 12'h024;  // inputs delayed by a pending service
  localparam logic [11:0] FE_FEAT_BM  = 12'h028;  // the 4 front-end features of the current input
  localparam logic [11:0] FE_MLPBUF   = 12'h040;  // 8 words: 32 int8 MLP features
  localparam logic [11:0] FE_LLTAB    = 12'h100;  // 32 words: log-likelihood table

  // System configuration register offsets.
  localparam logic [11:0] SYS_CLK_EN  = 12'h000;  // per-module clock enables
  localparam logic [11:0] SYS_CLK_DIV = 12'h004;  // clock divider value (ratio = value + 1)
  localparam logic [11:0] SYS_SLEEP   = 12'h008;  // write 1: back end back to sleep
  localparam logic [11:0] SYS_PM      = 12'h00C;  // power-manager state, wake count

  // Gated back-end modules (bit positions in SYS_CLK_EN).
  localparam int unsigned N_GATED  = 5;
  localparam int unsigned GATE_CPU  = 0;
  localparam int unsigned GATE_PMEM = 1;
  localparam int unsigned GATE_DMEM = 2;
  localparam int unsigned GATE_GPIO = 3;
  localparam int unsigned GATE_DBG  = 4;

  typedef enum logic [2:0] {
    PM_SLEEP   = 3'd0,  // back end unpowered, clock stopped, reset held
    PM_PWR_UP  = 3'd1,  // power switch closed, waiting for the rail
    PM_CLK_UP  = 3'd2,  // clock running, reset still held
    PM_RUN     = 3'd3,  // back end executing
    PM_RST_DN  = 3'd4,  // reset asserted before gating
    PM_CLK_DN  = 3'd5,  // clock stopped
    PM_PWR_DN  = 3'd6   // power switch opening
  } pm_state_e;

endpackage
