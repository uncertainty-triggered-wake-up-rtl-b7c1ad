// fe_dma -- small DMA engine that fetches one input record from the sensor.
//
// On start_i it pulses req_o to ask the sensor interface for the next input
// and then accepts N_WORDS 32-bit words on a valid/ready stream.  Each word
// is handed to the buffer owner as a (wr_o, wr_idx_o, wr_data_o) write and
// done_o pulses for one cycle after the last one.  Record layout (a choice
// of this implementation): word 0 holds the front-end features, 3 bits each
// in bits [4i+2:4i]; words 1..8 hold the 32 int8 MLP features, little
// endian.  ready is high while a transfer is open, so a word arriving every
// cycle moves at one word per cycle: N_WORDS + 1 cycles from start to done.
// The paper says only that the front-end controller fetches the
// Bayesian-machine inputs through a small DMA engine.
module fe_dma #(
  parameter int unsigned N_WORDS = 9    // 1 feature word + 32 bytes of MLP features
) (
  input  logic                         clk_i,
  input  logic                         rst_ni,
  input  logic                         start_i,
  output logic                         done_o,
  // sensor stream
  output logic                         req_o,
  input  logic                         valid_i,
  input  logic [31:0]                  data_i,
  output logic                         ready_o,
  // buffer write port
  output logic                         wr_o,
  output logic [$clog2(N_WORDS)-1:0]   wr_idx_o,
  output logic [31:0]                  wr_data_o
);
  logic [$clog2(N_WORDS)-1:0] cnt_q;
  logic                       busy_q;

  assign ready_o   = busy_q;
  assign wr_o      = busy_q & valid_i;
  assign wr_idx_o  = cnt_q;
  assign wr_data_o = data_i;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      busy_q <= 1'b0;
      cnt_q  <= '0;
      done_o <= 1'b0;
      req_o  <= 1'b0;
    end else begin
      done_o <= 1'b0;
      req_o  <= 1'b0;
      if (!busy_q) begin
        if (start_i) begin
          busy_q <= 1'b1;
          cnt_q  <= '0;
          req_o  <= 1'b1;
        end
      end else if (valid_i) begin
        if (cnt_q == $clog2(N_WORDS)'(N_WORDS - 1)) begin
          busy_q <= 1'b0;
          done_o <= 1'b1;
        end else begin
          cnt_q <= cnt_q + 1'b1;
        end
      end
    end
  end
endmodule
