// fe_controller -- always-on front-end control logic and wake-up controller.
//
// Runs the per-input loop of the monitoring system:
//   1. every PERIOD cycles (the monitoring period T_s) it asks the sensor
//      interface for the next input and fetches it with the fe_dma engine:
//      the 4 front-end features go to the Bayesian machine, the 32 MLP
//      features stay in an always-on buffer for the back end;
//   2. it starts the Bayesian machine and waits for the class scores;
//   3. it applies wake_policy to the scores: a beat that does not trigger is
//      finalized locally with the front-end class (final_valid_o pulses with
//      final_by_backend_o = 0);
//   4. a beat that triggers sets the wake flag, records the cause and pulses
//      wake_req_o to the power manager.  The firmware reads STATUS after its
//      reset to tell a wake-up from a true start-up, reads SCORES and the
//      MLP buffer, and writes its class to DECISION, which finalizes the
//      beat (final_by_backend_o = 1) and clears the flag.
// While a wake-up is being served the buffer must not be overwritten, so an
// input that falls due is held back (a stall, counted in STALLS) until
// DECISION is written; the timer keeps running.
//
// Registers (word offsets from the block base, see soc_pkg):
//   CTRL     rw [0] monitoring on, [1] wake on abnormal, [2] wake on ambiguous/invalid
//   PERIOD   rw monitoring period in clock cycles (minimum 16)
//   STATUS   ro [0] wake flag, [1] abnormal, [2] ambiguous, [3] invalid,
//               [5:4] front-end class, [8] busy, [9] input held back
//   SCORES0  ro {6'b0, score L, 6'b0, score N}; SCORES1 likewise {P, R}
//   DECISION wo [1:0] final class
//   LAST     ro [1:0] last final class, [8] it came from the back end
//   BEATS/WAKES/STALLS ro counters;  FEAT_BM ro the current feature word
//   MLPBUF   ro 8 words of int8 features
//   LLTAB    rw 32 words: word {class, feature, half} holds codes
//            4*half..4*half+3 of that array, one byte each, byte 0 first
// The bus side is an AXI-Lite slave clocked with the same clock.  In the
// SoC both this clock and the faster back-end clock are gated copies of one
// root, and a bridge lets a bus handshake happen only on an edge the two
// share, so no synchronizers are needed.
//
// The loop, the buffered MLP features, the reset-based wake and the status
// read-back follow the paper.  The register map, the record format, the
// stall rule and all widths are choices of this implementation.
module fe_controller
  import soc_pkg::*;
#(
  parameter int unsigned PERIOD_RESET = 32'd2000,  // monitoring period after reset, in cycles
  parameter int unsigned REC_WORDS    = 1 + MLP_FEATURES / 4
) (
  input  logic                       clk_i,
  input  logic                       rst_ni,
  // AXI-Lite register port
  input  axil_req_t                  bus_req_i,
  output axil_resp_t                 bus_resp_o,
  // sensor stream (through the DMA)
  output logic                       sensor_req_o,
  input  logic                       sensor_valid_i,
  input  logic [31:0]                sensor_data_i,
  output logic                       sensor_ready_o,
  // Bayesian machine
  output logic                       bm_start_o,
  output logic [N_FEATURES-1:0][FEAT_W-1:0] bm_features_o,
  input  logic                       bm_done_i,
  input  logic [N_CLASSES-1:0][SCORE_W-1:0] bm_scores_i,
  output logic                       bm_prog_en_o,
  output logic [1:0]                 bm_prog_class_o,
  output logic [1:0]                 bm_prog_feature_o,
  output logic [N_LEVELS-1:0]        bm_prog_mask_o,
  output logic [N_LEVELS*LL_W-1:0]   bm_prog_word_o,
  input  logic [N_LEVELS*LL_W-1:0]   bm_prog_rdword_i,
  // wake path
  output logic                       wake_req_o,
  // final decision of each input
  output logic                       final_valid_o,
  output logic [1:0]                 final_class_o,
  output logic                       final_by_backend_o
);
  typedef enum logic [1:0] {S_IDLE, S_FETCH, S_INFER, S_DECIDE} state_e;
  state_e state_q;

  // ------------------------------------------------------------ registers
  logic [2:0]   ctrl_q;
  logic [31:0]  period_q, timer_q;
  logic         due_q, wake_flag_q, held_q;
  wake_cause_t  cause_q;
  logic [1:0]   fe_class_q;
  logic [1:0]   last_class_q;
  logic         last_be_q;
  logic [31:0]  beats_q, wakes_q, stalls_q;
  logic [REC_WORDS-1:0][31:0] rec_q;   // word 0: features, 1..: MLP buffer

  // ------------------------------------------------------------ bus front
  logic        we, re, werr, rerr;
  logic [11:0] waddr, raddr;
  logic [31:0] wdata, rdata_q;
  logic [3:0]  wstrb;

  axil_to_reg #(.AW(12)) u_bus (
    .clk_i, .rst_ni,
    .req_i   (bus_req_i),
    .resp_o  (bus_resp_o),
    .we_o    (we),
    .waddr_o (waddr),
    .wdata_o (wdata),
    .wstrb_o (wstrb),
    .re_o    (re),
    .raddr_o (raddr),
    .rdata_i (rdata_q),
    .werr_i  (werr),
    .rerr_i  (rerr)
  );

  logic wr_ll, rd_ll;
  assign wr_ll = we && waddr[11:7] == FE_LLTAB[11:7];
  assign rd_ll = re && raddr[11:7] == FE_LLTAB[11:7];

  always_comb begin
    werr = 1'b0;
    if (!wr_ll && !(we && waddr inside {FE_CTRL, FE_PERIOD, FE_DECISION})) werr = 1'b1;
    rerr = 1'b0;
    if (!rd_ll && !(raddr inside {FE_CTRL, FE_PERIOD, FE_STATUS, FE_SCORES0, FE_SCORES1,
                                  FE_LAST, FE_BEATS, FE_WAKES, FE_STALLS, FE_FEAT_BM})
               && !(raddr >= FE_MLPBUF && raddr < FE_MLPBUF + 12'(4 * (REC_WORDS - 1))))
      rerr = 1'b1;
  end

  // log-likelihood table port of the Bayesian machine
  logic [6:2]  ll_addr;
  assign ll_addr           = wr_ll ? waddr[6:2] : raddr[6:2];
  assign bm_prog_en_o      = wr_ll;
  assign bm_prog_class_o   = ll_addr[6:5];
  assign bm_prog_feature_o = ll_addr[4:3];
  assign bm_prog_mask_o    = ll_addr[2] ? {wstrb, 4'b0} : {4'b0, wstrb};
  assign bm_prog_word_o    = {wdata, wdata};

  // ------------------------------------------------------------ datapath
  logic        dma_start, dma_done, dma_wr;
  logic [$clog2(REC_WORDS)-1:0] dma_idx;
  logic [31:0] dma_data;

  fe_dma #(.N_WORDS(REC_WORDS)) u_dma (
    .clk_i, .rst_ni,
    .start_i   (dma_start),
    .done_o    (dma_done),
    .req_o     (sensor_req_o),
    .valid_i   (sensor_valid_i),
    .data_i    (sensor_data_i),
    .ready_o   (sensor_ready_o),
    .wr_o      (dma_wr),
    .wr_idx_o  (dma_idx),
    .wr_data_o (dma_data)
  );

  for (genvar f = 0; f < N_FEATURES; f++) begin : g_feat
    assign bm_features_o[f] = rec_q[0][4*f +: FEAT_W];
  end

  logic [1:0]  pol_class;
  wake_cause_t pol_cause;
  logic        pol_wake;

  wake_policy #(.NC(N_CLASSES), .SW(SCORE_W)) u_policy (
    .scores_i       (bm_scores_i),
    .en_abnormal_i  (ctrl_q[1]),
    .en_uncertain_i (ctrl_q[2]),
    .class_o        (pol_class),
    .cause_o        (pol_cause),
    .wake_o         (pol_wake)
  );

  logic decision_wr;
  assign decision_wr = we && waddr == FE_DECISION && wake_flag_q;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      state_q            <= S_IDLE;
      ctrl_q             <= '0;
      period_q           <= PERIOD_RESET;
      timer_q            <= '0;
      due_q              <= 1'b0;
      held_q             <= 1'b0;
      wake_flag_q        <= 1'b0;
      cause_q            <= '0;
      fe_class_q         <= '0;
      last_class_q       <= '0;
      last_be_q          <= 1'b0;
      beats_q            <= '0;
      wakes_q            <= '0;
      stalls_q           <= '0;
      rec_q              <= '0;
      rdata_q            <= '0;
      dma_start          <= 1'b0;
      bm_start_o         <= 1'b0;
      wake_req_o         <= 1'b0;
      final_valid_o      <= 1'b0;
      final_class_o      <= '0;
      final_by_backend_o <= 1'b0;
    end else begin
      dma_start     <= 1'b0;
      bm_start_o    <= 1'b0;
      wake_req_o    <= 1'b0;
      final_valid_o <= 1'b0;

      // register writes
      if (we) begin
        case (waddr)
          FE_CTRL:   ctrl_q   <= wdata[2:0];
          FE_PERIOD: period_q <= (wdata < 32'd16) ? 32'd16 : wdata;
          default: ;
        endcase
      end

      // monitoring timer: one input falls due every period_q cycles
      if (!ctrl_q[0]) begin
        timer_q <= '0;
        due_q   <= 1'b0;
      end else if (timer_q >= period_q - 1) begin
        timer_q <= '0;
        due_q   <= 1'b1;
      end else begin
        timer_q <= timer_q + 1'b1;
      end

      // DMA writes into the record buffer
      if (dma_wr) rec_q[dma_idx] <= dma_data;

      // back end finished its service
      if (decision_wr) begin
        wake_flag_q        <= 1'b0;
        last_class_q       <= wdata[1:0];
        last_be_q          <= 1'b1;
        final_valid_o      <= 1'b1;
        final_class_o      <= wdata[1:0];
        final_by_backend_o <= 1'b1;
      end

      unique case (state_q)
        S_IDLE: begin
          if (due_q && ctrl_q[0]) begin
            if (wake_flag_q) begin
              if (!held_q) stalls_q <= stalls_q + 1'b1;
              held_q <= 1'b1;
            end else begin
              // a due flag raised this very cycle is consumed too
              due_q     <= 1'b0;
              held_q    <= 1'b0;
              dma_start <= 1'b1;
              state_q   <= S_FETCH;
            end
          end
        end
        S_FETCH: begin
          if (dma_done) begin
            bm_start_o <= 1'b1;
            state_q    <= S_INFER;
          end
        end
        S_INFER: begin
          if (bm_done_i) state_q <= S_DECIDE;
        end
        S_DECIDE: begin
          beats_q    <= beats_q + 1'b1;
          fe_class_q <= pol_class;
          cause_q    <= pol_cause;
          if (pol_wake) begin
            wake_flag_q <= 1'b1;
            wake_req_o  <= 1'b1;
            wakes_q     <= wakes_q + 1'b1;
          end else begin
            last_class_q       <= pol_class;
            last_be_q          <= 1'b0;
            final_valid_o      <= 1'b1;
            final_class_o      <= pol_class;
            final_by_backend_o <= 1'b0;
          end
          state_q <= S_IDLE;
        end
        default: state_q <= S_IDLE;
      endcase

      // register reads (data held until the next read)
      if (re) begin
        if (rd_ll) begin
          rdata_q <= raddr[2] ? bm_prog_rdword_i[63:32] : bm_prog_rdword_i[31:0];
        end else if (raddr >= FE_MLPBUF && raddr < FE_MLPBUF + 12'(4 * (REC_WORDS - 1))) begin
          rdata_q <= rec_q[1 + 32'(raddr[4:2])];
        end else begin
          case (raddr)
            FE_CTRL:    rdata_q <= {29'b0, ctrl_q};
            FE_PERIOD:  rdata_q <= period_q;
            FE_STATUS:  rdata_q <= {22'b0, held_q, state_q != S_IDLE, 2'b0, fe_class_q,
                                    cause_q.invalid, cause_q.ambiguous, cause_q.abnormal, wake_flag_q};
            FE_SCORES0: rdata_q <= {6'b0, bm_scores_i[1], 6'b0, bm_scores_i[0]};
            FE_SCORES1: rdata_q <= {6'b0, bm_scores_i[3], 6'b0, bm_scores_i[2]};
            FE_LAST:    rdata_q <= {23'b0, last_be_q, 6'b0, last_class_q};
            FE_BEATS:   rdata_q <= beats_q;
            FE_WAKES:   rdata_q <= wakes_q;
            FE_STALLS:  rdata_q <= stalls_q;
            FE_FEAT_BM: rdata_q <= rec_q[0];
            default:    rdata_q <= 32'hDEAD_BEEF;
          endcase
        end
      end
    end
  end
endmodule
