// tb_fe_controller -- the front-end loop with a real Bayesian machine:
// programs and reads back the log-likelihood table over the bus, streams
// random inputs from a sensor model, and for every input checks the local
// decision or the wake request against a reference model of the policy.
// For each wake-up it plays the firmware: STATUS, SCORES and the buffered
// MLP features must match, then it answers on DECISION after a delay long
// enough that the next input is held back (stall).  Also checks the
// monitoring period between sensor requests and the counters.
//
// Clock period 10 ns, monitoring period 60 cycles to keep the run short;
// the sensor model answers on the falling edge.  The per-input sequence
// follows the paper; register map, record format and stall rule are this
// design's own.
module tb_fe_controller;
  import soc_pkg::*;
  localparam int PERIOD = 60, NBEATS = 120;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;   // a falling edge, so the asynchronous resets act at once
  always #5 clk = ~clk;

  axil_req_t  req;
  axil_resp_t resp;
  logic s_req, s_valid, s_ready;
  logic [31:0] s_data;
  logic bm_start, bm_done, p_en, wake, fv, fbe;
  logic [3:0][2:0] feats;
  logic [3:0][9:0] scores;
  logic [1:0] p_cls, p_feat, fcls;
  logic [7:0] p_mask;
  logic [63:0] p_word, p_rd;

  fe_controller #(.PERIOD_RESET(1000)) dut (
    .clk_i(clk), .rst_ni(rst_n), .bus_req_i(req), .bus_resp_o(resp),
    .sensor_req_o(s_req), .sensor_valid_i(s_valid), .sensor_data_i(s_data), .sensor_ready_o(s_ready),
    .bm_start_o(bm_start), .bm_features_o(feats), .bm_done_i(bm_done), .bm_scores_i(scores),
    .bm_prog_en_o(p_en), .bm_prog_class_o(p_cls), .bm_prog_feature_o(p_feat),
    .bm_prog_mask_o(p_mask), .bm_prog_word_o(p_word), .bm_prog_rdword_i(p_rd),
    .wake_req_o(wake), .final_valid_o(fv), .final_class_o(fcls), .final_by_backend_o(fbe)
  );
  bayesian_machine u_bm (
    .clk_i(clk), .rst_ni(rst_n), .start_i(bm_start), .features_i(feats),
    .done_o(bm_done), .scores_o(scores), .prog_en_i(p_en), .prog_class_i(p_cls),
    .prog_feature_i(p_feat), .prog_mask_i(p_mask), .prog_word_i(p_word), .prog_rdword_o(p_rd)
  );
  axil_master_bfm bfm (.clk(clk), .req(req), .resp(resp));

  int checks = 0, failures = 0;
  logic [7:0]  tab [4][4][8];
  logic [31:0] rec [NBEATS][9];
  int sent = 0, nreq = 0, cyc = 0;
  int req_time [NBEATS + 1];
  bit is_local [NBEATS];

  task automatic check(input logic [31:0] got, exp, input string what);
    checks++;
    if (got !== exp) begin failures++; $display("FAIL %s: %h expected %h", what, got, exp); end
  endtask

  // reference front end
  function automatic logic [9:0] ref_score(int b, int c);
    int s; logic [7:0] code;
    s = 0;
    for (int f = 0; f < 4; f++) begin
      code = tab[c][f][rec[b][0][4*f +: 3]];
      if (s == 1023 || code == 8'hFF) s = 1023;
      else s = (s + code >= 1023) ? 1022 : s + code;
    end
    return 10'(s);
  endfunction

  always @(posedge clk) cyc++;

  // sensor model: one record per request, random gaps
  initial begin
    s_valid = 0; s_data = 0;
    forever begin
      @(negedge clk);
      if (s_req) begin
        if (nreq <= NBEATS) req_time[nreq] = cyc;
        nreq++;
        for (int w = 0; w < 9; w++) begin
          s_valid = 1; s_data = rec[sent][w];
          while (!s_ready) @(negedge clk);
          @(negedge clk);                  // accepted on the rising edge just passed
          s_valid = 0;
          if ($urandom_range(0, 3) == 0) @(negedge clk);
        end
        sent++;
      end
    end
  end

  int n_local = 0, n_wake = 0, n_abn = 0, n_amb = 0, n_inv = 0;
  int fv_cnt = 0, wk_cnt = 0, seen = 0;
  logic [1:0] fv_cls; logic fv_be;
  always @(negedge clk) begin
    if (fv) begin fv_cnt++; fv_cls = fcls; fv_be = fbe; end
    if (wake) wk_cnt++;
  end

  initial begin
    logic [31:0] d;
    logic [9:0] sc [4];
    int best; logic abn, amb, inv;
    for (int b = 0; b < NBEATS; b++) begin
      rec[b][0] = 0;
      for (int f = 0; f < 4; f++) rec[b][0][4*f +: 3] = 3'($urandom_range(0, 7));
      for (int w = 1; w < 9; w++) rec[b][w] = $urandom;
    end
    // small codes give frequent ties; one zero code per class row
    for (int c = 0; c < 4; c++) for (int f = 0; f < 4; f++) for (int l = 0; l < 8; l++)
      tab[c][f][l] = (f == c && l == 7) ? 8'hFF : (l == 0) ? (c == 0 ? 8'd0 : 8'd5)
                                                  : 8'($urandom_range(0, 6));
    // the first inputs are clearly normal (all features at level 0)
    for (int b = 0; b < 4; b++) rec[b][0] = 0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    for (int c = 0; c < 4; c++) for (int f = 0; f < 4; f++) for (int h = 0; h < 2; h++)
      bfm.wr(FE_BASE + 32'(FE_LLTAB) + 32'(32 * c + 8 * f + 4 * h),
             {tab[c][f][4*h+3], tab[c][f][4*h+2], tab[c][f][4*h+1], tab[c][f][4*h]});
    for (int c = 0; c < 4; c++) for (int f = 0; f < 4; f++) for (int h = 0; h < 2; h++) begin
      bfm.rd(FE_BASE + 32'(FE_LLTAB) + 32'(32 * c + 8 * f + 4 * h), d);
      check(d, {tab[c][f][4*h+3], tab[c][f][4*h+2], tab[c][f][4*h+1], tab[c][f][4*h]}, "table read-back");
    end
    bfm.wr(FE_BASE + 32'(FE_PERIOD), PERIOD);
    bfm.wr(FE_BASE + 32'(FE_CTRL), 32'h7);
    for (int b = 0; b < NBEATS; b++) begin
      for (int c = 0; c < 4; c++) sc[c] = ref_score(b, c);
      best = 0;
      for (int c = 1; c < 4; c++) if (sc[c] < sc[best]) best = c;
      abn = best != 0;
      amb = best == 0 && (sc[1] == sc[0] || sc[2] == sc[0] || sc[3] == sc[0]);
      inv = sc[0] == 1023 || sc[1] == 1023 || sc[2] == 1023 || sc[3] == 1023;
      // wait for this input's outcome
      while (fv_cnt + wk_cnt == seen) @(negedge clk);
      seen++;
      if (abn || amb || inv) begin
        n_wake++; if (abn) n_abn++; if (amb) n_amb++; if (inv) n_inv++;
        check(32'(wk_cnt), 32'(n_wake), $sformatf("beat %0d wakes", b));
        bfm.rd(FE_BASE + 32'(FE_STATUS), d);
        check(d[5:0], {2'(best), inv, amb, abn, 1'b1}, $sformatf("beat %0d status", b));
        bfm.rd(FE_BASE + 32'(FE_SCORES0), d);
        check(d, {6'b0, sc[1], 6'b0, sc[0]}, "scores N,L");
        bfm.rd(FE_BASE + 32'(FE_SCORES1), d);
        check(d, {6'b0, sc[3], 6'b0, sc[2]}, "scores R,P");
        for (int w = 0; w < 8; w++) begin
          bfm.rd(FE_BASE + 32'(FE_MLPBUF) + 32'(4 * w), d);
          check(d, rec[b][w + 1], "MLP buffer");
        end
        repeat (PERIOD) @(posedge clk);      // slow service: next input is held
        bfm.wr(FE_BASE + 32'(FE_DECISION), 32'(b % 4));
        while (fv_cnt + wk_cnt == seen) @(negedge clk);
        seen++;
        check({30'b0, fv_cls}, 32'(b % 4), "back-end decision forwarded");
        check(32'(fv_be), 1, "marked as back-end");
        bfm.rd(FE_BASE + 32'(FE_STATUS), d);
        check(32'(d[0]), 0, "wake flag cleared");
      end else begin
        n_local++;
        is_local[b] = 1;
        check(32'(fv_cnt), 32'(n_local + n_wake), $sformatf("beat %0d finalized locally", b));
        check({30'b0, fv_cls}, 0, "local decision is normal");
        check(32'(fv_be), 0, "marked as local");
      end
    end
    bfm.rd(FE_BASE + 32'(FE_BEATS), d);  check(d, NBEATS, "beat counter");
    bfm.rd(FE_BASE + 32'(FE_WAKES), d);  check(d, 32'(n_wake), "wake counter");
    bfm.rd(FE_BASE + 32'(FE_STALLS), d); check(d, 32'(n_wake), "one stall per slow service");
    // Inputs fetched on time follow each other by exactly one monitoring
    // period; an input is on time if the one before was fetched on time and
    // finalized locally (no service, so nothing held it back).
    begin
      bit on_time; int n_per;
      on_time = 1; n_per = 0;
      for (int b = 0; b + 1 < NBEATS; b++) begin
        if (on_time && is_local[b]) begin
          check(32'(req_time[b + 1] - req_time[b]), PERIOD, $sformatf("period before input %0d", b + 1));
          n_per++;
        end
        on_time = on_time && is_local[b];
      end
      check(32'(n_per > 0), 1, "period measured");
    end
    $display("inputs %0d: local %0d, wake %0d (abnormal %0d, ambiguous %0d, invalid %0d)",
             NBEATS, n_local, n_wake, n_abn, n_amb, n_inv);
    check(32'(n_local > 0 && n_abn > 0 && n_amb > 0 && n_inv > 0), 1, "every outcome seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #20000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
