// power_manager -- wake/sleep sequencer of the programmable back end.
//
// Always-on.  The back end (CPU, interconnect, memories, debug port) is
// power- and clock-gated while the front end monitors.  A wake request from
// the front-end controller - or the end of the chip reset, which is a true
// start-up - walks the sequence
//     SLEEP -> PWR_UP (PWR_CYCLES) -> CLK_UP (CLK_CYCLES) -> RUN
// closing the power switch first, then starting the clock with the reset
// still asserted, then releasing the reset: the CPU restarts from its reset
// vector, which is how a wake-up is delivered (no interrupt).  A sleep
// request written by the firmware walks back
//     RUN -> RST_DN -> CLK_DN -> PWR_DN (PWR_CYCLES) -> SLEEP.
// A wake request that arrives while the back end is running or going down
// is remembered and served as soon as SLEEP is reached, so none is lost.
// iso_no isolates the back-end outputs whenever it is not running.
//
// The reset-based wake and the restore-then-run order follow the paper; the
// state encoding, the step delays and the isolation output are this
// implementation's choices.
module power_manager
  import soc_pkg::*;
#(
  parameter int unsigned PWR_CYCLES = 8,  // rail settling time, cycles
  parameter int unsigned CLK_CYCLES = 4   // clocked cycles under reset before release
) (
  input  logic      clk_i,
  input  logic      rst_ni,
  input  logic      wake_req_i,
  input  logic      sleep_req_i,
  output logic      pwr_en_o,     // back-end power switch
  output logic      iso_no,       // low: back-end outputs isolated
  output logic      clk_en_o,     // back-end clock gate enable
  output logic      rst_no,       // back-end reset, active low
  output pm_state_e state_o,
  output logic [15:0] wakes_o     // wake-ups served (not counting start-up)
);
  localparam int unsigned CW = $clog2(PWR_CYCLES > CLK_CYCLES ? PWR_CYCLES + 1 : CLK_CYCLES + 1);

  pm_state_e     state_q;
  logic [CW-1:0] cnt_q;
  logic          pending_q, startup_q;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      state_q   <= PM_SLEEP;
      cnt_q     <= '0;
      pending_q <= 1'b0;
      startup_q <= 1'b1;
      wakes_o   <= '0;
    end else begin
      if (wake_req_i) pending_q <= 1'b1;
      unique case (state_q)
        PM_SLEEP: begin
          if (pending_q || wake_req_i || startup_q) begin
            if (!startup_q) wakes_o <= wakes_o + 1'b1;
            pending_q <= 1'b0;
            startup_q <= 1'b0;
            cnt_q     <= '0;
            state_q   <= PM_PWR_UP;
          end
        end
        PM_PWR_UP: begin
          cnt_q <= cnt_q + 1'b1;
          if (cnt_q == CW'(PWR_CYCLES - 1)) begin
            cnt_q   <= '0;
            state_q <= PM_CLK_UP;
          end
        end
        PM_CLK_UP: begin
          cnt_q <= cnt_q + 1'b1;
          if (cnt_q == CW'(CLK_CYCLES - 1)) begin
            cnt_q   <= '0;
            state_q <= PM_RUN;
          end
        end
        PM_RUN: begin
          if (sleep_req_i) state_q <= PM_RST_DN;
        end
        PM_RST_DN: state_q <= PM_CLK_DN;
        PM_CLK_DN: begin
          cnt_q   <= '0;
          state_q <= PM_PWR_DN;
        end
        PM_PWR_DN: begin
          cnt_q <= cnt_q + 1'b1;
          if (cnt_q == CW'(PWR_CYCLES - 1)) begin
            cnt_q   <= '0;
            state_q <= PM_SLEEP;
          end
        end
        default: state_q <= PM_SLEEP;
      endcase
    end
  end

  always_comb begin
    pwr_en_o = state_q != PM_SLEEP && state_q != PM_PWR_DN;
    clk_en_o = state_q inside {PM_CLK_UP, PM_RUN, PM_RST_DN};
    rst_no   = state_q == PM_RUN;
    iso_no   = state_q == PM_RUN;
  end

  assign state_o = state_q;
endmodule
