// clk_divider -- programmable clock divider of the system configuration unit.
//
// Produces an enable that is high on one root-clock cycle out of
// (div_i + 1); fed to a clk_gate it yields a clock at f/(div_i + 1) whose
// edges coincide with root-clock edges, so every domain derived from it
// stays synchronous with the others.  div_i = 0 passes the clock through.
// A new ratio takes effect at the end of the current divided period.
// The paper states that the unit holds a programmable divider (its firmware
// sets the value to 0 before the MLP runs); the pulse-swallowing form is
// this implementation's choice.
module clk_divider #(
  parameter int unsigned DIV_W = 8
) (
  input  logic             clk_i,
  input  logic             rst_ni,
  input  logic [DIV_W-1:0] div_i,
  output logic             en_o
);
  logic [DIV_W-1:0] cnt_q;

  assign en_o = cnt_q == '0;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni)            cnt_q <= '0;
    else if (cnt_q == '0)   cnt_q <= div_i;
    else                    cnt_q <= cnt_q - 1'b1;
  end
endmodule
