// axil_tick_bridge -- AXI-Lite link between two clocks gated from one root.
//
// Both sides run on clocks made by gating the same root clock, so every
// edge of either side is a root edge and no synchronizer is needed; the
// only danger is that a slow side holds its valid or ready signal for many
// cycles of the fast side, which would then see several handshakes.  The
// bridge therefore lets a side see the other's valid and ready signals only
// on root cycles whose ending edge clocks both sides: m_tick_i and s_tick_i
// are the clock-gate enables of the master and slave clocks (high in the
// root cycle before an edge of that clock).  A handshake then happens on an
// edge that both sides see, and on no other.
// Interface: plain AXI-Lite structs on both sides, no storage, no latency;
// a transfer waits, at most, for the next edge common to both clocks.
// The paper clocks the front end at 1 MHz and the back end at 100 MHz and
// does not say how its bus crosses between them; this gated form is this
// implementation's choice.
module axil_tick_bridge
  import soc_pkg::*;
(
  input  logic       m_tick_i,   // master-side clock ticks at the next root edge
  input  logic       s_tick_i,   // slave-side clock ticks at the next root edge
  input  axil_req_t  m_req_i,
  output axil_resp_t m_resp_o,
  output axil_req_t  s_req_o,
  input  axil_resp_t s_resp_i
);
  always_comb begin
    s_req_o          = m_req_i;
    s_req_o.awvalid  = m_req_i.awvalid & m_tick_i;
    s_req_o.wvalid   = m_req_i.wvalid  & m_tick_i;
    s_req_o.arvalid  = m_req_i.arvalid & m_tick_i;
    s_req_o.bready   = m_req_i.bready  & m_tick_i;
    s_req_o.rready   = m_req_i.rready  & m_tick_i;

    m_resp_o         = s_resp_i;
    m_resp_o.awready = s_resp_i.awready & s_tick_i;
    m_resp_o.wready  = s_resp_i.wready  & s_tick_i;
    m_resp_o.arready = s_resp_i.arready & s_tick_i;
    m_resp_o.bvalid  = s_resp_i.bvalid  & s_tick_i;
    m_resp_o.rvalid  = s_resp_i.rvalid  & s_tick_i;
  end
endmodule
