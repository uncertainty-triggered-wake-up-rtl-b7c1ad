// axil_interconnect -- AXI-Lite interconnect of the back end.
//
// N_MASTERS masters (the CPU and the JTAG debug port) share one path to
// N_SLAVES slaves (program memory, data memory, front-end registers, system
// configuration, GPIO).  One transaction is in flight at a time: in IDLE
// the arbiter picks a master with a pending write (AW and W both valid) or
// read (AR valid), round-robin between masters and writes before reads
// within a master; the next cycle the granted channel is routed to the slave
// whose (address & SLV_MASK) equals SLV_BASE, and the grant is released
// when the B or R handshake completes.  An address no slave claims gets a
// DECERR response from the interconnect itself (read data 0).
// Latency: one arbitration cycle on top of the slave's own latency.
//
// The paper uses an AXI-Lite bus adapted from an existing platform and
// gives no detail; this single-path, round-robin structure is this
// implementation's choice and is the simplest that serves one CPU plus a
// debug port.
// The protocol assertions at the end are disabled during reset; lint
// tools count that use of rst_ni as a synchronous one.
module axil_interconnect
  import soc_pkg::*;
#(
  parameter int unsigned N_MASTERS = 2,
  parameter int unsigned NS        = N_SLAVES,
  parameter logic [NS-1:0][31:0] SLV_BASE = {GPIO_BASE, SYS_BASE, FE_BASE, DMEM_BASE, PMEM_BASE},
  parameter logic [NS-1:0][31:0] SLV_MASK = {NS{32'hF000_0000}}
) (
  input  logic                        clk_i,
  input  logic                        rst_ni,
  input  axil_req_t  [N_MASTERS-1:0]  mst_req_i,
  output axil_resp_t [N_MASTERS-1:0]  mst_resp_o,
  output axil_req_t  [NS-1:0]         slv_req_o,
  input  axil_resp_t [NS-1:0]         slv_resp_i
);
  localparam int unsigned MW = N_MASTERS > 1 ? $clog2(N_MASTERS) : 1;
  localparam int unsigned SWD = $clog2(NS + 1);

  logic              busy_q, write_q, aw_done_q, w_done_q;  // aw_done_q also marks an accepted error access
  logic [MW-1:0]     gnt_q, last_q;
  logic [SWD-1:0]    sel_q;              // NS = no slave: error response
  logic              err_bvalid_q, err_rvalid_q;

  function automatic logic [SWD-1:0] decode(logic [31:0] addr);
    for (int unsigned s = 0; s < NS; s++) begin
      if ((addr & SLV_MASK[s]) == SLV_BASE[s]) return SWD'(s);
    end
    return SWD'(NS);
  endfunction

  // ---------------------------------------------------------------- arbiter
  logic [N_MASTERS-1:0] want_wr, want_rd;
  logic                 pick_valid, pick_write;
  logic [MW-1:0]        pick;

  always_comb begin
    for (int unsigned m = 0; m < N_MASTERS; m++) begin
      want_wr[m] = mst_req_i[m].awvalid & mst_req_i[m].wvalid;
      want_rd[m] = mst_req_i[m].arvalid;
    end
    pick_valid = 1'b0;
    pick_write = 1'b0;
    pick       = '0;
    // round-robin: start after the last granted master
    for (int unsigned k = 1; k <= N_MASTERS; k++) begin
      logic [MW-1:0] m;
      m = MW'((32'(last_q) + k) % N_MASTERS);
      if (!pick_valid && (want_wr[m] || want_rd[m])) begin
        pick_valid = 1'b1;
        pick_write = want_wr[m];
        pick       = m;
      end
    end
  end

  logic [31:0] gnt_addr;
  assign gnt_addr = pick_write ? mst_req_i[pick].awaddr : mst_req_i[pick].araddr;

  logic done;
  always_comb begin
    done = 1'b0;
    if (busy_q) begin
      if (write_q) done = mst_req_i[gnt_q].bready & mst_resp_o[gnt_q].bvalid;
      else         done = mst_req_i[gnt_q].rready & mst_resp_o[gnt_q].rvalid;
    end
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      busy_q       <= 1'b0;
      write_q      <= 1'b0;
      gnt_q        <= '0;
      last_q       <= MW'(N_MASTERS - 1);
      sel_q        <= '0;
      aw_done_q    <= 1'b0;
      w_done_q     <= 1'b0;
      err_bvalid_q <= 1'b0;
      err_rvalid_q <= 1'b0;
    end else begin
      if (!busy_q) begin
        if (pick_valid) begin
          busy_q    <= 1'b1;
          write_q   <= pick_write;
          gnt_q     <= pick;
          last_q    <= pick;
          sel_q     <= decode(gnt_addr);
          aw_done_q <= 1'b0;
          w_done_q  <= 1'b0;
        end
      end else begin
        if (write_q && mst_resp_o[gnt_q].awready) aw_done_q <= 1'b1;
        if (write_q && mst_resp_o[gnt_q].wready)  w_done_q  <= 1'b1;
        // error responder: accept at once, answer DECERR the next cycle
        if (sel_q == SWD'(NS) && !aw_done_q) begin
          aw_done_q <= 1'b1;
          if (write_q) err_bvalid_q <= 1'b1;
          else         err_rvalid_q <= 1'b1;
        end
        if (done) begin
          busy_q       <= 1'b0;
          err_bvalid_q <= 1'b0;
          err_rvalid_q <= 1'b0;
        end
      end
    end
  end

  // ---------------------------------------------------------------- routing
  always_comb begin
    slv_req_o  = '0;
    mst_resp_o = '0;
    if (busy_q) begin
      if (sel_q < SWD'(NS)) begin
        slv_req_o[sel_q] = mst_req_i[gnt_q];
        // only the granted channel is forwarded
        if (write_q) begin
          slv_req_o[sel_q].arvalid = 1'b0;
          slv_req_o[sel_q].rready  = 1'b0;
          slv_req_o[sel_q].awvalid = mst_req_i[gnt_q].awvalid & ~aw_done_q;
          slv_req_o[sel_q].wvalid  = mst_req_i[gnt_q].wvalid  & ~w_done_q;
        end else begin
          slv_req_o[sel_q].awvalid = 1'b0;
          slv_req_o[sel_q].wvalid  = 1'b0;
          slv_req_o[sel_q].bready  = 1'b0;
        end
        mst_resp_o[gnt_q] = slv_resp_i[sel_q];
        if (write_q) begin
          mst_resp_o[gnt_q].arready = 1'b0;
          mst_resp_o[gnt_q].rvalid  = 1'b0;
        end else begin
          mst_resp_o[gnt_q].awready = 1'b0;
          mst_resp_o[gnt_q].wready  = 1'b0;
          mst_resp_o[gnt_q].bvalid  = 1'b0;
        end
      end else begin
        // no slave at this address
        if (write_q) begin
          mst_resp_o[gnt_q].awready = ~aw_done_q;
          mst_resp_o[gnt_q].wready  = ~aw_done_q;
          mst_resp_o[gnt_q].bvalid  = err_bvalid_q;
          mst_resp_o[gnt_q].bresp   = RESP_DECERR;
        end else begin
          mst_resp_o[gnt_q].arready = ~aw_done_q;
          mst_resp_o[gnt_q].rvalid  = err_rvalid_q;
          mst_resp_o[gnt_q].rresp   = RESP_DECERR;
        end
      end
    end
  end

  // ---------------------------------------------------------------- protocol rules
  // A master keeps a raised valid, with the same address, until it is accepted.
  for (genvar m = 0; m < N_MASTERS; m++) begin : g_assert
    property p_ar_stable;
      @(posedge clk_i) disable iff (!rst_ni)
        (mst_req_i[m].arvalid && !mst_resp_o[m].arready) |=>
          (mst_req_i[m].arvalid && $stable(mst_req_i[m].araddr));
    endproperty
    property p_aw_stable;
      @(posedge clk_i) disable iff (!rst_ni)
        (mst_req_i[m].awvalid && !mst_resp_o[m].awready) |=>
          (mst_req_i[m].awvalid && $stable(mst_req_i[m].awaddr));
    endproperty
    a_ar_stable: assert property (p_ar_stable) else $error("AR dropped or changed before arready");
    a_aw_stable: assert property (p_aw_stable) else $error("AW dropped or changed before awready");
  end
endmodule
