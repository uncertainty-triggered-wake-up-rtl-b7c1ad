// jtag_debug -- JTAG test access port with an AXI-Lite debug master.
//
// The TAP is the standard IEEE 1149.1 sixteen-state controller clocked by
// tck_i, with a 4-bit instruction register:
//   IDCODE (0001)  32-bit identification register (IDCODE parameter)
//   DBG    (1000)  65-bit bus-access register {write, addr[31:0], data[31:0]},
//                  shifted LSB first; Update-DR issues the access
//   STAT   (1001)  read-only view of the same status, no access issued
//   BYPASS (1111 and every other code)
// An access crosses into the bus clock domain as a toggle through a
// two-flop synchronizer; the bus side performs one AXI-Lite read or write
// and toggles an acknowledge back, also synchronized.  Capture-DR of DBG
// and of STAT load {busy, error, read data} into the low 34 bits; the host
// polls STAT until busy clears.  An access shifted while busy is ignored.
// TDO changes on the falling edge of tck_i.
//
// The paper only names a JTAG debug interface (taken from an existing
// platform) and reports its share of the energy; this register set and the
// toggle handshake are this implementation's choices.
module jtag_debug
  import soc_pkg::*;
#(
  parameter logic [31:0] IDCODE = 32'h1BA7_E5A1
) (
  // JTAG pins
  input  logic       tck_i,
  input  logic       tms_i,
  input  logic       tdi_i,
  input  logic       trst_ni,
  output logic       tdo_o,
  // bus side
  input  logic       clk_i,
  input  logic       rst_ni,
  output axil_req_t  bus_req_o,
  input  axil_resp_t bus_resp_i
);
  typedef enum logic [3:0] {
    TLR, RTI, SEL_DR, CAP_DR, SH_DR, EX1_DR, PAU_DR, EX2_DR, UPD_DR,
    SEL_IR, CAP_IR, SH_IR, EX1_IR, PAU_IR, EX2_IR, UPD_IR
  } tap_e;

  localparam logic [3:0] IR_IDCODE = 4'b0001;
  localparam logic [3:0] IR_DBG    = 4'b1000;
  localparam logic [3:0] IR_STAT   = 4'b1001;
  localparam int unsigned DBG_W    = 65;

  tap_e             tap_q;
  logic [3:0]       ir_q, ir_sh_q;
  logic [DBG_W-1:0] dr_q;
  logic             tdo_d;

  // ------------------------------------------------------------ TAP controller
  always_ff @(posedge tck_i or negedge trst_ni) begin
    if (!trst_ni) tap_q <= TLR;
    else begin
      unique case (tap_q)
        TLR:    tap_q <= tms_i ? TLR    : RTI;
        RTI:    tap_q <= tms_i ? SEL_DR : RTI;
        SEL_DR: tap_q <= tms_i ? SEL_IR : CAP_DR;
        CAP_DR: tap_q <= tms_i ? EX1_DR : SH_DR;
        SH_DR:  tap_q <= tms_i ? EX1_DR : SH_DR;
        EX1_DR: tap_q <= tms_i ? UPD_DR : PAU_DR;
        PAU_DR: tap_q <= tms_i ? EX2_DR : PAU_DR;
        EX2_DR: tap_q <= tms_i ? UPD_DR : SH_DR;
        UPD_DR: tap_q <= tms_i ? SEL_DR : RTI;
        SEL_IR: tap_q <= tms_i ? TLR    : CAP_IR;
        CAP_IR: tap_q <= tms_i ? EX1_IR : SH_IR;
        SH_IR:  tap_q <= tms_i ? EX1_IR : SH_IR;
        EX1_IR: tap_q <= tms_i ? UPD_IR : PAU_IR;
        PAU_IR: tap_q <= tms_i ? EX2_IR : PAU_IR;
        EX2_IR: tap_q <= tms_i ? UPD_IR : SH_IR;
        UPD_IR: tap_q <= tms_i ? SEL_DR : RTI;
        default: tap_q <= TLR;
      endcase
    end
  end

  // ------------------------------------------------------------ CDC signals
  logic        req_tgl_q;               // tck domain
  logic [64:0] cmd_q;                   // tck domain, stable while busy
  logic        ack_tgl_q;               // clk domain
  logic [1:0]  ack_sync_q;              // into tck domain
  logic [1:0]  req_sync_q;              // into clk domain
  logic        req_seen_q;
  logic [31:0] rdata_q;                 // clk domain, stable while idle
  logic        err_q;
  logic        busy;

  assign busy = req_tgl_q != ack_sync_q[1];

  // ------------------------------------------------------------ IR / DR (tck)
  always_ff @(posedge tck_i or negedge trst_ni) begin
    if (!trst_ni) begin
      ir_q       <= IR_IDCODE;
      ir_sh_q    <= '0;
      dr_q       <= '0;
      cmd_q      <= '0;
      req_tgl_q  <= 1'b0;
      ack_sync_q <= '0;
    end else begin
      ack_sync_q <= {ack_sync_q[0], ack_tgl_q};
      unique case (tap_q)
        TLR:    ir_q    <= IR_IDCODE;
        CAP_IR: ir_sh_q <= 4'b0101;
        SH_IR:  ir_sh_q <= {tdi_i, ir_sh_q[3:1]};
        UPD_IR: ir_q    <= ir_sh_q;
        CAP_DR: begin
          if (ir_q == IR_IDCODE)   dr_q <= DBG_W'(IDCODE);
          else if (ir_q == IR_DBG || ir_q == IR_STAT) dr_q <= DBG_W'({busy, err_q, rdata_q});
          else                     dr_q <= '0;
        end
        SH_DR: begin
          if (ir_q == IR_IDCODE)   dr_q <= {33'b0, tdi_i, dr_q[31:1]};
          else if (ir_q == IR_DBG || ir_q == IR_STAT) dr_q <= {tdi_i, dr_q[DBG_W-1:1]};
          else                     dr_q <= {64'b0, tdi_i};
        end
        UPD_DR: begin
          if (ir_q == IR_DBG && !busy) begin
            cmd_q     <= dr_q;
            req_tgl_q <= ~req_tgl_q;
          end
        end
        default: ;
      endcase
    end
  end

  always_comb begin
    tdo_d = dr_q[0];
    if (tap_q == SH_IR) tdo_d = ir_sh_q[0];
  end

  always_ff @(negedge tck_i or negedge trst_ni) begin
    if (!trst_ni) tdo_o <= 1'b0;
    else          tdo_o <= tdo_d;
  end

  // ------------------------------------------------------------ bus master (clk)
  typedef enum logic [1:0] {B_IDLE, B_WRITE, B_READ} bus_e;
  bus_e bus_q;
  logic aw_done_q, w_done_q;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      req_sync_q <= '0;
      req_seen_q <= 1'b0;
      ack_tgl_q  <= 1'b0;
      rdata_q    <= '0;
      err_q      <= 1'b0;
      bus_q      <= B_IDLE;
      aw_done_q  <= 1'b0;
      w_done_q   <= 1'b0;
    end else begin
      req_sync_q <= {req_sync_q[0], req_tgl_q};
      unique case (bus_q)
        B_IDLE: begin
          if (req_sync_q[1] != req_seen_q) begin
            req_seen_q <= req_sync_q[1];
            aw_done_q  <= 1'b0;
            w_done_q   <= 1'b0;
            bus_q      <= cmd_q[64] ? B_WRITE : B_READ;
          end
        end
        B_WRITE: begin
          if (bus_resp_i.awready) aw_done_q <= 1'b1;
          if (bus_resp_i.wready)  w_done_q  <= 1'b1;
          if (bus_resp_i.bvalid) begin
            err_q     <= bus_resp_i.bresp != RESP_OKAY;
            ack_tgl_q <= ~ack_tgl_q;
            bus_q     <= B_IDLE;
          end
        end
        B_READ: begin
          if (bus_resp_i.arready) aw_done_q <= 1'b1;
          if (bus_resp_i.rvalid) begin
            rdata_q   <= bus_resp_i.rdata;
            err_q     <= bus_resp_i.rresp != RESP_OKAY;
            ack_tgl_q <= ~ack_tgl_q;
            bus_q     <= B_IDLE;
          end
        end
        default: bus_q <= B_IDLE;
      endcase
    end
  end

  always_comb begin
    bus_req_o         = '0;
    bus_req_o.awaddr  = cmd_q[63:32];
    bus_req_o.araddr  = cmd_q[63:32];
    bus_req_o.wdata   = cmd_q[31:0];
    bus_req_o.wstrb   = 4'hF;
    bus_req_o.awvalid = bus_q == B_WRITE && !aw_done_q;
    bus_req_o.wvalid  = bus_q == B_WRITE && !w_done_q;
    bus_req_o.bready  = bus_q == B_WRITE;
    bus_req_o.arvalid = bus_q == B_READ && !aw_done_q;
    bus_req_o.rready  = bus_q == B_READ;
  end
endmodule
