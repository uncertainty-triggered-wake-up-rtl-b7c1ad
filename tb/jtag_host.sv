// jtag_host -- JTAG driver used by the testbenches.  TCK runs at
// 1/(2*HALF) of the time unit; TMS/TDI change on the falling edge and TDO
// is sampled on the rising edge.  dbg_write/dbg_read use the DBG register
// of jtag_debug and poll the busy bit through its STAT register.
module jtag_host #(
  parameter int HALF = 20
) (
  output logic tck,
  output logic tms,
  output logic tdi,
  output logic trst_n,
  input  logic tdo
);
  initial begin tck = 0; tms = 1; tdi = 0; trst_n = 0; end

  task automatic clock(input logic m, input logic d, output logic o);
    tms = m; tdi = d;
    #HALF tck = 1;
    o = tdo;
    #HALF tck = 0;
  endtask

  task automatic reset_tap();
    logic o;
    trst_n = 0; #(4 * HALF) trst_n = 1;
    for (int i = 0; i < 6; i++) clock(1, 0, o);
    clock(0, 0, o);                    // Run-Test/Idle
  endtask

  task automatic shift_ir(input logic [3:0] ir);
    logic o;
    clock(1, 0, o); clock(1, 0, o);    // Select-DR, Select-IR
    clock(0, 0, o); clock(0, 0, o);    // Capture-IR, Shift-IR
    for (int i = 0; i < 4; i++) clock(i == 3, ir[i], o);
    clock(1, 0, o); clock(0, 0, o);    // Update-IR, Run-Test/Idle
  endtask

  task automatic shift_dr(input logic [64:0] din, input int n, output logic [64:0] dout);
    logic o;
    dout = '0;
    clock(1, 0, o);                    // Select-DR
    clock(0, 0, o); clock(0, 0, o);    // Capture-DR, Shift-DR
    for (int i = 0; i < n; i++) begin
      clock(i == n - 1, din[i], o);
      dout[i] = o;
    end
    clock(1, 0, o); clock(0, 0, o);    // Update-DR, Run-Test/Idle
  endtask

  task automatic read_idcode(output logic [31:0] id);
    logic [64:0] d;
    shift_ir(4'b0001);
    shift_dr('0, 32, d);
    id = d[31:0];
  endtask

  // Issue one bus access and wait for it; returns {error, data}.
  task automatic dbg_access(input logic wr, input logic [31:0] addr, input logic [31:0] data,
                            output logic [31:0] rdata, output logic err);
    logic [64:0] d;
    shift_ir(4'b1000);
    shift_dr({wr, addr, data}, 65, d);
    shift_ir(4'b1001);
    do begin
      for (int i = 0; i < 4; i++) begin #HALF; end
      shift_dr('0, 34, d);
    end while (d[33]);
    rdata = d[31:0];
    err   = d[32];
  endtask

  task automatic dbg_write(input logic [31:0] addr, input logic [31:0] data);
    logic [31:0] r; logic e;
    dbg_access(1'b1, addr, data, r, e);
  endtask

  task automatic dbg_read(input logic [31:0] addr, output logic [31:0] data);
    logic e;
    dbg_access(1'b0, addr, 32'b0, data, e);
  endtask
endmodule
