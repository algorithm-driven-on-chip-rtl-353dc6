// tb_jtag_if: JTAG pins plus the tasks of a simple JTAG host.
//
// The host drives TMS/TDI while TCK is low and samples TDO at the rising
// TCK edge, with a TCK half period of HALF ns. Tasks walk the standard TAP
// state machine: reset() (five TMS=1 clocks, then Run-Test/Idle),
// shift_ir() and shift_dr() (each from and back to Run-Test/Idle, data LSB
// first, returning what was shifted out).
interface tb_jtag_if #(parameter int HALF = 50);
  logic tck = 0, tms = 1, tdi = 0, trst_n = 0, tdo;

  task automatic tick(input logic t_ms, input logic t_di, output logic t_do);
    tms = t_ms; tdi = t_di;
    #(HALF);
    t_do = tdo;
    tck = 1;
    #(HALF);
    tck = 0;
  endtask

  task automatic reset();
    logic d;
    trst_n = 1;
    repeat (5) tick(1, 0, d);
    tick(0, 0, d);                       // Run-Test/Idle
  endtask

  task automatic shift_ir(input logic [3:0] ir, output logic [3:0] ir_out);
    logic d;
    tick(1, 0, d); tick(1, 0, d);        // Select-DR, Select-IR
    tick(0, 0, d); tick(0, 0, d);        // Capture-IR, Shift-IR
    for (int i = 0; i < 4; i++) begin
      tick(i == 3, ir[i], d);
      ir_out[i] = d;
    end
    tick(1, 0, d); tick(0, 0, d);        // Update-IR, Run-Test/Idle
  endtask

  task automatic shift_dr(input logic [127:0] din, input int len, output logic [127:0] dout);
    logic d;
    dout = '0;
    tick(1, 0, d);                       // Select-DR
    tick(0, 0, d); tick(0, 0, d);        // Capture-DR, Shift-DR
    for (int i = 0; i < len; i++) begin
      tick(i == len - 1, din[i], d);
      dout[i] = d;
    end
    tick(1, 0, d); tick(0, 0, d);        // Update-DR, Run-Test/Idle
  endtask
endinterface
