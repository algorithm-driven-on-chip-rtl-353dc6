// cs_global_ctrl: global controller at the head of the interconnect.
//
// The only block that touches the chip's pins. It turns the off-chip
// clock, reset and JTAG port into the track bundle that enters the first
// station, and brings the debug flag back out:
//   * clk: the system clock from the clock pin, sent down the track.
//   * rstn: the reset pin passed through a reset synchronizer (clears at
//     once, releases two clocks after the pin rises).
//   * clk_matched: the system clock delayed by the delay line of the chip
//     site chosen over JTAG (cs_clk_gen, a behavioural model).
//   * h2b/b2h: memory-mapped requests built from JTAG scans and the
//     responses read back (cs_jtag_ctrl).
//   * debug_io: the busy flag from the sites, for a bench instrument to
//     trigger a power measurement; registered once in the system clock.
//
// Follows the paper: clock, reset, 5-pin JTAG and debug pins, a JTAG
// controller and a clock generator inside the controller. Own choices: the
// reset synchronizer and the debug output register.
module cs_global_ctrl
  import cs_pkg::*;
#(
  parameter int unsigned SITE_DELAY [MAX_SITES] = '{default: 0}
) (
  // pins
  input  logic clk_io,
  input  logic rstn_io,
  input  logic jtag_tck,
  input  logic jtag_tms,
  input  logic jtag_tdi,
  input  logic jtag_trst_n,
  output logic jtag_tdo,
  output logic debug_io,
  // track bundle toward station 0
  output logic clk,
  output logic clk_matched,
  output logic rstn,
  input  logic debug,
  output logic h2b_val,
  input  logic h2b_rdy,
  output msg_t h2b_msg,
  input  logic b2h_val,
  output logic b2h_rdy,
  input  msg_t b2h_msg
);

  logic [SITE_AW-1:0] clk_sel;

  assign clk = clk_io;

  cs_sync2 #(.STAGES(2), .RST_VAL(1'b0)) u_rst_sync (
    .clk(clk), .rst_n(rstn_io), .d(1'b1), .q(rstn)
  );

  cs_jtag_ctrl u_jtag (
    .clk(clk), .rstn(rstn),
    .tck(jtag_tck), .tms(jtag_tms), .tdi(jtag_tdi), .trst_n(jtag_trst_n), .tdo(jtag_tdo),
    .h2b_val(h2b_val), .h2b_rdy(h2b_rdy), .h2b_msg(h2b_msg),
    .b2h_val(b2h_val), .b2h_rdy(b2h_rdy), .b2h_msg(b2h_msg),
    .clk_sel(clk_sel)
  );

  cs_clk_gen #(.DELAY(SITE_DELAY)) u_clk_gen (
    .clk(clk), .sel(clk_sel), .clk_matched(clk_matched)
  );

  always_ff @(posedge clk or negedge rstn) begin
    if (!rstn) debug_io <= 1'b0;
    else       debug_io <= debug;
  end

endmodule
