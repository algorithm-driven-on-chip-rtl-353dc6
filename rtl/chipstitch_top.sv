// chipstitch_top: top level of the chip site interconnect.
//
// Many small, independent designs ("chip sites") share one die, one set of
// pins and one control path. The die's pins are a clock, a reset, a 5-pin
// JTAG port and a debug flag, whatever the number of sites. The global
// controller (cs_global_ctrl) turns JTAG scans into 73-bit memory-mapped
// requests that travel down a line of N_SITES stations (cs_interconnect).
// The station whose site address matches either answers from its own
// control registers (periphery bank) or passes the request into its site's
// user block (user bank) and returns the answer. Each station also drives
// its site's power switches, enable and soft reset.
//
// The user blocks and the power switches around them are not part of this
// RTL: their signals are ports of this module, one array element per site,
// clocked by site_clk (inside the user block, after its clock tree, this
// clock lines up with the station's clk_matched).
//
// Parameters: N_SITES (25 in the main configuration, at most 128),
// SLICE_MASK (where pipeline slices sit, see cs_interconnect) and
// SITE_DELAY (matched-clock delay per site, behavioural, see cs_clk_gen).
//
// Follows the paper: the block structure, message format, one-master line
// topology and per-site controls. Own choices are listed in each block.
module chipstitch_top
  import cs_pkg::*;
#(
  parameter int unsigned          N_SITES    = 25,
  parameter logic [MAX_SITES-1:0] SLICE_MASK = MAX_SITES'(2),
  parameter int unsigned          SITE_DELAY [MAX_SITES] = '{default: 0}
) (
  input  logic      clk_io,
  input  logic      rstn_io,
  input  logic      jtag_tck,
  input  logic      jtag_tms,
  input  logic      jtag_tdi,
  input  logic      jtag_trst_n,
  output logic      jtag_tdo,
  output logic      debug_io,
  // chip site user blocks and their power switches
  output logic      site_clk        [N_SITES],
  output logic      site_rstn       [N_SITES],
  output logic      site_en         [N_SITES],
  output logic      site_en_pwr_bar [N_SITES],
  output logic      site_req_val    [N_SITES],
  input  logic      site_req_rdy    [N_SITES],
  output site_msg_t site_req_msg    [N_SITES],
  input  logic      site_resp_val   [N_SITES],
  output logic      site_resp_rdy   [N_SITES],
  input  site_msg_t site_resp_msg   [N_SITES],
  input  logic      site_debug      [N_SITES]
);

  logic clk, clk_matched, rstn, debug;
  logic h2b_val, h2b_rdy, b2h_val, b2h_rdy;
  msg_t h2b_msg, b2h_msg;

  cs_global_ctrl #(.SITE_DELAY(SITE_DELAY)) u_gc (
    .clk_io(clk_io), .rstn_io(rstn_io),
    .jtag_tck(jtag_tck), .jtag_tms(jtag_tms), .jtag_tdi(jtag_tdi),
    .jtag_trst_n(jtag_trst_n), .jtag_tdo(jtag_tdo), .debug_io(debug_io),
    .clk(clk), .clk_matched(clk_matched), .rstn(rstn), .debug(debug),
    .h2b_val(h2b_val), .h2b_rdy(h2b_rdy), .h2b_msg(h2b_msg),
    .b2h_val(b2h_val), .b2h_rdy(b2h_rdy), .b2h_msg(b2h_msg)
  );

  cs_interconnect #(.N_SITES(N_SITES), .SLICE_MASK(SLICE_MASK)) u_net (
    .clk(clk), .clk_matched(clk_matched), .rstn(rstn), .debug(debug),
    .h2b_val(h2b_val), .h2b_rdy(h2b_rdy), .h2b_msg(h2b_msg),
    .b2h_val(b2h_val), .b2h_rdy(b2h_rdy), .b2h_msg(b2h_msg),
    .site_clk(site_clk), .site_rstn(site_rstn), .site_en(site_en),
    .site_en_pwr_bar(site_en_pwr_bar),
    .site_req_val(site_req_val), .site_req_rdy(site_req_rdy), .site_req_msg(site_req_msg),
    .site_resp_val(site_resp_val), .site_resp_rdy(site_resp_rdy), .site_resp_msg(site_resp_msg),
    .site_debug(site_debug)
  );

endmodule
