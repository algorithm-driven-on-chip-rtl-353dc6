// cs_interconnect: the chip site interconnect, a line of stations.
//
// N_SITES stations are chained in one logical line that starts at the
// global controller: requests (h2b) travel away from the controller,
// responses (b2h) and the debug flag travel back toward it. The line is a
// one-dimensional bidirectional mesh, not a ring: the last station is tied
// off (its h2b output is always ready and is discarded, so a request for a
// site address with no station is dropped; its b2h and debug inputs are
// idle). Only one chip site is meant to be active at a time and the
// controller is the only master, so no routing cycle and no deadlock can
// form.
//
// A pipeline slice (cs_pipe_slice) can be placed in front of any station:
// bit i of SLICE_MASK puts one between station i-1 (or the controller,
// for i = 0) and station i. Station i has site address i.
//
// Interface: the controller-side track bundle (clk, clk_matched, rstn,
// debug, h2b, b2h) and, per site, the user-block signals of cs_station as
// arrays indexed by site address.
//
// Timing: a request to site k passes k+1 station queues plus one queue per
// slice on the way; with no other traffic each queue costs one cycle.
//
// Follows the paper: the line topology, the tied-off last station, the
// fixed per-station bundle, 25 sites in the main configuration and up to
// 128 with the 7-bit site address, optional slices. Own choice: the
// default slice placement (one slice, in front of station 1, where the
// block diagram draws one) and dropping requests past the last station.
module cs_interconnect
  import cs_pkg::*;
#(
  parameter int unsigned           N_SITES    = 25,
  parameter logic [MAX_SITES-1:0]  SLICE_MASK = MAX_SITES'(2)
) (
  input  logic      clk,
  input  logic      clk_matched,
  input  logic      rstn,
  output logic      debug,
  input  logic      h2b_val,
  output logic      h2b_rdy,
  input  msg_t      h2b_msg,
  output logic      b2h_val,
  input  logic      b2h_rdy,
  output msg_t      b2h_msg,
  // per chip site
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

  initial begin
    assert (N_SITES >= 1 && N_SITES <= MAX_SITES)
      else $fatal(1, "N_SITES must be 1..%0d", MAX_SITES);
  end

  // Link k is the track in front of station k; link N_SITES is the tie-off.
  logic clk_l [N_SITES+1], clkm_l [N_SITES+1], rstn_l [N_SITES+1], dbg_l [N_SITES+1];
  logic h2b_val_l [N_SITES+1], h2b_rdy_l [N_SITES+1];
  logic b2h_val_l [N_SITES+1], b2h_rdy_l [N_SITES+1];
  msg_t h2b_msg_l [N_SITES+1], b2h_msg_l [N_SITES+1];

  assign clk_l[0]     = clk;
  assign clkm_l[0]    = clk_matched;
  assign rstn_l[0]    = rstn;
  assign h2b_val_l[0] = h2b_val;
  assign h2b_msg_l[0] = h2b_msg;
  assign h2b_rdy      = h2b_rdy_l[0];
  assign b2h_val      = b2h_val_l[0];
  assign b2h_msg      = b2h_msg_l[0];
  assign b2h_rdy_l[0] = b2h_rdy;
  assign debug        = dbg_l[0];

  // tie-off after the last station
  assign h2b_rdy_l[N_SITES] = 1'b1;
  assign b2h_val_l[N_SITES] = 1'b0;
  assign b2h_msg_l[N_SITES] = '0;
  assign dbg_l[N_SITES]     = 1'b0;

  for (genvar i = 0; i < N_SITES; i++) begin : g_site
    // bundle as seen at the input of station i
    logic clk_s, clkm_s, rstn_s, dbg_s;
    logic h2b_val_s, h2b_rdy_s, b2h_val_s, b2h_rdy_s;
    msg_t h2b_msg_s, b2h_msg_s;

    if (SLICE_MASK[i]) begin : g_slice
      cs_pipe_slice u_slice (
        .clk_in(clk_l[i]), .clk_matched_in(clkm_l[i]), .rstn_in(rstn_l[i]),
        .clk_out(clk_s), .clk_matched_out(clkm_s), .rstn_out(rstn_s),
        .debug_in(dbg_s), .debug_out(dbg_l[i]),
        .h2b_in_val(h2b_val_l[i]), .h2b_in_rdy(h2b_rdy_l[i]), .h2b_in_msg(h2b_msg_l[i]),
        .h2b_out_val(h2b_val_s), .h2b_out_rdy(h2b_rdy_s), .h2b_out_msg(h2b_msg_s),
        .b2h_in_val(b2h_val_s), .b2h_in_rdy(b2h_rdy_s), .b2h_in_msg(b2h_msg_s),
        .b2h_out_val(b2h_val_l[i]), .b2h_out_rdy(b2h_rdy_l[i]), .b2h_out_msg(b2h_msg_l[i])
      );
    end else begin : g_wire
      assign clk_s        = clk_l[i];
      assign clkm_s       = clkm_l[i];
      assign rstn_s       = rstn_l[i];
      assign dbg_l[i]     = dbg_s;
      assign h2b_val_s    = h2b_val_l[i];
      assign h2b_msg_s    = h2b_msg_l[i];
      assign h2b_rdy_l[i] = h2b_rdy_s;
      assign b2h_val_l[i] = b2h_val_s;
      assign b2h_msg_l[i] = b2h_msg_s;
      assign b2h_rdy_s    = b2h_rdy_l[i];
    end

    assign clk_l[i+1]  = clk_s;
    assign clkm_l[i+1] = clkm_s;
    assign rstn_l[i+1] = rstn_s;

    cs_station u_station (
      .clk(clk_s), .clk_matched(clkm_s), .rstn(rstn_s),
      .station_id(SITE_AW'(i)),
      .debug_in(dbg_l[i+1]), .debug_out(dbg_s),
      .h2b_in_val(h2b_val_s), .h2b_in_rdy(h2b_rdy_s), .h2b_in_msg(h2b_msg_s),
      .h2b_out_val(h2b_val_l[i+1]), .h2b_out_rdy(h2b_rdy_l[i+1]), .h2b_out_msg(h2b_msg_l[i+1]),
      .b2h_in_val(b2h_val_l[i+1]), .b2h_in_rdy(b2h_rdy_l[i+1]), .b2h_in_msg(b2h_msg_l[i+1]),
      .b2h_out_val(b2h_val_s), .b2h_out_rdy(b2h_rdy_s), .b2h_out_msg(b2h_msg_s),
      .site_clk(site_clk[i]), .site_rstn(site_rstn[i]), .site_en(site_en[i]),
      .site_en_pwr_bar(site_en_pwr_bar[i]),
      .site_req_val(site_req_val[i]), .site_req_rdy(site_req_rdy[i]), .site_req_msg(site_req_msg[i]),
      .site_resp_val(site_resp_val[i]), .site_resp_rdy(site_resp_rdy[i]), .site_resp_msg(site_resp_msg[i]),
      .site_debug(site_debug[i])
    );
  end

endmodule
