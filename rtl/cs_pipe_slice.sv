// cs_pipe_slice: optional pipelining slice of the track bundle.
//
// Where two neighbouring stations are far apart on the die, a slice is
// placed in the track between them so that every wire of the bundle only
// spans a short, easily timed distance. The slice registers every signal of
// the bundle and adds nothing that grows with the number of chip sites:
//   * h2b message: one single-entry queue (forward direction),
//   * b2h message: one single-entry queue (backward direction),
//   * rstn: one flop that clears at once when rstn falls and releases one
//     clock after rstn rises (asynchronous assert, synchronous release),
//   * debug: one flop in the backward direction,
//   * clk and clk_matched: passed through unchanged (in silicon, buffered
//     together so that both keep the same delay).
//
// Interface: *_in is the side toward the global controller for the
// forward signals and the side away from it for the backward ones. Each
// queue adds one cycle of latency and the slice throughput is one message
// every two cycles, like every queue of the interconnect.
//
// Follows the paper: the set of signals and that rstn, h2b and b2h are
// registered. Own choice: the debug flop's reset value and that the slice's
// queues are reset by the incoming rstn.
module cs_pipe_slice
  import cs_pkg::*;
(
  // system bundle
  input  logic clk_in,
  input  logic clk_matched_in,
  input  logic rstn_in,
  output logic clk_out,
  output logic clk_matched_out,
  output logic rstn_out,
  input  logic debug_in,        // from the far side
  output logic debug_out,       // toward the controller
  // h2b bundle
  input  logic h2b_in_val,
  output logic h2b_in_rdy,
  input  msg_t h2b_in_msg,
  output logic h2b_out_val,
  input  logic h2b_out_rdy,
  output msg_t h2b_out_msg,
  // b2h bundle
  input  logic b2h_in_val,
  output logic b2h_in_rdy,
  input  msg_t b2h_in_msg,
  output logic b2h_out_val,
  input  logic b2h_out_rdy,
  output msg_t b2h_out_msg
);

  logic rstn_q, debug_q;

  assign clk_out         = clk_in;
  assign clk_matched_out = clk_matched_in;

  always_ff @(posedge clk_in or negedge rstn_in) begin
    if (!rstn_in) rstn_q <= 1'b0;
    else          rstn_q <= 1'b1;
  end
  assign rstn_out = rstn_q;

  always_ff @(posedge clk_in or negedge rstn_in) begin
    if (!rstn_in) debug_q <= 1'b0;
    else          debug_q <= debug_in;
  end
  assign debug_out = debug_q;

  cs_pipe_queue #(.W(MSG_W)) u_h2b_q (
    .clk(clk_in), .rst_n(rstn_in),
    .enq_val(h2b_in_val), .enq_rdy(h2b_in_rdy), .enq_msg(h2b_in_msg),
    .deq_val(h2b_out_val), .deq_rdy(h2b_out_rdy), .deq_msg(h2b_out_msg)
  );

  cs_pipe_queue #(.W(MSG_W)) u_b2h_q (
    .clk(clk_in), .rst_n(rstn_in),
    .enq_val(b2h_in_val), .enq_rdy(b2h_in_rdy), .enq_msg(b2h_in_msg),
    .deq_val(b2h_out_val), .deq_rdy(b2h_out_rdy), .deq_msg(b2h_out_msg)
  );

endmodule
