// cs_pipe_queue: single-entry "normal" ready/valid queue.
//
// Every queue of the interconnect is one entry deep to keep the station area
// small. This is a normal queue, not a pipelined one: enq_rdy is simply
// "empty", so a full queue does not accept a new message in the cycle it is
// being drained. A stream of messages therefore moves at most one message
// every two cycles, the throughput cost the interconnect accepts for about
// half the area. Both sides use valid/ready: a transfer happens in a cycle
// in which val and rdy are both high at the rising clock edge.
//
// Interface: enq_* is the input side, deq_* the output side. deq_msg is
// driven straight from the storage register, so the output has no
// combinational path from the input. Latency is one cycle from enqueue to
// deq_val.
//
// Follows the paper: single entry, normal queue, ready/valid backpressure.
// Own choice: asynchronous active-low reset that empties the queue.
module cs_pipe_queue #(
  parameter int unsigned W = cs_pkg::MSG_W
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         enq_val,
  output logic         enq_rdy,
  input  logic [W-1:0] enq_msg,
  output logic         deq_val,
  input  logic         deq_rdy,
  output logic [W-1:0] deq_msg
);

  logic         full_q;
  logic [W-1:0] data_q;

  assign enq_rdy = !full_q;
  assign deq_val = full_q;
  assign deq_msg = data_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      full_q <= 1'b0;
    end else if (enq_val && enq_rdy) begin
      full_q <= 1'b1;
    end else if (deq_val && deq_rdy) begin
      full_q <= 1'b0;
    end
  end

  always_ff @(posedge clk) begin
    if (enq_val && enq_rdy) data_q <= enq_msg;
  end

  // A message offered on the output must stay put until it is taken.
  property p_deq_stable;
    @(posedge clk) disable iff (!rst_n)
      (deq_val && !deq_rdy) |=> (deq_val && $stable(deq_msg));
  endproperty
  a_deq_stable: assert property (p_deq_stable);

endmodule
