// cs_async_fifo: single-entry asynchronous FIFO between two clock domains.
//
// A station uses two of these: the "h2b user queue" that carries a 65-bit
// user-bank request from the station clock (clk) into the user block's
// domain (clk_matched), and the "b2h user queue" that brings the 65-bit
// response back. Because every signal that enters the user block is
// launched by a flop on clk_matched, which the global controller delays to
// match the user block's clock insertion delay, static timing sees an
// ordinary same-edge path and no hold buffers are needed at the boundary.
//
// How it works: one data register written in the write domain, plus one
// toggle bit per side. The writer flips wtog_q when it stores a message,
// the reader flips rtog_q when it takes it. Each side sees the other's
// toggle through a two-flop synchronizer. The FIFO is full for the writer
// while wtog_q differs from the synchronized rtog, and holds data for the
// reader while rtog_q differs from the synchronized wtog. The data register
// only changes while the FIFO is empty, so it is stable whenever the reader
// looks at it.
//
// Interface: valid/ready on both sides, each in its own clock. Latency from
// a write to r_val is two or three read clocks; the writer may write again
// two to three write clocks after the read.
//
// Follows the paper: single entry, 65 bits, written in the station clock
// and read in clk_matched (and the reverse for responses). Own choice: the
// toggle-bit construction and reset (both sides must be reset together).
module cs_async_fifo #(
  parameter int unsigned W = cs_pkg::SITE_MSG_W
) (
  input  logic         wclk,
  input  logic         wrst_n,
  input  logic         w_val,
  output logic         w_rdy,
  input  logic [W-1:0] w_msg,
  input  logic         rclk,
  input  logic         rrst_n,
  output logic         r_val,
  input  logic         r_rdy,
  output logic [W-1:0] r_msg
);

  logic         wtog_q, rtog_q;
  logic         wtog_s, rtog_s;   // synchronized copies
  logic [W-1:0] data_q;

  // ---- write domain ----
  assign w_rdy = (wtog_q == rtog_s);

  always_ff @(posedge wclk or negedge wrst_n) begin
    if (!wrst_n)              wtog_q <= 1'b0;
    else if (w_val && w_rdy)  wtog_q <= ~wtog_q;
  end

  always_ff @(posedge wclk) begin
    if (w_val && w_rdy) data_q <= w_msg;
  end

  cs_sync2 #(.STAGES(2), .RST_VAL(1'b0)) u_sync_r2w (
    .clk(wclk), .rst_n(wrst_n), .d(rtog_q), .q(rtog_s)
  );

  // ---- read domain ----
  assign r_val = (rtog_q != wtog_s);
  assign r_msg = data_q;

  always_ff @(posedge rclk or negedge rrst_n) begin
    if (!rrst_n)              rtog_q <= 1'b0;
    else if (r_val && r_rdy)  rtog_q <= ~rtog_q;
  end

  cs_sync2 #(.STAGES(2), .RST_VAL(1'b0)) u_sync_w2r (
    .clk(rclk), .rst_n(rrst_n), .d(wtog_q), .q(wtog_s)
  );

endmodule
