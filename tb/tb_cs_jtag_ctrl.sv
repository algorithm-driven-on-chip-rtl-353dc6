// tb_cs_jtag_ctrl: self-checking test of the JTAG front end.
//
// A JTAG host (tb_jtag_if) drives the controller with TCK at one
// tenth of the system clock rate. A responder in the testbench takes each
// h2b request after a random delay and returns a response derived from it
// (data XOR a constant). Checks: Capture-IR pattern, BYPASS one-bit delay,
// every scanned-in request appears unchanged on h2b, its response is read
// back through the B2H register with resp_valid set, reading again gives
// resp_valid = 0, a request written while the previous one is still
// pending sets the 'lost' bit, CLKSEL reaches clk_sel, and TRST_N returns
// the TAP to BYPASS.
module tb_cs_jtag_ctrl;
  import cs_pkg::*;
  logic clk = 0, rstn = 0;
  logic h2b_val, h2b_rdy, b2h_val, b2h_rdy;
  msg_t h2b_msg, b2h_msg;
  logic [SITE_AW-1:0] clk_sel;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  tb_jtag_if #(.HALF(50)) j ();

  cs_jtag_ctrl dut (
    .clk(clk), .rstn(rstn),
    .tck(j.tck), .tms(j.tms), .tdi(j.tdi), .trst_n(j.trst_n), .tdo(j.tdo),
    .h2b_val(h2b_val), .h2b_rdy(h2b_rdy), .h2b_msg(h2b_msg),
    .b2h_val(b2h_val), .b2h_rdy(b2h_rdy), .b2h_msg(b2h_msg),
    .clk_sel(clk_sel)
  );

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s at %0t", what, $time); end
  endtask

  // responder: holds requests while 'hold' is set
  bit hold = 0;
  msg_t seen [$];
  initial begin
    h2b_rdy = 0; b2h_val = 0; b2h_msg = '0;
    forever begin
      @(negedge clk);
      h2b_rdy = !hold && !b2h_val && ($urandom_range(0, 3) == 0);
      if (b2h_val && b2h_rdy) b2h_val = 0;
      @(posedge clk);
      if (h2b_val && h2b_rdy) begin
        seen.push_back(h2b_msg);
        repeat ($urandom_range(1, 5)) @(posedge clk);
        #1 b2h_msg = h2b_msg; b2h_msg.data = h2b_msg.data ^ 32'hC0DE_0000; b2h_val = 1;
        @(posedge clk iff b2h_rdy);
        #1 b2h_val = 0;
      end
    end
  end

  localparam logic [3:0] IR_H2B = 4'h2, IR_B2H = 4'h3, IR_CLKSEL = 4'h4, IR_BYPASS = 4'hF;
  logic [3:0] ir_out;
  logic [127:0] dout;
  msg_t req, resp;

  initial begin
    repeat (3) @(posedge clk);
    rstn = 1;
    repeat (3) @(posedge clk);
    j.reset();

    // Capture-IR pattern
    j.shift_ir(IR_BYPASS, ir_out);
    check(ir_out == 4'b0001, $sformatf("Capture-IR pattern %b", ir_out));
    // BYPASS: one-bit delay, captures 0
    j.shift_dr(128'hA5, 8, dout);
    check(dout[7:0] == 8'h4A, $sformatf("bypass shifted %h", dout[7:0]));

    for (int n = 0; n < 12; n++) begin
      req = msg_t'({$urandom, $urandom, $urandom});
      j.shift_ir(IR_H2B, ir_out);
      j.shift_dr(128'(req), MSG_W, dout);
      // wait for the response
      repeat (40) @(posedge clk);
      check(seen.size() > 0 && seen[$] == req, "request delivered unchanged");
      j.shift_ir(IR_B2H, ir_out);
      j.shift_dr('0, MSG_W + 3, dout);
      resp = msg_t'(dout[MSG_W-1:0]);
      check(dout[MSG_W] == 1'b1, "resp_valid set");
      check(dout[MSG_W+1] == 1'b0 && dout[MSG_W+2] == 1'b0, "no pending request, nothing lost");
      check(resp.data == (req.data ^ 32'hC0DE_0000) && resp.word_addr == req.word_addr,
            "response read back");
      j.shift_dr('0, MSG_W + 3, dout);
      check(dout[MSG_W] == 1'b0, "response consumed by the first read");
    end

    // overflow: two requests while the network does not take them
    hold = 1;
    j.shift_ir(IR_H2B, ir_out);
    j.shift_dr(128'(msg_t'(73'h1)), MSG_W, dout);
    j.shift_dr(128'(msg_t'(73'h2)), MSG_W, dout);
    j.shift_ir(IR_B2H, ir_out);
    j.shift_dr('0, MSG_W + 3, dout);
    check(dout[MSG_W+2] == 1'b1 && dout[MSG_W+1] == 1'b1, "lost and pending flags");
    hold = 0;
    repeat (40) @(posedge clk);
    check(seen[$] == msg_t'(73'h1), "first request kept, second dropped");
    j.shift_dr('0, MSG_W + 3, dout);
    check(dout[MSG_W+2] == 1'b0 && dout[MSG_W] == 1'b1, "lost cleared, response valid");

    // CLKSEL
    j.shift_ir(IR_CLKSEL, ir_out);
    j.shift_dr(128'd77, SITE_AW, dout);
    repeat (4) @(posedge clk);
    check(clk_sel == 7'd77, "clk_sel written");
    j.shift_dr(128'd3, SITE_AW, dout);
    check(dout[6:0] == 7'd77, "clk_sel read back");

    // TRST_N returns to BYPASS
    j.trst_n = 0; repeat (4) @(posedge clk); j.trst_n = 1; repeat (4) @(posedge clk);
    j.tms = 0;
    begin logic d; j.tick(0, 0, d); end
    j.shift_dr(128'h1, 2, dout);
    check(dout[1:0] == 2'b10, "BYPASS after TRST_N");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
