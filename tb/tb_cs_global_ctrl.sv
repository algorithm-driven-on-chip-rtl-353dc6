// tb_cs_global_ctrl: self-checking test of the global controller.
//
// Drives the pins (clock, reset, JTAG) and plays the first station with a
// loopback responder that returns each request with its data inverted.
// Checks the reset synchronizer (rstn follows rstn_io down at once and up
// two clocks later), that a JTAG-built request reaches the track and its
// response comes back through JTAG, that CLKSEL switches clk_matched to the
// chosen site's delay, and that debug_io follows the debug track one clock
// later.
module tb_cs_global_ctrl;
  import cs_pkg::*;
  localparam int unsigned DLY [MAX_SITES] = '{3: 2, default: 0};
  logic clk_io = 0, rstn_io = 1, debug_io, clk, clk_matched, rstn, debug = 0;
  logic h2b_val, h2b_rdy, b2h_val, b2h_rdy;
  msg_t h2b_msg, b2h_msg;
  int checks = 0, failures = 0;

  always #5 clk_io = ~clk_io;

  tb_jtag_if #(.HALF(50)) j ();

  cs_global_ctrl #(.SITE_DELAY(DLY)) dut (
    .clk_io(clk_io), .rstn_io(rstn_io),
    .jtag_tck(j.tck), .jtag_tms(j.tms), .jtag_tdi(j.tdi), .jtag_trst_n(j.trst_n),
    .jtag_tdo(j.tdo), .debug_io(debug_io),
    .clk(clk), .clk_matched(clk_matched), .rstn(rstn), .debug(debug),
    .h2b_val(h2b_val), .h2b_rdy(h2b_rdy), .h2b_msg(h2b_msg),
    .b2h_val(b2h_val), .b2h_rdy(b2h_rdy), .b2h_msg(b2h_msg)
  );

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s at %0t", what, $time); end
  endtask

  // loopback station: one request at a time, answered two cycles later
  int n_req = 0;
  initial begin
    h2b_rdy = 0; b2h_val = 0; b2h_msg = '0;
    forever begin
      @(negedge clk); h2b_rdy = 1;
      @(posedge clk iff h2b_val);
      n_req++;
      #1 h2b_rdy = 0; b2h_msg = h2b_msg; b2h_msg.data = ~h2b_msg.data;
      repeat (2) @(posedge clk);
      #1 b2h_val = 1;
      @(posedge clk iff b2h_rdy);
      #1 b2h_val = 0;
    end
  end

  logic [3:0] ir_out;
  logic [127:0] dout;
  msg_t req;
  initial begin
    #1 rstn_io = 0;
    #1 check(rstn == 0, "rstn low while rstn_io low");
    @(negedge clk_io); rstn_io = 1;
    @(posedge clk_io); #1 check(rstn == 0, "rstn not released after one clock");
    @(posedge clk_io); #1 check(rstn == 1, "rstn released after two clocks");
    check(clk === clk_io, "clk passes through");

    j.reset();
    for (int n = 0; n < 5; n++) begin
      req = msg_t'({$urandom, $urandom, $urandom});
      j.shift_ir(4'h2, ir_out);
      j.shift_dr(128'(req), MSG_W, dout);
      repeat (20) @(posedge clk);
      j.shift_ir(4'h3, ir_out);
      j.shift_dr('0, MSG_W + 3, dout);
      check(dout[MSG_W] == 1 && msg_t'(dout[MSG_W-1:0]) == '{cmd: req.cmd, site_addr: req.site_addr,
            bank_addr: req.bank_addr, word_addr: req.word_addr, data: ~req.data},
            "JTAG round trip through the track");
    end
    check(n_req == 5, "five requests on the track");

    // matched clock: site 0 has no delay, site 3 two ns
    @(posedge clk); #0.5 check(clk_matched == 1, "site 0 matched clock in phase");
    j.shift_ir(4'h4, ir_out);
    j.shift_dr(128'd3, SITE_AW, dout);
    repeat (4) @(posedge clk);
    @(posedge clk); #1.5 check(clk_matched == 0, "site 3 matched clock still low at 1.5 ns");
    #1 check(clk_matched == 1, "site 3 matched clock high at 2.5 ns");

    // debug flag to the pin
    @(negedge clk); debug = 1;
    @(posedge clk); #1 check(debug_io == 1, "debug_io follows after one clock");
    @(negedge clk); debug = 0;
    @(posedge clk); #1 check(debug_io == 0, "debug_io clears");

    // reset assertion is immediate
    #2 rstn_io = 0; #1 check(rstn == 0, "rstn falls at once");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #2000000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
