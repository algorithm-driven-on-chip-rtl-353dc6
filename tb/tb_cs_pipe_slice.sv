// tb_cs_pipe_slice: self-checking test of the pipeline slice.
//
// Streams random messages through the h2b and b2h queues of the slice with
// random backpressure and compares them in order with reference FIFOs.
// Checks that rstn_out falls together with rstn_in and rises exactly one
// clock after it, that debug is delayed by one clock, and that the clocks
// pass through.
module tb_cs_pipe_slice;
  import cs_pkg::*;
  logic clk = 0, clkm, rstn = 0, rstn_out, clk_out, clkm_out;
  logic dbg_in = 0, dbg_out;
  logic hiv, hir, hov, hor, biv, bir, bov, bor;
  msg_t him, hom, bim, bom;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;
  assign #2 clkm = clk;

  cs_pipe_slice dut (
    .clk_in(clk), .clk_matched_in(clkm), .rstn_in(rstn),
    .clk_out(clk_out), .clk_matched_out(clkm_out), .rstn_out(rstn_out),
    .debug_in(dbg_in), .debug_out(dbg_out),
    .h2b_in_val(hiv), .h2b_in_rdy(hir), .h2b_in_msg(him),
    .h2b_out_val(hov), .h2b_out_rdy(hor), .h2b_out_msg(hom),
    .b2h_in_val(biv), .b2h_in_rdy(bir), .b2h_in_msg(bim),
    .b2h_out_val(bov), .b2h_out_rdy(bor), .b2h_out_msg(bom)
  );

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s at %0t", what, $time); end
  endtask

  msg_t hq [$], bq [$];
  int nh = 0, nb = 0;
  always @(posedge clk) if (rstn_out) begin
    if (hov && hor) begin
      check(hq.size() > 0 && hom == hq[0], "h2b order/data");
      if (hq.size() > 0) void'(hq.pop_front());
      nh++;
    end
    if (bov && bor) begin
      check(bq.size() > 0 && bom == bq[0], "b2h order/data");
      if (bq.size() > 0) void'(bq.pop_front());
      nb++;
    end
    if (hiv && hir) hq.push_back(him);
    if (biv && bir) bq.push_back(bim);
  end

  logic dbg_prev;
  initial begin
    hiv = 0; biv = 0; hor = 0; bor = 0; him = '0; bim = '0;
    #1 check(rstn_out == 1'b0, "rstn_out low in reset");
    @(posedge clk); #1 rstn = 1;
    check(rstn_out == 1'b0, "rstn_out not yet released");
    @(posedge clk); #1 check(rstn_out == 1'b1, "rstn_out released one clock later");
    check(clk_out == clk && clkm_out == clkm, "clocks pass through");
    repeat (1500) begin
      @(negedge clk);
      hiv = $urandom_range(0, 1); him = msg_t'({$urandom, $urandom, $urandom});
      biv = $urandom_range(0, 1); bim = msg_t'({$urandom, $urandom, $urandom});
      hor = $urandom_range(0, 2) != 0; bor = $urandom_range(0, 2) != 0;
      dbg_prev = dbg_in;
      dbg_in = $urandom_range(0, 1);
      @(posedge clk); #1 check(dbg_out == dbg_in, "debug delayed by one clock");
    end
    @(negedge clk); hiv = 0; biv = 0; hor = 1; bor = 1;
    repeat (4) @(posedge clk);
    check(nh > 200 && nb > 200 && hq.size() == 0 && bq.size() == 0, "all messages delivered");
    #2 rstn = 0; #1 check(rstn_out == 1'b0 && !hov && !bov, "asynchronous reset of the slice");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
