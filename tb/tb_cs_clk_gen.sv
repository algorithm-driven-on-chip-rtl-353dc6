// tb_cs_clk_gen: self-checking test of the matched-clock generator model.
//
// Gives three sites different delays, selects each in turn and measures
// the time from every clk edge to the matching clk_matched edge.
module tb_cs_clk_gen;
  import cs_pkg::*;
  localparam int unsigned DLY [MAX_SITES] = '{0: 0, 1: 2, 5: 3, default: 1};
  logic clk = 0, clk_matched;
  logic [SITE_AW-1:0] sel = '0;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  cs_clk_gen #(.DELAY(DLY)) dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s at %0t", what, $time); end
  endtask

  int s;
  initial begin
    for (int k = 0; k < 4; k++) begin
      s = (k == 3) ? 9 : (k == 2 ? 5 : k);
      sel = 7'(s);
      repeat (2) @(posedge clk);               // let the new delay settle
      repeat (5) begin
        // clk_matched must still be low just before the delay has passed
        // and high just after it
        @(posedge clk);
        if (DLY[s] > 0) begin
          #(DLY[s] - 0.25);
          check(clk_matched == 1'b0, $sformatf("site %0d rising edge too early", s));
          #0.5;
        end else #0.25;
        check(clk_matched == 1'b1, $sformatf("site %0d rising edge too late", s));
        @(negedge clk);
        if (DLY[s] > 0) begin
          #(DLY[s] - 0.25);
          check(clk_matched == 1'b1, $sformatf("site %0d falling edge too early", s));
          #0.5;
        end else #0.25;
        check(clk_matched == 1'b0, $sformatf("site %0d falling edge too late", s));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #10000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
