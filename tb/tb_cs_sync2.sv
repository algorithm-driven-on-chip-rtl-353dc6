// tb_cs_sync2: self-checking test of the two-flop synchronizer.
//
// Changes d at random between clock edges and checks that q equals the
// value d had two rising edges earlier, and that reset forces q to the
// reset value.
module tb_cs_sync2;
  logic clk = 0, rst_n = 0, d = 0, q;
  int checks = 0, failures = 0;
  logic hist [3];

  cs_sync2 #(.STAGES(2), .RST_VAL(1'b0)) dut (.*);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s at %0t", what, $time); end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    #1 check(q == 1'b0, "reset value");
    rst_n = 1;
    hist = '{0, 0, 0};
    repeat (500) begin
      @(posedge clk);
      hist[2] = hist[1]; hist[1] = hist[0]; hist[0] = d;   // d sampled at this edge
      #1 check(q == hist[1], "q must be d delayed by two edges");
      #($urandom_range(1, 7)) d = $urandom_range(0, 1);
    end
    // asynchronous reset clears the chain at once
    d = 1; repeat (3) @(posedge clk);
    #2 rst_n = 0; #1 check(q == 1'b0, "asynchronous reset");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
