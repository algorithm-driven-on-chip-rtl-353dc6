// tb_cs_pipe_queue: self-checking test of the single-entry normal queue.
//
// Drives random valid/ready traffic and compares every dequeued message
// with a reference FIFO model kept in the testbench. Also checks that the
// queue never holds more than one message, that enq_rdy is low whenever it
// is full (normal, not pipelined), and that a stream with the output always
// ready moves exactly one message every two cycles.
module tb_cs_pipe_queue;
  localparam int W = 73;
  logic clk = 0, rst_n = 0;
  logic enq_val, enq_rdy, deq_val, deq_rdy;
  logic [W-1:0] enq_msg, deq_msg;
  int checks = 0, failures = 0;

  cs_pipe_queue #(.W(W)) dut (.*);

  always #5 clk = ~clk;

  logic [W-1:0] model [$];

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s at %0t", what, $time);
    end
  endtask

  // scoreboard, sampled just before each rising edge
  always @(negedge clk) if (rst_n) begin
    check(enq_rdy == !deq_val, "normal queue: enq_rdy must equal empty");
    check(model.size() <= 1, "occupancy above one");
  end
  always @(posedge clk) if (rst_n) begin
    if (deq_val && deq_rdy) begin
      check(model.size() > 0 && deq_msg == model[0], "dequeued message mismatch");
      if (model.size() > 0) void'(model.pop_front());
    end
    if (enq_val && enq_rdy) model.push_back(enq_msg);
  end

  function automatic logic [W-1:0] rnd_msg();
    return {$urandom, $urandom, $urandom};
  endfunction

  int n_deq, t0, t1;
  initial begin
    enq_val = 0; deq_rdy = 0; enq_msg = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // random traffic
    repeat (2000) begin
      @(negedge clk);
      enq_val = $urandom_range(0, 1);
      deq_rdy = $urandom_range(0, 2) != 0;
      if (enq_val) enq_msg = rnd_msg();
    end
    // throughput: 20 messages with the output always ready
    @(negedge clk); enq_val = 0; deq_rdy = 1;
    repeat (3) @(negedge clk);
    n_deq = 0;
    enq_val = 1; enq_msg = rnd_msg();
    while (n_deq < 20) begin
      @(posedge clk);
      if (deq_val && deq_rdy) begin
        n_deq++;
        if (n_deq == 1) t0 = int'($time);
        t1 = int'($time);
      end
      if (enq_val && enq_rdy) begin
        #1 enq_msg = rnd_msg();
      end
    end
    // 19 intervals of two cycles between the first and the 20th message
    check((t1 - t0) / 10 == 38, $sformatf("20 messages spanned %0d cycles, expected 38", (t1 - t0) / 10));
    @(negedge clk); enq_val = 0;
    repeat (3) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
