// tb_cs_async_fifo: self-checking test of the single-entry async FIFO.
//
// Write and read sides run on unrelated clocks (10 ns and 7.3 ns). Random
// valid/ready traffic on both sides; every message read must equal the
// oldest one written and the FIFO may never hold more than one message.
// The latency from a write to r_val must be two or three read clocks.
module tb_cs_async_fifo;
  localparam int W = 65;
  logic wclk = 0, rclk = 0, wrst_n = 0, rrst_n = 0;
  logic w_val, w_rdy, r_val, r_rdy;
  logic [W-1:0] w_msg, r_msg;
  int checks = 0, failures = 0;
  int n_wr = 0, n_rd = 0;

  cs_async_fifo #(.W(W)) dut (.*);

  always #5   wclk = ~wclk;
  always #3.65 rclk = ~rclk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s at %0t", what, $time); end
  endtask

  logic [W-1:0] model [$];
  realtime t_wr;
  int rclk_since_wr;

  always @(posedge wclk) if (wrst_n && w_val && w_rdy) begin
    model.push_back(w_msg);
    n_wr++;
    check(n_wr - n_rd <= 1, "more than one message stored");
  end

  always @(posedge rclk) if (rrst_n) begin
    if (r_val && r_rdy) begin
      check(model.size() > 0 && r_msg == model[0], "read data mismatch");
      if (model.size() > 0) void'(model.pop_front());
      n_rd++;
    end
  end

  // latency: count read clocks from a write until r_val rises
  int lat_checks = 0;
  initial begin
    forever begin
      @(posedge wclk iff (wrst_n && w_val && w_rdy));
      rclk_since_wr = 0;
      while (!r_val) begin
        @(posedge rclk);
        rclk_since_wr++;
      end
      check(rclk_since_wr >= 2 && rclk_since_wr <= 3,
            $sformatf("write-to-r_val latency %0d read clocks", rclk_since_wr));
      lat_checks++;
      @(posedge rclk iff (!r_val));
    end
  end

  initial begin
    w_val = 0; r_rdy = 0; w_msg = '0;
    #20 wrst_n = 1; rrst_n = 1;
    fork
      repeat (3000) begin
        @(negedge wclk);
        w_val = $urandom_range(0, 1);
        w_msg = {$urandom, $urandom, 1'($urandom)};
      end
      repeat (4000) begin
        @(negedge rclk);
        r_rdy = $urandom_range(0, 3) != 0;
      end
    join
    @(negedge wclk) w_val = 0; r_rdy = 1;
    repeat (10) @(posedge rclk);
    check(n_wr == n_rd && n_wr > 300, $sformatf("all written read back (%0d/%0d)", n_wr, n_rd));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #200000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
