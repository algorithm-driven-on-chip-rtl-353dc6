// tb_cs_site_counts: the whole chip built for 5, 10, 20, 50 and 100 sites.
//
// Nothing in a station depends on how many sites there are, so the same
// RTL must work unchanged for any site count. This testbench builds five
// chips side by side, one per size, with the default slice placement (one
// slice in front of station 1). Each chip gets its own JTAG host and its
// own user-block models, clocked by the chip's matched clock. All five run
// the same program at once, through their pins only (tb_site_count_chip
// describes it): far and middle sites are powered up and used, the round
// trip to the farthest site is timed against 2*(N-1) + 2 system clocks,
// and a request past the last site must vanish. This testbench adds up the
// five chips' checks and failures once all have finished.
module tb_cs_site_counts;
  import cs_pkg::*;
  localparam int NSZ = 5;
  localparam int SIZES [NSZ] = '{5, 10, 20, 50, 100};

  logic clk_io = 0, rstn_io = 1;
  int checks = 0, failures = 0;
  bit done [NSZ];

  always #5 clk_io = ~clk_io;

  for (genvar z = 0; z < NSZ; z++) begin : g_size
    int c, f;
    tb_site_count_chip #(.N(SIZES[z])) u_chip (
      .clk_io(clk_io), .rstn_io(rstn_io), .checks(c), .failures(f), .done(done[z])
    );
  end

  initial begin
    #2 rstn_io = 0;
    repeat (4) @(posedge clk_io);
    rstn_io = 1;
    wait (done[0] && done[1] && done[2] && done[3] && done[4]);
    checks   = g_size[0].c + g_size[1].c + g_size[2].c + g_size[3].c + g_size[4].c;
    failures = g_size[0].f + g_size[1].f + g_size[2].f + g_size[3].f + g_size[4].f;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (1000000) @(posedge clk_io);
    checks   = g_size[0].c + g_size[1].c + g_size[2].c + g_size[3].c + g_size[4].c;
    failures = g_size[0].f + g_size[1].f + g_size[2].f + g_size[3].f + g_size[4].f + 1;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
