// tb_chipstitch_top: end-to-end test of the whole chip at its default size.
//
// The testbench is the lab bench: it drives only the chip's pins (clock,
// reset, JTAG) and plays the 25 user blocks (tb_site_model, clocked by the
// chip's matched clock as a real user block's clock tree would deliver
// it). Every operation goes in and comes out through JTAG scans. Checked
// against the testbench's own model:
//   * periphery register reads and writes, near and far (through the
//     pipeline slice), and their effect on site_en, site_en_pwr_bar and
//     site_rstn;
//   * user-bank writes and reads through the async FIFOs;
//   * the station's own answer for a disabled site;
//   * requests for an absent site vanish;
//   * backpressure: responses not yet read over JTAG stall the b2h track,
//     and all arrive once read;
//   * matched-clock selection and the busy flag on debug_io.
// Each of these mechanisms is counted and must happen at least once.
module tb_chipstitch_top;
  import cs_pkg::*;
  localparam int N = 25;

  logic clk_io = 0, rstn_io = 1, debug_io;
  logic site_clk [N], site_rstn [N], site_en [N], site_en_pwr_bar [N];
  logic site_req_val [N], site_req_rdy [N], site_resp_val [N], site_resp_rdy [N], site_debug [N];
  site_msg_t site_req_msg [N], site_resp_msg [N];
  int checks = 0, failures = 0;

  always #5 clk_io = ~clk_io;

  tb_jtag_if #(.HALF(30)) j ();

  chipstitch_top dut (
    .clk_io(clk_io), .rstn_io(rstn_io),
    .jtag_tck(j.tck), .jtag_tms(j.tms), .jtag_tdi(j.tdi), .jtag_trst_n(j.trst_n),
    .jtag_tdo(j.tdo), .debug_io(debug_io),
    .site_clk(site_clk), .site_rstn(site_rstn), .site_en(site_en),
    .site_en_pwr_bar(site_en_pwr_bar),
    .site_req_val(site_req_val), .site_req_rdy(site_req_rdy), .site_req_msg(site_req_msg),
    .site_resp_val(site_resp_val), .site_resp_rdy(site_resp_rdy), .site_resp_msg(site_resp_msg),
    .site_debug(site_debug)
  );

  for (genvar i = 0; i < N; i++) begin : g_user
    tb_site_model #(.INIT_XOR(32'h0100_0000 * (i + 1))) u_site (
      .clk(dut.clk_matched), .rstn(site_rstn[i]), .en(site_en[i]),
      .req_val(site_req_val[i]), .req_rdy(site_req_rdy[i]), .req_msg(site_req_msg[i]),
      .resp_val(site_resp_val[i]), .resp_rdy(site_resp_rdy[i]), .resp_msg(site_resp_msg[i]),
      .debug(site_debug[i])
    );
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s at %0t", what, $time); end
  endtask

  // ---------------- mechanism counters ----------------
  int c_periph = 0, c_user = 0, c_disabled = 0, c_dropped = 0, c_stall = 0;
  int c_slice = 0, c_debug = 0, c_clksel = 0, c_softrst = 0, c_forward = 0;
  always @(posedge dut.clk) begin
    if (dut.b2h_val && !dut.b2h_rdy) c_stall++;
    if (debug_io) c_debug++;
    if (dut.u_net.g_site[1].g_slice.u_slice.h2b_out_val &&
        dut.u_net.g_site[1].g_slice.u_slice.h2b_out_rdy) c_slice++;
    if (dut.u_net.g_site[0].u_station.h2b_out_val &&
        dut.u_net.g_site[0].u_station.h2b_out_rdy) c_forward++;
  end

  // ---------------- reference model ----------------
  logic m_soft [N], m_en [N], m_pwr [N];
  logic [31:0] m_mem [N][logic [31:0]];

  function automatic msg_t mk(int site, bank_e bank, cmd_e cmd, logic [31:0] addr, logic [31:0] data);
    msg_t m;
    m.cmd = cmd; m.site_addr = 7'(site); m.bank_addr = bank; m.word_addr = addr; m.data = data;
    return m;
  endfunction

  function automatic msg_t expect_of(msg_t r);
    msg_t e = r;
    int s = int'(r.site_addr);
    if (r.bank_addr == BANK_PERIPH) begin
      if (r.cmd == CMD_WRITE) begin
        case (r.word_addr)
          ADDR_RSTN_SOFT:  m_soft[s] = r.data[0];
          ADDR_EN:         m_en[s]   = r.data[0];
          ADDR_EN_PWR_BAR: m_pwr[s]  = r.data[0];
          default: ;
        endcase
      end else begin
        case (r.word_addr)
          ADDR_RSTN_SOFT:  e.data = {31'b0, m_soft[s]};
          ADDR_EN:         e.data = {31'b0, m_en[s]};
          ADDR_EN_PWR_BAR: e.data = {31'b0, m_pwr[s]};
          default:         e.data = '0;
        endcase
      end
    end else if (!m_en[s]) begin
      if (r.cmd == CMD_READ) e.data = '0;
    end else if (r.cmd == CMD_WRITE) begin
      m_mem[s][r.word_addr] = r.data;
    end else begin
      e.data = m_mem[s].exists(r.word_addr) ? m_mem[s][r.word_addr]
                                            : ((32'h0100_0000 * (s + 1)) ^ r.word_addr);
    end
    return e;
  endfunction

  // ---------------- JTAG host operations ----------------
  logic [3:0]   ir_out;
  logic [127:0] dout;

  task automatic post(msg_t m);
    j.shift_ir(4'h2, ir_out);
    j.shift_dr(128'(m), MSG_W, dout);
  endtask

  // poll the response register up to 'tries' times
  task automatic fetch(output msg_t r, output bit valid, input int tries = 20);
    valid = 0;
    j.shift_ir(4'h3, ir_out);
    for (int t = 0; t < tries && !valid; t++) begin
      j.shift_dr('0, MSG_W + 3, dout);
      valid = dout[MSG_W];
      r = msg_t'(dout[MSG_W-1:0]);
    end
  endtask

  task automatic op(msg_t m);
    msg_t e, r;
    bit v;
    e = expect_of(m);
    post(m);
    fetch(r, v);
    check(v && r == e, $sformatf("site %0d bank %0d %s @%h: got %h expected %h",
          m.site_addr, m.bank_addr, m.cmd == CMD_WRITE ? "write" : "read", m.word_addr, r, e));
    if (m.bank_addr == BANK_PERIPH) c_periph++;
    else if (m_en[int'(m.site_addr)]) c_user++;
    else c_disabled++;
  endtask

  msg_t r, e3 [3];
  bit v;
  initial begin
    for (int s = 0; s < N; s++) begin m_soft[s] = 1; m_en[s] = 0; m_pwr[s] = 1; end
    #2 rstn_io = 0;
    repeat (4) @(posedge clk_io);
    rstn_io = 1;
    repeat (10) @(posedge clk_io);
    for (int s = 0; s < N; s++)
      check(site_en[s] == 0 && site_en_pwr_bar[s] == 1 && site_rstn[s] == 1, "sites idle after reset");
    j.reset();

    // periphery reads near and far
    op(mk(0, BANK_PERIPH, CMD_READ, ADDR_EN_PWR_BAR, 0));
    op(mk(N - 1, BANK_PERIPH, CMD_READ, ADDR_RSTN_SOFT, 0));
    // disabled site answers by itself
    op(mk(3, BANK_USER, CMD_READ, 32'h40, 0));

    // power up and enable sites 3 and N-1, select site 3's matched clock
    foreach (m_en[s]) if (s == 3 || s == N - 1) begin
      op(mk(s, BANK_PERIPH, CMD_WRITE, ADDR_EN_PWR_BAR, 0));
      op(mk(s, BANK_PERIPH, CMD_WRITE, ADDR_EN, 1));
    end
    j.shift_ir(4'h4, ir_out);
    j.shift_dr(128'd3, SITE_AW, dout);
    j.shift_dr(128'd3, SITE_AW, dout);
    check(dout[6:0] == 7'd3, "matched clock select");
    c_clksel++;
    for (int s = 0; s < N; s++)
      check(site_en[s] == m_en[s] && site_en_pwr_bar[s] == m_pwr[s], $sformatf("site %0d controls", s));

    // user bank traffic
    repeat (16) begin
      int s;
      s = ($urandom_range(0, 1) == 0) ? 3 : N - 1;
      op(mk(s, BANK_USER, cmd_e'($urandom_range(0, 1)), 4 * $urandom_range(0, 3), $urandom));
    end
    op(mk(N - 1, BANK_PERIPH, CMD_READ, ADDR_EN, 0));

    // backpressure: three writes before any response is read
    for (int k = 0; k < 3; k++) begin
      msg_t m = mk(N - 1, BANK_USER, CMD_WRITE, 32'h100 + 4 * k, 32'hBEEF_0000 + k);
      e3[k] = expect_of(m);
      post(m);
      repeat (200) @(posedge clk_io);
    end
    for (int k = 0; k < 3; k++) begin
      fetch(r, v);
      check(v && r == e3[k], $sformatf("stalled response %0d", k));
      c_user++;
    end
    check(c_stall > 0, "b2h track stalled behind the unread response");

    // absent site: nothing comes back
    post(mk(100, BANK_PERIPH, CMD_READ, ADDR_EN, 0));
    fetch(r, v, 5);
    check(!v, "request for an absent site vanishes");
    if (!v) c_dropped++;

    // soft reset of site 3
    op(mk(3, BANK_PERIPH, CMD_WRITE, ADDR_RSTN_SOFT, 0));
    repeat (4) @(posedge clk_io);
    check(site_rstn[3] == 0 && site_rstn[N-1] == 1, "soft reset of site 3 only");
    op(mk(3, BANK_PERIPH, CMD_WRITE, ADDR_RSTN_SOFT, 1));
    repeat (4) @(posedge clk_io);
    check(site_rstn[3] == 1, "soft reset released");
    c_softrst++;
    op(mk(3, BANK_USER, CMD_READ, 32'h0, 0));   // the user model keeps its memory through a soft reset

    $display("mechanisms: periph=%0d user=%0d disabled=%0d dropped=%0d stall_cycles=%0d slice=%0d forward=%0d debug_cycles=%0d clksel=%0d softrst=%0d",
             c_periph, c_user, c_disabled, c_dropped, c_stall, c_slice, c_forward, c_debug, c_clksel, c_softrst);
    check(c_periph > 0,   "periphery access happened");
    check(c_user > 0,     "user-bank access happened");
    check(c_disabled > 0, "disabled-site answer happened");
    check(c_dropped > 0,  "absent-site drop happened");
    check(c_stall > 0,    "backpressure stall happened");
    check(c_slice > 0,    "pipeline slice traversal happened");
    check(c_forward > 0,  "forwarding past a station happened");
    check(c_debug > 0,    "busy flag on debug_io happened");
    check(c_clksel > 0,   "matched clock selection happened");
    check(c_softrst > 0,  "soft reset happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000000) @(posedge clk_io);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
