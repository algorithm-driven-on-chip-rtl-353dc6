// tb_site_count_chip: one chip of a given site count and its bench host.
//
// Testbench helper for tb_cs_site_counts. It builds the chip with N_SITES
// sites, plays every user block with tb_site_model (clocked by the chip's
// matched clock) and runs a fixed program through the chip's JTAG pins
// once reset has been released:
//   * a periphery read of the farthest site, with its round trip counted
//     in system clocks at the head of the track: two cycles per station
//     passed and two for the slice in front of station 1, 2*(N-1) + 2;
//   * power-up and enable of the farthest site and of the middle one;
//   * random user-bank writes and reads to both, compared with a model,
//     including the top word of the 4 GB space;
//   * the station's own answer for a disabled site;
//   * a request for the first site address past the end, which vanishes;
//   * the control outputs of every site afterwards.
// A far-site user access and the dropped request must each happen at
// least once. Results come out on checks, failures and done.
module tb_site_count_chip
  import cs_pkg::*;
#(
  parameter int N = 5
) (
  input  logic clk_io,
  input  logic rstn_io,
  output int   checks,
  output int   failures,
  output bit   done
);
  int l_checks = 0, l_failures = 0;

  task automatic check(input bit ok, input string what);
    l_checks++;
    if (!ok) begin l_failures++; $display("FAIL: %s at %0t", what, $time); end
  endtask

  function automatic msg_t mk(int site, bank_e bank, cmd_e cmd, logic [31:0] addr, logic [31:0] data);
    msg_t m;
    m.cmd = cmd; m.site_addr = 7'(site); m.bank_addr = bank; m.word_addr = addr; m.data = data;
    return m;
  endfunction

  initial begin checks = 0; failures = 0; done = 0; end


  logic debug_io;
  logic site_clk [N], site_rstn [N], site_en [N], site_en_pwr_bar [N];
  logic site_req_val [N], site_req_rdy [N], site_resp_val [N], site_resp_rdy [N], site_debug [N];
  site_msg_t site_req_msg [N], site_resp_msg [N];

  tb_jtag_if #(.HALF(30)) j ();

  chipstitch_top #(.N_SITES(N)) dut (
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
    tb_site_model #(.INIT_XOR(32'h0001_0000 * (i + 1))) u_site (
      .clk(dut.clk_matched), .rstn(site_rstn[i]), .en(site_en[i]),
      .req_val(site_req_val[i]), .req_rdy(site_req_rdy[i]), .req_msg(site_req_msg[i]),
      .resp_val(site_resp_val[i]), .resp_rdy(site_resp_rdy[i]), .resp_msg(site_resp_msg[i]),
      .debug(site_debug[i])
    );
  end

  // reference model of this chip
  logic m_en [N], m_pwr [N];
  logic [31:0] m_mem [N][logic [31:0]];

  function automatic msg_t expect_of(msg_t r);
    msg_t e = r;
    int s = int'(r.site_addr);
    if (r.bank_addr == BANK_PERIPH) begin
      if (r.cmd == CMD_WRITE) begin
        if (r.word_addr == ADDR_EN)         m_en[s]  = r.data[0];
        if (r.word_addr == ADDR_EN_PWR_BAR) m_pwr[s] = r.data[0];
      end else begin
        case (r.word_addr)
          ADDR_RSTN_SOFT:  e.data = 32'd1;
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
                                            : ((32'h0001_0000 * (s + 1)) ^ r.word_addr);
    end
    return e;
  endfunction

  logic [3:0]   ir_out;
  logic [127:0] dout;
  int c_far_user = 0, c_dropped = 0;

  task automatic post(msg_t m);
    j.shift_ir(4'h2, ir_out);
    j.shift_dr(128'(m), MSG_W, dout);
  endtask

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
    check(v && r == e, $sformatf("%0d sites: site %0d bank %0d %s @%h: got %h expected %h",
          N, m.site_addr, m.bank_addr, m.cmd == CMD_WRITE ? "write" : "read", m.word_addr, r, e));
    if (m.bank_addr == BANK_USER && int'(m.site_addr) == N - 1 && m_en[N-1]) c_far_user++;
  endtask

  // round trip of the next request, measured at the head of the track
  int lat = -1;
  initial begin
    @(posedge dut.clk iff (dut.h2b_val && dut.h2b_rdy));
    #1 lat = 0;
    while (!dut.b2h_val) begin @(posedge dut.clk); #1 lat++; end
  end

  initial begin
    msg_t r;
    bit v;
    int mid;
    mid = N / 2;
    for (int s = 0; s < N; s++) begin m_en[s] = 0; m_pwr[s] = 1; end
    @(posedge rstn_io);
    repeat (10) @(posedge clk_io);
    j.reset();

    op(mk(N - 1, BANK_PERIPH, CMD_READ, ADDR_EN_PWR_BAR, 0));
    check(lat == 2 * (N - 1) + 2,
          $sformatf("%0d sites: far periphery round trip %0d cycles, expected %0d", N, lat, 2 * (N - 1) + 2));

    foreach (m_en[s]) if (s == mid || s == N - 1) begin
      op(mk(s, BANK_PERIPH, CMD_WRITE, ADDR_EN_PWR_BAR, 0));
      op(mk(s, BANK_PERIPH, CMD_WRITE, ADDR_EN, 1));
    end

    repeat (12) begin
      int s;
      s = ($urandom_range(0, 1) == 0) ? mid : N - 1;
      op(mk(s, BANK_USER, cmd_e'($urandom_range(0, 1)), 4 * $urandom_range(0, 3), $urandom));
    end
    op(mk(N - 1, BANK_USER, CMD_WRITE, 32'hFFFF_FFFC, 32'h1234_5678));
    op(mk(N - 1, BANK_USER, CMD_READ, 32'hFFFF_FFFC, 0));
    op(mk(1, BANK_USER, CMD_READ, 32'h8, 0));

    post(mk(N, BANK_PERIPH, CMD_READ, ADDR_EN, 0));
    fetch(r, v, 5);
    check(!v, $sformatf("%0d sites: request for site %0d vanishes", N, N));
    if (!v) c_dropped++;

    for (int s = 0; s < N; s++)
      check(site_en[s] == m_en[s] && site_en_pwr_bar[s] == m_pwr[s] && site_rstn[s] == 1,
            $sformatf("%0d sites: site %0d controls", N, s));
    check(c_far_user > 0, $sformatf("%0d sites: far-site user access happened", N));
    check(c_dropped > 0,  $sformatf("%0d sites: absent-site drop happened", N));
    $display("%0d sites: far round trip %0d cycles, far user accesses %0d, dropped %0d",
             N, lat, c_far_user, c_dropped);
    checks = l_checks; failures = l_failures;
    done = 1;
  end
endmodule
