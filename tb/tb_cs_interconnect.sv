// tb_cs_interconnect: self-checking test of a line of stations.
//
// Six stations with pipeline slices in front of stations 1 and 4, each
// with a behavioural user block. The testbench acts as the single master:
// it enables and powers some sites, then sends random periphery and user
// requests to all sites (and to addresses past the last station, which
// must vanish). Every response that reaches the head must match the
// testbench's own model of registers and memories, including its site
// and bank tags. With the network idle, it also checks the round-trip
// latency of a periphery read to each site: two cycles per station passed
// plus two per slice passed, as each single-entry queue costs one cycle in
// each direction.
module tb_cs_interconnect;
  import cs_pkg::*;
  localparam int N = 6;
  localparam logic [MAX_SITES-1:0] MASK = MAX_SITES'(6'b010010);

  logic clk = 0, clk_matched, rstn = 0, debug;
  logic h2b_val, h2b_rdy, b2h_val, b2h_rdy;
  msg_t h2b_msg, b2h_msg;
  logic site_clk [N], site_rstn [N], site_en [N], site_en_pwr_bar [N];
  logic site_req_val [N], site_req_rdy [N], site_resp_val [N], site_resp_rdy [N], site_debug [N];
  site_msg_t site_req_msg [N], site_resp_msg [N];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;
  assign #1 clk_matched = clk;

  cs_interconnect #(.N_SITES(N), .SLICE_MASK(MASK)) dut (.*);

  for (genvar i = 0; i < N; i++) begin : g_user
    tb_site_model #(.INIT_XOR(32'h1000_0000 * (i + 1))) u_site (
      .clk(clk_matched), .rstn(site_rstn[i]), .en(site_en[i]),
      .req_val(site_req_val[i]), .req_rdy(site_req_rdy[i]), .req_msg(site_req_msg[i]),
      .resp_val(site_resp_val[i]), .resp_rdy(site_resp_rdy[i]), .resp_msg(site_resp_msg[i]),
      .debug(site_debug[i])
    );
  end

  int served [N] = '{default: 0};
  always @(posedge clk_matched)
    for (int i = 0; i < N; i++) if (site_req_val[i] && site_req_rdy[i]) served[i]++;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s at %0t", what, $time); end
  endtask

  // ---------------- reference model ----------------
  logic m_soft [N], m_en [N], m_pwr [N];
  logic [31:0] m_mem [N][logic [31:0]];
  msg_t exp_resp [$];

  function automatic void model(msg_t r);
    msg_t e = r;
    int s = int'(r.site_addr);
    if (s >= N) return;                       // dropped past the last station
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
                                            : ((32'h1000_0000 * (s + 1)) ^ r.word_addr);
    end
    exp_resp.push_back(e);
  endfunction

  function automatic msg_t mk(int site, bank_e bank, cmd_e cmd, logic [31:0] addr, logic [31:0] data);
    msg_t m;
    m.cmd = cmd; m.site_addr = 7'(site); m.bank_addr = bank; m.word_addr = addr; m.data = data;
    return m;
  endfunction

  task automatic send(msg_t m);
    @(negedge clk);
    h2b_val = 1; h2b_msg = m;
    model(m);
    @(posedge clk iff h2b_rdy);
    #1 h2b_val = 0;
  endtask

  bit rand_ready = 1;
  int n_resp = 0, n_dbg = 0;
  always @(negedge clk) b2h_rdy = rand_ready ? ($urandom_range(0, 3) != 0) : 1'b1;

  always @(posedge clk) if (rstn) begin
    if (b2h_val && b2h_rdy) begin : match
      int idx[$];
      idx = exp_resp.find_first_index(x) with (x == b2h_msg);
      check(idx.size() == 1, $sformatf("unexpected response %h", b2h_msg));
      if (idx.size() == 1) exp_resp.delete(idx[0]);
      n_resp++;
    end
    if (debug) n_dbg++;
  end

  task automatic drain();
    int guard = 0;
    while (exp_resp.size() != 0 && guard < 3000) begin @(posedge clk); guard++; end
    check(exp_resp.size() == 0, $sformatf("%0d responses missing", exp_resp.size()));
    repeat (5) @(posedge clk);
  endtask

  function automatic int slices_upto(int k);
    int c = 0;
    for (int i = 0; i <= k; i++) if (MASK[i]) c++;
    return c;
  endfunction

  int lat;
  initial begin
    for (int s = 0; s < N; s++) begin m_soft[s] = 1; m_en[s] = 0; m_pwr[s] = 1; end
    h2b_val = 0; h2b_msg = '0;
    repeat (3) @(posedge clk);
    rstn = 1;
    repeat (3) @(posedge clk);

    // round-trip latency of a periphery read, idle network
    rand_ready = 0;
    for (int k = 0; k < N; k++) begin
      @(negedge clk);
      h2b_val = 1; h2b_msg = mk(k, BANK_PERIPH, CMD_READ, ADDR_EN_PWR_BAR, 0);
      model(h2b_msg);
      @(posedge clk iff h2b_rdy); #1 h2b_val = 0;
      lat = 0;
      while (!b2h_val) begin @(posedge clk); #1 lat++; end
      check(lat == 2 * k + 2 * slices_upto(k),
            $sformatf("site %0d round trip %0d cycles, expected %0d", k, lat, 2 * k + 2 * slices_upto(k)));
      drain();
    end
    rand_ready = 1;

    // enable and power sites 0, 2, 3, 5; leave 1 and 4 off
    foreach (m_en[s]) if (s != 1 && s != 4) begin
      send(mk(s, BANK_PERIPH, CMD_WRITE, ADDR_EN_PWR_BAR, 0));
      send(mk(s, BANK_PERIPH, CMD_WRITE, ADDR_EN, 1));
    end
    drain();
    for (int s = 0; s < N; s++)
      check(site_en[s] == m_en[s] && site_en_pwr_bar[s] == m_pwr[s], $sformatf("site %0d controls", s));

    // random traffic to every site, and to absent sites
    repeat (800) begin
      int s;
      s = $urandom_range(0, N);            // N = absent site
      if (s == N) s = $urandom_range(N, 127);
      if ($urandom_range(0, 3) == 0)
        send(mk(s, BANK_PERIPH, CMD_READ, 32'h1000 + 4 * $urandom_range(0, 2), $urandom));
      else
        send(mk(s, BANK_USER, cmd_e'($urandom_range(0, 1)), 4 * $urandom_range(0, 7), $urandom));
    end
    drain();
    $display("served: %0d %0d %0d %0d %0d %0d", served[0], served[1], served[2], served[3], served[4], served[5]);
    check(served[0] > 20 && served[5] > 20, "far and near sites served");
    check(served[1] == 0 && served[4] == 0, "disabled sites untouched");
    check(n_dbg > 0, "busy flag seen at the head");
    $display("responses=%0d debug_cycles=%0d", n_resp, n_dbg);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (60000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
