// tb_cs_station: self-checking test of one chip site station.
//
// The station under test has site address 5 and a behavioural user block
// (tb_site_model) clocked by clk_matched, which here lags clk by 2 ns.
// The testbench keeps its own model of the three periphery registers and
// of the user memory, sends requests for this site and for other sites,
// injects responses from "downstream" stations, and checks:
//   * requests for other sites leave on h2b_out unchanged and in order;
//   * every response that leaves on b2h_out is one that was expected
//     (periphery answers, user answers tagged site 5 / bank 0, disabled-site
//     answers with data 0, forwarded downstream responses), none missing;
//   * register reset values and their effect on site_en, site_en_pwr_bar and
//     site_rstn (through the synchronizers);
//   * a periphery read is answered in the cycle after it is accepted;
//   * debug_out reflects the enabled site's busy flag and debug_in.
module tb_cs_station;
  import cs_pkg::*;
  localparam logic [6:0] ID = 7'd5;
  localparam logic [31:0] INIT_XOR = 32'h5A00_0000;

  logic clk = 0, clkm, rstn = 0;
  logic dbg_in = 0, dbg_out;
  logic hiv, hir, hov, hor, biv, bir, bov, bor;
  msg_t him, hom, bim, bom;
  logic site_clk, site_rstn, site_en, site_en_pwr_bar;
  logic sq_val, sq_rdy, sp_val, sp_rdy, site_debug;
  site_msg_t sq_msg, sp_msg;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;
  assign #2 clkm = clk;

  cs_station dut (
    .clk(clk), .clk_matched(clkm), .rstn(rstn), .station_id(ID),
    .debug_in(dbg_in), .debug_out(dbg_out),
    .h2b_in_val(hiv), .h2b_in_rdy(hir), .h2b_in_msg(him),
    .h2b_out_val(hov), .h2b_out_rdy(hor), .h2b_out_msg(hom),
    .b2h_in_val(biv), .b2h_in_rdy(bir), .b2h_in_msg(bim),
    .b2h_out_val(bov), .b2h_out_rdy(bor), .b2h_out_msg(bom),
    .site_clk(site_clk), .site_rstn(site_rstn), .site_en(site_en),
    .site_en_pwr_bar(site_en_pwr_bar),
    .site_req_val(sq_val), .site_req_rdy(sq_rdy), .site_req_msg(sq_msg),
    .site_resp_val(sp_val), .site_resp_rdy(sp_rdy), .site_resp_msg(sp_msg),
    .site_debug(site_debug)
  );

  tb_site_model #(.INIT_XOR(INIT_XOR)) u_site (
    .clk(clkm), .rstn(site_rstn), .en(site_en),
    .req_val(sq_val), .req_rdy(sq_rdy), .req_msg(sq_msg),
    .resp_val(sp_val), .resp_rdy(sp_rdy), .resp_msg(sp_msg),
    .debug(site_debug)
  );

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s at %0t", what, $time); end
  endtask

  // ---------------- reference model ----------------
  logic m_rstn_soft = 1, m_en = 0, m_pwr_bar = 1;
  logic [31:0] m_mem [logic [31:0]];
  msg_t exp_fwd [$];     // expected on h2b_out, in order
  msg_t exp_resp [$];    // expected on b2h_out, any order

  function automatic msg_t expect_resp(msg_t r);
    msg_t e = r;
    e.site_addr = ID;
    if (r.bank_addr == BANK_PERIPH) begin
      if (r.cmd == CMD_WRITE) begin
        case (r.word_addr)
          ADDR_RSTN_SOFT:  m_rstn_soft = r.data[0];
          ADDR_EN:         m_en        = r.data[0];
          ADDR_EN_PWR_BAR: m_pwr_bar   = r.data[0];
          default: ;
        endcase
      end else begin
        case (r.word_addr)
          ADDR_RSTN_SOFT:  e.data = {31'b0, m_rstn_soft};
          ADDR_EN:         e.data = {31'b0, m_en};
          ADDR_EN_PWR_BAR: e.data = {31'b0, m_pwr_bar};
          default:         e.data = '0;
        endcase
      end
    end else if (!m_en) begin
      if (r.cmd == CMD_READ) e.data = '0;
    end else if (r.cmd == CMD_WRITE) begin
      m_mem[r.word_addr] = r.data;
    end else begin
      e.data = m_mem.exists(r.word_addr) ? m_mem[r.word_addr] : (INIT_XOR ^ r.word_addr);
    end
    return e;
  endfunction

  // ---------------- drivers and monitors ----------------
  int n_fwd = 0, n_resp = 0, n_down = 0, n_dbg = 0;
  bit rand_ready = 1;

  task automatic send(msg_t m);
    @(negedge clk);
    hiv = 1; him = m;
    if (m.site_addr == ID) exp_resp.push_back(expect_resp(m));
    else exp_fwd.push_back(m);
    @(posedge clk iff hir);
    #1 hiv = 0;
  endtask

  always @(negedge clk) begin
    hor = rand_ready ? ($urandom_range(0, 2) != 0) : 1'b1;
    bor = rand_ready ? ($urandom_range(0, 2) != 0) : 1'b1;
  end

  always @(posedge clk) if (rstn) begin
    if (hov && hor) begin
      check(exp_fwd.size() > 0 && hom == exp_fwd[0], "forwarded request");
      if (exp_fwd.size() > 0) void'(exp_fwd.pop_front());
      n_fwd++;
    end
    if (bov && bor) begin : match
      int idx[$];
      idx = exp_resp.find_first_index(x) with (x == bom);
      check(idx.size() == 1, $sformatf("unexpected response %h", bom));
      if (idx.size() == 1) exp_resp.delete(idx[0]);
      n_resp++;
    end
    if (dbg_out) n_dbg++;
  end

  // downstream responses
  bit down_on = 0;
  initial begin
    biv = 0; bim = '0;
    forever begin
      @(negedge clk);
      if (down_on && !biv && $urandom_range(0, 3) == 0) begin
        bim = msg_t'({$urandom, $urandom, $urandom});
        bim.site_addr = 7'($urandom_range(6, 127));
        biv = 1;
        exp_resp.push_back(bim);
        n_down++;
      end
      @(posedge clk);
      if (biv && bir) begin #1 biv = 0; end
    end
  end

  function automatic msg_t mk(logic [6:0] site, bank_e bank, cmd_e cmd,
                              logic [31:0] addr, logic [31:0] data);
    msg_t m;
    m.cmd = cmd; m.site_addr = site; m.bank_addr = bank; m.word_addr = addr; m.data = data;
    return m;
  endfunction

  task automatic drain();
    int guard = 0;
    while ((exp_resp.size() != 0 || exp_fwd.size() != 0) && guard < 2000) begin
      @(posedge clk); guard++;
    end
    check(exp_resp.size() == 0 && exp_fwd.size() == 0, "all expected traffic drained");
  endtask

  int lat;
  logic [31:0] addrs [4] = '{32'h0, 32'h10, 32'hFFFF_FFFC, 32'h1000};
  initial begin
    hiv = 0; him = '0;
    repeat (3) @(posedge clk);
    #1 check(site_en_pwr_bar == 1 && site_en == 0 && site_rstn == 0, "outputs in reset");
    rstn = 1;
    repeat (4) @(posedge clk);
    #1 check(site_rstn == 1, "site_rstn released through synchronizer");
    check(site_clk == clk, "site_clk is the system clock");

    // reset values, read back
    send(mk(ID, BANK_PERIPH, CMD_READ, ADDR_RSTN_SOFT, 32'hFFFF));
    send(mk(ID, BANK_PERIPH, CMD_READ, ADDR_EN, 32'hFFFF));
    send(mk(ID, BANK_PERIPH, CMD_READ, ADDR_EN_PWR_BAR, 32'hFFFF));
    send(mk(ID, BANK_PERIPH, CMD_READ, 32'h2000, 32'hFFFF));
    drain();

    // periphery read latency: answered the cycle after it is accepted
    rand_ready = 0;
    @(negedge clk);
    hiv = 1; him = mk(ID, BANK_PERIPH, CMD_READ, ADDR_EN, 0);
    exp_resp.push_back(expect_resp(him));
    @(posedge clk iff hir); #1 hiv = 0;
    lat = 0;
    while (!bov) begin @(posedge clk); #1 lat++; end
    check(lat == 0, $sformatf("periphery answer latency %0d", lat));
    drain();
    rand_ready = 1;

    // user bank of a disabled site: answered by the station with data 0
    send(mk(ID, BANK_USER, CMD_READ, 32'h40, 32'h1234));
    send(mk(ID, BANK_USER, CMD_WRITE, 32'h40, 32'h1234));
    drain();
    check(u_site.served == 0, "disabled site receives nothing");

    // power on and enable
    send(mk(ID, BANK_PERIPH, CMD_WRITE, ADDR_EN_PWR_BAR, 32'h0));
    send(mk(ID, BANK_PERIPH, CMD_WRITE, ADDR_EN, 32'h1));
    drain();
    repeat (3) @(posedge clk);
    #1 check(site_en == 1 && site_en_pwr_bar == 0, "site enabled and powered");

    // random traffic
    down_on = 1;
    repeat (600) begin
      case ($urandom_range(0, 5))
        0, 1, 2: send(mk(ID, BANK_USER, cmd_e'($urandom_range(0, 1)),
                         addrs[$urandom_range(0, 3)] + 4 * $urandom_range(0, 3), $urandom));
        3:       send(mk(ID, BANK_PERIPH, CMD_READ,
                         32'h1000 + 4 * $urandom_range(0, 3), $urandom));
        default: send(mk(7'($urandom_range(0, 127)) == ID ? 7'd0 : 7'($urandom_range(0, 127)),
                         bank_e'($urandom_range(0, 1)), cmd_e'($urandom_range(0, 1)),
                         $urandom, $urandom));
      endcase
    end
    down_on = 0;
    drain();
    check(u_site.served > 150, $sformatf("user block served %0d requests", u_site.served));
    check(n_dbg > 0, "debug_out reported the busy site");
    check(n_down > 50, "downstream responses forwarded");

    // debug_in passes through; disabled site's busy flag is masked
    dbg_in = 1; #1 check(dbg_out == 1, "debug_in passes to debug_out");
    dbg_in = 0;

    // soft reset of the site
    send(mk(ID, BANK_PERIPH, CMD_WRITE, ADDR_RSTN_SOFT, 32'h0));
    drain();
    repeat (3) @(posedge clk);
    #3 check(site_rstn == 0, "soft reset reaches the site");
    send(mk(ID, BANK_PERIPH, CMD_WRITE, ADDR_RSTN_SOFT, 32'h1));
    drain();
    repeat (3) @(posedge clk);
    #3 check(site_rstn == 1, "soft reset released");

    // disable again
    send(mk(ID, BANK_PERIPH, CMD_WRITE, ADDR_EN, 32'h0));
    drain();
    repeat (3) @(posedge clk);
    #3 check(site_en == 0, "site disabled");
    send(mk(ID, BANK_USER, CMD_READ, 32'h10, 32'h0));
    drain();

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (30000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
