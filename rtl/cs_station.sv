// cs_station: chip site station, one per chip site on the interconnect.
//
// Stations are chained into a line. Each one sits in the narrow track next
// to its chip site and has a fixed size that does not depend on how many
// sites the chip has. It does four things:
//
//  1. Routing. Requests (h2b) enter a single-entry pipe queue. A request
//     whose site address is not this station's ID goes on to the next
//     station unchanged. A request for this site is consumed here.
//  2. Periphery bank (bank bit = 1). Three 1-bit control registers live in
//     the station, outside the site's power domain, at word addresses
//     0x1000 rstn_soft (soft reset, active low), 0x1004 en (site enable) and
//     0x1008 en_pwr_bar (power switches off when 1). A write stores bit 0 of
//     the data; a read returns the register in bit 0. Both are answered at
//     once with a response on the b2h track.
//  3. User bank (bank bit = 0). The 65-bit {cmd, word address, data} part of
//     the request crosses into the user block through a single-entry async
//     FIFO written on clk and read on clk_matched. The user block's 65-bit
//     response comes back through a second async FIFO and is sent upstream
//     tagged with this site's address and bank 0.
//  4. Responses (b2h). Responses from the next station enter a single-entry
//     pipe queue. Three sources share the b2h output with fixed priority:
//     the local periphery answer, then the user block's response, then the
//     queued response from further down the line.
//
// Site control: site_rstn is low while the system reset or rstn_soft is
// low; it, site_en and the site's debug flag each pass a two-flop
// synchronizer on clk_matched. en_pwr_bar drives the power switches
// directly. When en is 0 the station isolates the site: site_req_val,
// site_resp_rdy and the debug flag are forced low and the site's response
// valid is ignored, so a powered-down block can put nothing on the track.
// A user-bank request to a site whose en is 0 is answered by the station
// itself with data 0, so that the single master never waits forever.
//
// Timing: one clock through the h2b queue; periphery answers leave the
// station in the cycle the request is taken from the queue. Every queue is
// a normal single-entry queue, so a stream moves at most every second
// cycle. rstn passes through combinationally (pipeline slices register it).
//
// Follows the paper: the message format, the four single-entry queues,
// the three registers and their addresses, the 65-bit async FIFOs, the
// synchronizers on clk_matched, the response tag (site_addr = own ID,
// bank = 0) and that the network gates a disabled site. Own choices: reset
// values (rstn_soft = 1, en = 0, en_pwr_bar = 1), the response to a write
// (it echoes the written data), the fixed b2h priority, the local answer to
// a disabled site and reading unmapped periphery addresses as 0.
module cs_station
  import cs_pkg::*;
(
  input  logic               clk,
  input  logic               clk_matched,
  input  logic               rstn,
  input  logic [SITE_AW-1:0] station_id,
  input  logic               debug_in,      // from stations further down
  output logic               debug_out,     // toward the controller
  // h2b track
  input  logic               h2b_in_val,
  output logic               h2b_in_rdy,
  input  msg_t               h2b_in_msg,
  output logic               h2b_out_val,
  input  logic               h2b_out_rdy,
  output msg_t               h2b_out_msg,
  // b2h track
  input  logic               b2h_in_val,
  output logic               b2h_in_rdy,
  input  msg_t               b2h_in_msg,
  output logic               b2h_out_val,
  input  logic               b2h_out_rdy,
  output msg_t               b2h_out_msg,
  // chip site user block
  output logic               site_clk,
  output logic               site_rstn,
  output logic               site_en,
  output logic               site_en_pwr_bar,
  output logic               site_req_val,
  input  logic               site_req_rdy,
  output site_msg_t          site_req_msg,
  input  logic               site_resp_val,
  output logic               site_resp_rdy,
  input  site_msg_t          site_resp_msg,
  input  logic               site_debug
);

  // ------------------------------------------------------------------
  // h2b pipe queue and routing
  // ------------------------------------------------------------------
  logic head_val, head_rdy;
  msg_t head;

  cs_pipe_queue #(.W(MSG_W)) u_h2b_pipe_q (
    .clk(clk), .rst_n(rstn),
    .enq_val(h2b_in_val), .enq_rdy(h2b_in_rdy), .enq_msg(h2b_in_msg),
    .deq_val(head_val), .deq_rdy(head_rdy), .deq_msg(head)
  );

  logic rstn_soft_q, en_q, en_pwr_bar_q;

  logic mine, is_local, is_user;
  assign mine     = (head.site_addr == station_id);
  // answered by the station: periphery bank, or user bank of a disabled site
  assign is_local = mine && ((head.bank_addr == BANK_PERIPH) || !en_q);
  assign is_user  = mine && (head.bank_addr == BANK_USER) && en_q;

  assign h2b_out_val = head_val && !mine;
  assign h2b_out_msg = head;

  // h2b user queue (station clock -> clk_matched)
  logic      ureq_w_rdy;
  logic      ureq_r_val, ureq_r_rdy;
  site_msg_t ureq_w_msg, ureq_r_msg;

  assign ureq_w_msg = '{cmd: head.cmd, word_addr: head.word_addr, data: head.data};

  // b2h arbitration: local answer > user response > downstream
  logic      uresp_r_val, uresp_r_rdy;
  site_msg_t uresp_r_msg;
  logic      bq_val, bq_rdy;
  msg_t      bq_msg;
  logic      local_val, grant_local, grant_user, grant_down;
  msg_t      local_msg;

  assign local_val   = head_val && is_local;
  assign grant_local = local_val;
  assign grant_user  = !local_val && uresp_r_val;
  assign grant_down  = !local_val && !uresp_r_val && bq_val;

  always_comb begin
    if (!mine)          head_rdy = h2b_out_rdy;
    else if (is_local)  head_rdy = b2h_out_rdy;
    else                head_rdy = ureq_w_rdy;
  end

  // ------------------------------------------------------------------
  // Periphery bank registers
  // ------------------------------------------------------------------
  logic local_fire;
  assign local_fire = local_val && b2h_out_rdy;

  always_ff @(posedge clk or negedge rstn) begin
    if (!rstn) begin
      rstn_soft_q  <= 1'b1;
      en_q         <= 1'b0;
      en_pwr_bar_q <= 1'b1;
    end else if (local_fire && head.bank_addr == BANK_PERIPH && head.cmd == CMD_WRITE) begin
      unique case (head.word_addr)
        ADDR_RSTN_SOFT:  rstn_soft_q  <= head.data[0];
        ADDR_EN:         en_q         <= head.data[0];
        ADDR_EN_PWR_BAR: en_pwr_bar_q <= head.data[0];
        default: ;
      endcase
    end
  end

  logic [DATA_W-1:0] periph_rdata;
  always_comb begin
    periph_rdata = '0;
    unique case (head.word_addr)
      ADDR_RSTN_SOFT:  periph_rdata[0] = rstn_soft_q;
      ADDR_EN:         periph_rdata[0] = en_q;
      ADDR_EN_PWR_BAR: periph_rdata[0] = en_pwr_bar_q;
      default: ;
    endcase
  end

  always_comb begin
    local_msg = head;
    local_msg.site_addr = station_id;
    if (head.cmd == CMD_READ)
      local_msg.data = (head.bank_addr == BANK_PERIPH) ? periph_rdata : '0;
  end

  // ------------------------------------------------------------------
  // Crossing into and out of the user block
  // ------------------------------------------------------------------
  logic en_s, dbg_s;

  cs_sync2 #(.STAGES(2), .RST_VAL(1'b0)) u_sync_rstn (
    .clk(clk_matched), .rst_n(rstn), .d(rstn && rstn_soft_q), .q(site_rstn)
  );
  cs_sync2 #(.STAGES(2), .RST_VAL(1'b0)) u_sync_en (
    .clk(clk_matched), .rst_n(rstn), .d(en_q), .q(en_s)
  );
  cs_sync2 #(.STAGES(2), .RST_VAL(1'b0)) u_sync_dbg (
    .clk(clk_matched), .rst_n(rstn), .d(site_debug), .q(dbg_s)
  );

  assign site_clk        = clk;
  assign site_en         = en_s;
  assign site_en_pwr_bar = en_pwr_bar_q;

  cs_async_fifo #(.W(SITE_MSG_W)) u_h2b_user_q (
    .wclk(clk), .wrst_n(rstn),
    .w_val(head_val && is_user), .w_rdy(ureq_w_rdy), .w_msg(ureq_w_msg),
    .rclk(clk_matched), .rrst_n(rstn),
    .r_val(ureq_r_val), .r_rdy(ureq_r_rdy), .r_msg(ureq_r_msg)
  );

  assign site_req_val = ureq_r_val && en_s;
  assign ureq_r_rdy   = site_req_rdy && en_s;
  assign site_req_msg = ureq_r_msg;

  logic uresp_w_val, uresp_w_rdy;
  assign uresp_w_val   = site_resp_val && en_s;
  assign site_resp_rdy = uresp_w_rdy && en_s;

  cs_async_fifo #(.W(SITE_MSG_W)) u_b2h_user_q (
    .wclk(clk_matched), .wrst_n(rstn),
    .w_val(uresp_w_val), .w_rdy(uresp_w_rdy), .w_msg(site_resp_msg),
    .rclk(clk), .rrst_n(rstn),
    .r_val(uresp_r_val), .r_rdy(uresp_r_rdy), .r_msg(uresp_r_msg)
  );

  // ------------------------------------------------------------------
  // b2h pipe queue and output mux
  // ------------------------------------------------------------------
  cs_pipe_queue #(.W(MSG_W)) u_b2h_pipe_q (
    .clk(clk), .rst_n(rstn),
    .enq_val(b2h_in_val), .enq_rdy(b2h_in_rdy), .enq_msg(b2h_in_msg),
    .deq_val(bq_val), .deq_rdy(bq_rdy), .deq_msg(bq_msg)
  );

  assign uresp_r_rdy = grant_user && b2h_out_rdy;
  assign bq_rdy      = grant_down && b2h_out_rdy;
  assign b2h_out_val = local_val || uresp_r_val || bq_val;

  always_comb begin
    if (grant_local) begin
      b2h_out_msg = local_msg;
    end else if (grant_user) begin
      b2h_out_msg = '{cmd: uresp_r_msg.cmd, site_addr: station_id, bank_addr: BANK_USER,
                      word_addr: uresp_r_msg.word_addr, data: uresp_r_msg.data};
    end else begin
      b2h_out_msg = bq_msg;
    end
  end

  // ------------------------------------------------------------------
  // Debug (busy) flag toward the controller
  // ------------------------------------------------------------------
  assign debug_out = debug_in || (dbg_s && en_s);

  // The b2h output is a valid/ready source: once offered, a response may
  // only be replaced by a higher-priority one, never withdrawn.
  a_b2h_hold: assert property (@(posedge clk) disable iff (!rstn)
    (b2h_out_val && !b2h_out_rdy) |=> b2h_out_val);

endmodule
