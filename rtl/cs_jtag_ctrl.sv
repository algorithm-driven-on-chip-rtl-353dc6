// cs_jtag_ctrl: JTAG front end of the global controller.
//
// The whole chip is reached through one five-pin JTAG port (TCK, TMS, TDI,
// TDO, TRST_N), whatever the number of chip sites. This block turns JTAG
// scans into memory-mapped requests for the interconnect and makes the
// responses readable through the same port.
//
// How it works. The JTAG pins are sampled with the system clock: TCK, TMS
// and TDI pass two-flop synchronizers, and a rising or falling TCK is
// detected from the synchronized samples, so the port must run at most at
// a quarter of the system clock. A standard 16-state IEEE 1149.1 TAP
// controller advances on each rising TCK; TDO changes on falling TCK. The
// 4-bit instruction register selects one data register (shifted LSB
// first):
//   IR 0x2 H2B    73 bits  {cmd, site_addr, bank_addr, word_addr, data}.
//                          Update-DR hands the message to the interconnect
//                          (h2b_val stays high until h2b_rdy). If the
//                          previous request has not left yet, the new one
//                          is dropped and the sticky 'lost' bit is set.
//   IR 0x3 B2H    76 bits  Capture-DR loads {lost, h2b_pending, resp_valid,
//                          response message}; resp_valid = 1 means the
//                          scan carries a new response, which is then
//                          removed from the holding register. 'lost' is
//                          cleared by the capture.
//   IR 0x4 CLKSEL 7 bits   selects which chip site's matched clock delay
//                          line drives clk_matched.
//   others        BYPASS   1-bit bypass register (IR 0xF is BYPASS).
// Capture-IR loads 4'b0001. Test-Logic-Reset (entered by TRST_N low or by
// five TCKs with TMS high) selects BYPASS.
//
// Responses: one holding register; b2h_rdy is high while it is empty, so
// responses that are not read stall the b2h track (backpressure).
//
// Follows the paper: a 5-pin JTAG port whose bits are assembled into a
// memory-mapped packet for any chip site, and a per-site clk_matched
// selection. Own choices: oversampling JTAG in the system clock, the
// instruction codes, register layouts and the status bits.
module cs_jtag_ctrl
  import cs_pkg::*;
(
  input  logic               clk,
  input  logic               rstn,
  // JTAG pins
  input  logic               tck,
  input  logic               tms,
  input  logic               tdi,
  input  logic               trst_n,
  output logic               tdo,
  // interconnect head
  output logic               h2b_val,
  input  logic               h2b_rdy,
  output msg_t               h2b_msg,
  input  logic               b2h_val,
  output logic               b2h_rdy,
  input  msg_t               b2h_msg,
  // matched clock selection
  output logic [SITE_AW-1:0] clk_sel
);

  typedef enum logic [3:0] {
    TLR, RTI, SEL_DR, CAP_DR, SH_DR, EX1_DR, PAU_DR, EX2_DR, UPD_DR,
    SEL_IR, CAP_IR, SH_IR, EX1_IR, PAU_IR, EX2_IR, UPD_IR
  } tap_e;

  localparam logic [3:0] IR_H2B    = 4'h2;
  localparam logic [3:0] IR_B2H    = 4'h3;
  localparam logic [3:0] IR_CLKSEL = 4'h4;
  localparam logic [3:0] IR_BYPASS = 4'hF;

  localparam int unsigned H2B_LEN = MSG_W;        // 73
  localparam int unsigned B2H_LEN = MSG_W + 3;    // 76
  localparam int unsigned DR_W    = B2H_LEN;

  // ---- pin sampling ----
  logic rst_n;   // controller reset: system reset and TRST_N
  logic trst_s, tck_s, tms_s, tdi_s, tck_d;

  cs_sync2 #(.RST_VAL(1'b0)) u_sync_trst (.clk(clk), .rst_n(rstn), .d(trst_n), .q(trst_s));
  cs_sync2 #(.RST_VAL(1'b0)) u_sync_tck  (.clk(clk), .rst_n(rstn), .d(tck),    .q(tck_s));
  cs_sync2 #(.RST_VAL(1'b0)) u_sync_tms  (.clk(clk), .rst_n(rstn), .d(tms),    .q(tms_s));
  cs_sync2 #(.RST_VAL(1'b0)) u_sync_tdi  (.clk(clk), .rst_n(rstn), .d(tdi),    .q(tdi_s));

  assign rst_n = rstn;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) tck_d <= 1'b0;
    else        tck_d <= tck_s;
  end

  logic tck_rise, tck_fall;
  assign tck_rise = tck_s && !tck_d;
  assign tck_fall = !tck_s && tck_d;

  // ---- TAP state machine ----
  tap_e state_q, state_n;

  always_comb begin
    unique case (state_q)
      TLR:    state_n = tms_s ? TLR    : RTI;
      RTI:    state_n = tms_s ? SEL_DR : RTI;
      SEL_DR: state_n = tms_s ? SEL_IR : CAP_DR;
      CAP_DR: state_n = tms_s ? EX1_DR : SH_DR;
      SH_DR:  state_n = tms_s ? EX1_DR : SH_DR;
      EX1_DR: state_n = tms_s ? UPD_DR : PAU_DR;
      PAU_DR: state_n = tms_s ? EX2_DR : PAU_DR;
      EX2_DR: state_n = tms_s ? UPD_DR : SH_DR;
      UPD_DR: state_n = tms_s ? SEL_DR : RTI;
      SEL_IR: state_n = tms_s ? TLR    : CAP_IR;
      CAP_IR: state_n = tms_s ? EX1_IR : SH_IR;
      SH_IR:  state_n = tms_s ? EX1_IR : SH_IR;
      EX1_IR: state_n = tms_s ? UPD_IR : PAU_IR;
      PAU_IR: state_n = tms_s ? EX2_IR : PAU_IR;
      EX2_IR: state_n = tms_s ? UPD_IR : SH_IR;
      UPD_IR: state_n = tms_s ? SEL_DR : RTI;
      default: state_n = TLR;
    endcase
  end

  // ---- registers ----
  logic [3:0]      ir_q, ir_sr_q;
  logic [DR_W-1:0] dr_q;
  logic            pend_q, lost_q, rvalid_q;
  msg_t            req_q, resp_q;
  logic [SITE_AW-1:0] clk_sel_q;

  // length of the selected data register
  int unsigned dr_len;
  always_comb begin
    unique case (ir_q)
      IR_H2B:    dr_len = H2B_LEN;
      IR_B2H:    dr_len = B2H_LEN;
      IR_CLKSEL: dr_len = SITE_AW;
      default:   dr_len = 1;
    endcase
  end

  // data register shifted one place toward bit 0, TDI entering at the top
  logic [DR_W-1:0] dr_shifted;
  always_comb begin
    dr_shifted = dr_q >> 1;
    dr_shifted[dr_len-1] = tdi_s;
  end

  logic capture_b2h;
  assign capture_b2h = tck_rise && state_q == CAP_DR && ir_q == IR_B2H;

  logic update_h2b;
  assign update_h2b = tck_rise && state_q == UPD_DR && ir_q == IR_H2B;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q   <= TLR;
      ir_q      <= IR_BYPASS;
      ir_sr_q   <= '0;
      dr_q      <= '0;
      tdo       <= 1'b0;
      clk_sel_q <= '0;
    end else if (!trst_s) begin
      state_q   <= TLR;
      ir_q      <= IR_BYPASS;
    end else begin
      if (tck_rise) begin
        state_q <= state_n;
        unique case (state_q)
          TLR:    ir_q <= IR_BYPASS;
          CAP_IR: ir_sr_q <= 4'b0001;
          SH_IR:  ir_sr_q <= {tdi_s, ir_sr_q[3:1]};
          UPD_IR: ir_q <= ir_sr_q;
          CAP_DR: begin
            unique case (ir_q)
              IR_B2H:    dr_q <= {lost_q, pend_q, rvalid_q, resp_q};
              IR_CLKSEL: dr_q <= DR_W'(clk_sel_q);
              IR_H2B:    dr_q <= DR_W'(req_q);
              default:   dr_q <= '0;
            endcase
          end
          SH_DR:  dr_q <= dr_shifted;
          UPD_DR: if (ir_q == IR_CLKSEL) clk_sel_q <= dr_q[SITE_AW-1:0];
          default: ;
        endcase
      end
      if (tck_fall) begin
        if (state_q == SH_IR)      tdo <= ir_sr_q[0];
        else if (state_q == SH_DR) tdo <= dr_q[0];
      end
    end
  end

  // ---- request and response holding registers ----
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pend_q   <= 1'b0;
      lost_q   <= 1'b0;
      rvalid_q <= 1'b0;
      req_q    <= '0;
      resp_q   <= '0;
    end else begin
      if (h2b_val && h2b_rdy) pend_q <= 1'b0;
      if (update_h2b) begin
        if (pend_q && !h2b_rdy) begin
          lost_q <= 1'b1;
        end else begin
          req_q  <= msg_t'(dr_q[H2B_LEN-1:0]);
          pend_q <= 1'b1;
        end
      end
      if (capture_b2h) begin
        lost_q   <= 1'b0;
        rvalid_q <= 1'b0;
      end
      if (b2h_val && b2h_rdy) begin
        resp_q   <= b2h_msg;
        rvalid_q <= 1'b1;
      end
    end
  end

  assign h2b_val = pend_q;
  assign h2b_msg = req_q;
  assign b2h_rdy = !rvalid_q && !capture_b2h;
  assign clk_sel = clk_sel_q;

endmodule
