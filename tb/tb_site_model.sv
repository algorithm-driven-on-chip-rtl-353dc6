// tb_site_model: behavioural model of one chip site user block.
//
// Stands in for a user design in simulation. It exposes a word-addressed
// memory as the user bank: a write stores the data and is answered with
// the same data; a read returns the stored word, or for a word never
// written the pattern INIT_XOR ^ word_addr. The model takes a request when
// it is enabled and out of reset, holds it for a random 0..3 cycles, then
// offers the response until it is taken. debug is high while a request is
// being served (the busy flag used to trigger power measurements).
// Counters record how many requests it served.
module tb_site_model
  import cs_pkg::*;
#(
  parameter logic [31:0] INIT_XOR = 32'h5A00_0000
) (
  input  logic      clk,
  input  logic      rstn,
  input  logic      en,
  input  logic      req_val,
  output logic      req_rdy,
  input  site_msg_t req_msg,
  output logic      resp_val,
  input  logic      resp_rdy,
  output site_msg_t resp_msg,
  output logic      debug
);
  logic [31:0] mem [logic [31:0]];
  int          wait_q;
  logic        busy_q;
  int          served = 0;

  assign req_rdy  = rstn && en && !busy_q;
  assign debug    = busy_q;
  assign resp_val = busy_q && (wait_q == 0);

  always @(posedge clk or negedge rstn) begin
    if (!rstn) begin
      busy_q   <= 1'b0;
      wait_q   <= 0;
      resp_msg <= '0;
    end else begin
      if (req_val && req_rdy) begin
        busy_q <= 1'b1;
        wait_q <= $urandom_range(0, 3);
        resp_msg.cmd       <= req_msg.cmd;
        resp_msg.word_addr <= req_msg.word_addr;
        if (req_msg.cmd == CMD_WRITE) begin
          mem[req_msg.word_addr] = req_msg.data;
          resp_msg.data <= req_msg.data;
        end else begin
          resp_msg.data <= mem.exists(req_msg.word_addr) ? mem[req_msg.word_addr]
                                                         : (INIT_XOR ^ req_msg.word_addr);
        end
      end else if (busy_q && wait_q > 0) begin
        wait_q <= wait_q - 1;
      end else if (resp_val && resp_rdy) begin
        busy_q <= 1'b0;
        served <= served + 1;
      end
    end
  end
endmodule
