// cs_sync2: multi-flop synchronizer for one single-bit level signal.
//
// Each single-bit control signal that crosses between a station and its
// user block (the site reset, the site enable and the site's debug/busy
// flag) passes through a chain of STAGES flip-flops clocked in the
// receiving domain. Inside a station that clock is clk_matched, the copy of
// the system clock delayed to match the user block's own clock insertion
// delay, so the last flop launches the signal in step with the user block's
// capture edge.
//
// Interface: d is asynchronous to clk, q follows d after STAGES rising edges
// of clk. rst_n clears the chain asynchronously to RST_VAL.
//
// Follows the paper: two flops per 'sync' box, clocked by clk_matched.
// Own choice: asynchronous reset and its value.
module cs_sync2 #(
  parameter int unsigned STAGES  = 2,
  parameter logic        RST_VAL = 1'b0
) (
  input  logic clk,
  input  logic rst_n,
  input  logic d,
  output logic q
);

  logic [STAGES-1:0] chain_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) chain_q <= {STAGES{RST_VAL}};
    else        chain_q <= {chain_q[STAGES-2:0], d};
  end

  assign q = chain_q[STAGES-1];

endmodule
