// cs_clk_gen: behavioural model of the matched-clock generator.
//
// This is a behavioural model: the delays exist only in simulation, and a
// synthesis tool keeps just the multiplexer. In silicon the
// generator is a bank of hand-sized delay lines (buffer chains), one per
// chip site, whose delay equals that site's clock-tree insertion delay,
// followed by a multiplexer. Its output, clk_matched, travels along the
// track next to the system clock with the same delay, so at each station
// it arrives as late as the clock edge inside the user block. The
// station's synchronizers and async FIFO read ports run on clk_matched, and
// their launch into the user block then meets timing with no hold buffers.
//
// Model: one delay line per site address, each a continuous assignment
// that follows clk after DELAY[i] simulator time units (the design's other
// files use the default time unit), and a multiplexer on sel. DELAY holds
// one entry per site address; its values come from each site's layout, so
// the default is zero for every site. The lines are inertial, like real
// buffer chains, so a delay must stay below half a clock period. A
// synthesis tool drops the delays and keeps the multiplexer.
//
// Interface: clk in, 7-bit site select, clk_matched out. The multiplexer
// switches as soon as sel changes, which can cut a clock pulse short, as
// it would in silicon; sel should be changed only while no site is
// active.
//
// Follows the paper: one delay line per site, selected by a multiplexer.
// Own choice: selection by a site number register written over JTAG, and
// zero default delays.
module cs_clk_gen
  import cs_pkg::*;
#(
  parameter int unsigned DELAY [MAX_SITES] = '{default: 0}
) (
  input  logic               clk,
  input  logic [SITE_AW-1:0] sel,
  output logic               clk_matched
);

  logic line [MAX_SITES];

  for (genvar i = 0; i < MAX_SITES; i++) begin : g_line
    if (DELAY[i] == 0) begin : g_direct
      assign line[i] = clk;
    end else begin : g_delayed
      assign #(DELAY[i]) line[i] = clk;
    end
  end

  assign clk_matched = line[sel];

endmodule
