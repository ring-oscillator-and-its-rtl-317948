// Line-enable demultiplexer: routes one enable signal to one of N_LINES ring
// lines.
//
// The line number sel chooses which bit of en_out follows en_in; all other
// bits stay low, so the unselected rings stay stopped. The paper uses two of
// these, one per element of a pair, each with one input, eight outputs and
// three select bits. It is purely combinational.
`timescale 1ns / 1ps
module line_demux
  import ro_puf_pkg::*;
#(
  parameter int unsigned N = N_LINES
) (
  input  logic                 en_in,
  input  logic [$clog2(N)-1:0] sel,
  output logic [N-1:0]         en_out
);

  always_comb begin
    en_out = '0;
    en_out[sel] = en_in;
  end

endmodule
