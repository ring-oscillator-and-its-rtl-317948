// Line-output multiplexer: passes the output of the ring line chosen by sel
// to the frequency counter.
//
// The paper places two of these at the ring outputs, "with the same
// structure as the input" selectors (eight lines, three select bits), one
// for each element of a pair. It is purely combinational; the output is
// asynchronous to any clock and is synchronised in the counter.
`timescale 1ns / 1ps
module line_mux
  import ro_puf_pkg::*;
#(
  parameter int unsigned N = N_LINES
) (
  input  logic [N-1:0]         lines,
  input  logic [$clog2(N)-1:0] sel,
  output logic                 out
);

  always_comb out = lines[sel];

endmodule
