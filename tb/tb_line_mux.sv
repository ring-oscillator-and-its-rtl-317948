// Testbench of the line-output multiplexer: for every select value, random
// line patterns; the expected output is the selected bit, taken here.
`timescale 1ns / 1ps
module tb_line_mux;
  import ro_puf_pkg::*;

  logic [N_LINES-1:0] lines;
  line_sel_t          sel;
  logic               out;
  int checks = 0, failures = 0;

  line_mux #(.N(N_LINES)) dut (.lines, .sel, .out);

  initial begin
    for (int s = 0; s < N_LINES; s++) begin
      for (int k = 0; k < 16; k++) begin
        lines = N_LINES'($urandom);
        if (k == 0) lines = N_LINES'(1) << s;
        if (k == 1) lines = ~(N_LINES'(1) << s);
        sel = line_sel_t'(s);
        #1;
        checks++;
        if (out !== ((lines >> s) & 1)) begin
          failures++;
          $display("FAIL sel=%0d lines=%b out=%b", s, lines, out);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
