// Testbench of the line-enable demultiplexer: every select value with the
// enable low and high; the expected output is a one-hot vector built here.
`timescale 1ns / 1ps
module tb_line_demux;
  import ro_puf_pkg::*;

  logic              en_in;
  line_sel_t         sel;
  logic [N_LINES-1:0] en_out;
  int checks = 0, failures = 0;

  line_demux #(.N(N_LINES)) dut (.en_in, .sel, .en_out);

  initial begin
    for (int e = 0; e < 2; e++) begin
      for (int s = 0; s < N_LINES; s++) begin
        logic [N_LINES-1:0] expect_v;
        en_in = e[0];
        sel   = line_sel_t'(s);
        #1;
        expect_v = e[0] ? (N_LINES'(1) << s) : '0;
        checks++;
        if (en_out !== expect_v) begin
          failures++;
          $display("FAIL en=%0d sel=%0d got %b want %b", e, s, en_out, expect_v);
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
