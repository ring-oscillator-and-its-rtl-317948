// Full-size testbench: the top with every parameter at its default (0.5 s
// gate at 1 MHz, the measured line frequencies 136 46 26 14 204 66 394 56 Hz,
// four entries per cell). User "admin" / "12345" registers and then signs in;
// the challenge must carry the bits of the paper's example, every count must
// be f * 0.5 s, and each operation must take 16 * (500000 + 4) + 3 cycles.
`timescale 1ns / 1ps
module tb_ro_puf_pwm_top_full;
  import ro_puf_pkg::*;

  localparam int unsigned G = 500000;
  localparam int unsigned F [8] = '{136, 46, 26, 14, 204, 66, 394, 56};
  localparam logic [127:0] H_12345 = 128'h04df31e3361e111f42a160d1394121b1;

  logic clk = 1'b0, rst_n = 1'b0;
  logic op_valid = 0, op_ready;
  pwm_op_t op = OP_REGISTER;
  logic [7:0] id_key = 0, pw_key = 0;
  logic [127:0] pw_hash = 0;
  logic res_valid;
  pwm_status_t res_status;
  puf_word_t res_word, disp_word;
  logic [3:0] res_row, res_col, disp_row = 4'h5, disp_col = 4'h0;
  logic [1:0] disp_slot = 0;
  logic disp_valid;
  logic meas_valid;
  line_sel_t meas_line_first, meas_line_second;
  count_t meas_count_first, meas_count_second;
  int checks = 0, failures = 0;

  always #500 clk = ~clk;

  ro_puf_pwm_top dut (
    .clk, .rst_n, .op_valid, .op_ready, .op, .id_key, .pw_key, .pw_hash,
    .res_valid, .res_status, .res_word, .res_row, .res_col,
    .meas_valid, .meas_line_first, .meas_line_second, .meas_count_first, .meas_count_second,
    .disp_row, .disp_col, .disp_slot, .disp_valid, .disp_word
  );

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s at %0t", what, $time);
    end
  endtask

  always @(posedge clk) if (rst_n && meas_valid) begin
    #1;
    check(int'(meas_count_first) <= int'(F[meas_line_first]) / 2 + 1 &&
          int'(meas_count_first) >= int'(F[meas_line_first]) / 2 - 2, "count of first line");
    check(int'(meas_count_second) <= int'(F[meas_line_second]) / 2 + 1 &&
          int'(meas_count_second) >= int'(F[meas_line_second]) / 2 - 2, "count of second line");
  end

  function automatic puf_word_t expect_word(logic [127:0] h);
    puf_word_t w;
    for (int i = 0; i < 16; i++)
      w[i] = F[int'(h[127 - 8*i -: 4]) % 8] > F[int'(h[123 - 8*i -: 4]) % 8];
    return w;
  endfunction

  task automatic operate(input pwm_op_t o, input pwm_status_t st);
    int cyc;
    @(negedge clk);
    op_valid = 1; op = o; id_key = 8'h61; pw_key = 8'h31; pw_hash = H_12345;
    @(negedge clk);
    op_valid = 0; pw_hash = '0;
    cyc = 1;
    while (1) begin
      @(posedge clk); #2;
      if (res_valid) break;
      cyc++;
    end
    check(cyc == 16 * (G + 4) + 3, $sformatf("operation latency %0d", cyc));
    check(res_word == expect_word(H_12345), "PUF word");
    check(res_word[7:0] == 8'b0000_1010, "challenge bits 0 1 0 1 0 0 0 0");
    check(res_row == 4'h5 && res_col == 4'h0, "cell row 5 column 0");
    check(res_status == st, $sformatf("status %s", res_status.name()));
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    operate(OP_REGISTER, ST_REGISTERED);
    #1 check(disp_valid && disp_word == expect_word(H_12345), "challenge stored in the table");
    operate(OP_AUTHENTICATE, ST_APPROVED);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #20s;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
