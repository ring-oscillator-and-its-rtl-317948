// End-to-end testbench of the ring-oscillator PUF password manager.
//
// The whole design runs with a 1 MHz clock, a 5 ms gate instead of 0.5 s, a
// 10 us counter hold-off instead of 1 ms and ring frequencies 100 times the
// default ones, so every count equals the
// full-size count (f * 0.5 s) while an operation takes 80 thousand cycles
// instead of 8 million. Expected words are computed here from the hash and
// the frequency list. The sequence follows the paper's demo: user "admin"
// with password "12345" registers (ID key 0x61, password key 0x31, cell row
// 5 column 0), signs in with the right password (approved) and with
// "123456" (failed), then further users collide in the same cell until it is
// full. Every measured count is compared with f * gate time.
//
// Mechanisms counted, each must happen at least once: registration,
// approval, rejection, collision (append to a used cell), full cell, a pair
// of a line with itself, first line faster, second line faster, display
// read.
`timescale 1ns / 1ps
module tb_ro_puf_pwm_top;
  import ro_puf_pkg::*;

  localparam int unsigned G     = 5000;
  localparam int unsigned SCALE = 100;
  localparam int unsigned SLOTS = 4;
  localparam int unsigned F [8] = '{136*SCALE, 46*SCALE, 26*SCALE, 14*SCALE,
                                    204*SCALE, 66*SCALE, 394*SCALE, 56*SCALE};

  logic clk = 1'b0, rst_n = 1'b0;
  logic op_valid = 0, op_ready;
  pwm_op_t op = OP_REGISTER;
  logic [7:0] id_key = 0, pw_key = 0;
  logic [127:0] pw_hash = 0;
  logic res_valid;
  pwm_status_t res_status;
  puf_word_t res_word, disp_word;
  logic [3:0] res_row, res_col, disp_row = 0, disp_col = 0;
  logic [1:0] disp_slot = 0;
  logic disp_valid;
  logic meas_valid;
  line_sel_t meas_line_first, meas_line_second;
  count_t meas_count_first, meas_count_second;

  int checks = 0, failures = 0;
  int n_reg = 0, n_appr = 0, n_fail = 0, n_coll = 0, n_full = 0,
      n_same = 0, n_first = 0, n_second = 0, n_disp = 0;

  always #500 clk = ~clk;

  ro_puf_pwm_top #(.GATE_CYCLES(G), .HOLDOFF_CYCLES(10), .SLOTS(SLOTS), .LINE_FREQ_HZ(F)) dut (
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

  // Expected count of a line over the gate: f * G cycles of 1 us.
  function automatic int exp_count(int line);
    return int'(longint'(F[line]) * G / 1000000);
  endfunction

  // Every finished measurement is compared with f * gate time.
  always @(posedge clk) if (rst_n && meas_valid) begin
    #1;
    checks++;
    if (int'(meas_count_first) > exp_count(meas_line_first) + 1 ||
        int'(meas_count_first) < exp_count(meas_line_first) - 2) begin
      failures++;
      $display("FAIL line %0d count %0d expected about %0d", meas_line_first, meas_count_first,
               exp_count(meas_line_first));
    end
    checks++;
    if (int'(meas_count_second) > exp_count(meas_line_second) + 1 ||
        int'(meas_count_second) < exp_count(meas_line_second) - 2) begin
      failures++;
      $display("FAIL line %0d count %0d expected about %0d", meas_line_second, meas_count_second,
               exp_count(meas_line_second));
    end
  end

  function automatic puf_word_t expect_word(logic [127:0] h);
    puf_word_t w;
    for (int i = 0; i < 16; i++) begin
      int a = int'(h[127 - 8*i -: 3] & 3'h7);
      int b;
      a = int'(h[127 - 8*i -: 4]) % 8;
      b = int'(h[123 - 8*i -: 4]) % 8;
      w[i] = F[a] > F[b];
    end
    return w;
  endfunction

  function automatic void count_pairs(logic [127:0] h);
    for (int i = 0; i < 16; i++) begin
      int a = int'(h[127 - 8*i -: 4]) % 8, b = int'(h[123 - 8*i -: 4]) % 8;
      if (a == b) n_same++;
      else if (F[a] > F[b]) n_first++;
      else n_second++;
    end
  endfunction

  puf_word_t table_model [256][$];

  task automatic operate(input pwm_op_t o, input logic [7:0] idk, input logic [7:0] pwk,
                         input logic [127:0] h, output puf_word_t w);
    int cyc;
    int c_addr = int'(idk ^ pwk);
    puf_word_t e = expect_word(h);
    pwm_status_t st;
    if (o == OP_REGISTER) begin
      if (table_model[c_addr].size() >= SLOTS) st = ST_TABLE_FULL;
      else begin
        st = ST_REGISTERED;
        if (table_model[c_addr].size() > 0) n_coll++;
        table_model[c_addr].push_back(e);
      end
    end else begin
      st = ST_FAILED;
      foreach (table_model[c_addr][s]) if (table_model[c_addr][s] == e) st = ST_APPROVED;
    end
    count_pairs(h);
    @(negedge clk);
    check(op_ready, "ready");
    op_valid = 1; op = o; id_key = idk; pw_key = pwk; pw_hash = h;
    @(negedge clk);
    op_valid = 0; pw_hash = '0;
    cyc = 1;
    while (1) begin
      @(posedge clk); #2;
      if (res_valid) break;
      cyc++;
    end
    w = res_word;
    check(cyc == 16 * (G + 4) + 3, $sformatf("operation latency %0d", cyc));
    check(res_word == e, $sformatf("PUF word %h expected %h", res_word, e));
    check(res_row == 4'(c_addr >> 4) && res_col == 4'(c_addr), "cell address");
    check(res_status == st, $sformatf("status %s expected %s", res_status.name(), st.name()));
    case (res_status)
      ST_REGISTERED: n_reg++;
      ST_APPROVED:   n_appr++;
      ST_FAILED:     n_fail++;
      ST_TABLE_FULL: n_full++;
      default: ;
    endcase
  endtask

  task automatic display_cell(input int c_addr);
    for (int s = 0; s < SLOTS; s++) begin
      @(negedge clk);
      disp_row = 4'(c_addr >> 4); disp_col = 4'(c_addr); disp_slot = 2'(s);
      #1;
      check(disp_valid == (s < table_model[c_addr].size()), "display valid");
      if (s < table_model[c_addr].size()) begin
        check(disp_word == table_model[c_addr][s], "display word");
        n_disp++;
      end
    end
  endtask

  // Hashes: the paper's two screenshots (first 32 characters) and others.
  localparam logic [127:0] H_12345  = 128'h04df31e3361e111f42a160d1394121b1;
  localparam logic [127:0] H_123456 = 128'h6d69327fa3d39a492fea6a47051a4362;

  puf_word_t w;
  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    operate(OP_REGISTER, 8'h61, 8'h31, H_12345, w);
    check(w[7:0] == 8'b0000_1010, "challenge bits 0 1 0 1 0 0 0 0 of the paper");
    operate(OP_AUTHENTICATE, 8'h61, 8'h31, H_12345, w);
    operate(OP_AUTHENTICATE, 8'h61, 8'h31, H_123456, w);
    check(w[7:0] == 8'b1111_0011, "response bits 1 1 0 0 1 1 1 1 of the paper");
    // Other users whose keys XOR to the same c_addr 0x50.
    operate(OP_REGISTER, 8'h62, 8'h32, 128'h0123456789abcdeffedcba9876543210, w);
    operate(OP_REGISTER, 8'h70, 8'h20, 128'h7f7f7f7f0e0e0e0e6a6a6a6a11223344, w);
    operate(OP_REGISTER, 8'h55, 8'h05, 128'hdeadbeefcafef00d0badc0de12345678, w);
    operate(OP_REGISTER, 8'h50, 8'h00, 128'h00112233445566778899aabbccddeeff, w);
    operate(OP_AUTHENTICATE, 8'h62, 8'h32, 128'h0123456789abcdeffedcba9876543210, w);
    display_cell(8'h50);
    display_cell(8'h51);
    check(n_reg > 0,    "registration happened");
    check(n_appr > 0,   "approval happened");
    check(n_fail > 0,   "rejection happened");
    check(n_coll > 0,   "collision happened");
    check(n_full > 0,   "full cell happened");
    check(n_same > 0,   "pair of a line with itself happened");
    check(n_first > 0,  "first line faster happened");
    check(n_second > 0, "second line faster happened");
    check(n_disp > 0,   "display read happened");
    $display("mechanisms: registered=%0d approved=%0d failed=%0d collisions=%0d full=%0d same-line=%0d first>second=%0d second>=first=%0d display=%0d",
             n_reg, n_appr, n_fail, n_coll, n_full, n_same, n_first, n_second, n_disp);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1s;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
