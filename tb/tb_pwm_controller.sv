// Testbench of the password-management controller.
//
// The PUF sequencer and the table are replaced by models here: the PUF
// model returns a word chosen by the test after a fixed delay, the table
// model is a small per-cell list. Checked: the cell address (upper and lower
// nibble of ID key XOR password key), that puf_start comes with acceptance,
// the request sent to the table, each of the four outcomes, op_ready, and
// the latency: PUF time (PUF_DELAY - 1 here) + 3 cycles.
`timescale 1ns / 1ps
module tb_pwm_controller;
  import ro_puf_pkg::*;

  localparam int unsigned PUF_DELAY = 7;

  logic clk = 1'b0, rst_n = 1'b0;
  logic op_valid = 0, op_ready;
  pwm_op_t op = OP_REGISTER;
  logic [7:0] id_key = 0, pw_key = 0;
  logic puf_start, puf_done = 0;
  puf_word_t puf_word = 0, next_word = 0;
  logic tbl_req_valid, tbl_req_write, tbl_rsp_valid = 0, tbl_rsp_hit = 0;
  logic [3:0] tbl_row, tbl_col, res_row, res_col;
  puf_word_t tbl_word, res_word;
  logic res_valid;
  pwm_status_t res_status;
  int checks = 0, failures = 0;
  int puf_starts = 0;

  puf_word_t cellq [256][$];
  localparam int unsigned SLOTS = 2;

  always #5 clk = ~clk;

  pwm_controller #(.KW(8)) dut (
    .clk, .rst_n, .op_valid, .op_ready, .op, .id_key, .pw_key,
    .puf_start, .puf_done, .puf_word,
    .tbl_req_valid, .tbl_req_write, .tbl_row, .tbl_col, .tbl_word,
    .tbl_rsp_valid, .tbl_rsp_hit,
    .res_valid, .res_status, .res_word, .res_row, .res_col
  );

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s at %0t", what, $time);
    end
  endtask

  // PUF model.
  always @(posedge clk) if (rst_n && puf_start) begin
    puf_starts++;
    fork begin
      repeat (PUF_DELAY - 1) @(posedge clk);
      #1 puf_done = 1; puf_word = next_word;
      @(posedge clk); #1 puf_done = 0;
    end join_none
  end

  // Table model (two entries per cell).
  logic       q_valid, q_write;
  int         q_addr;
  puf_word_t  q_word;
  always @(negedge clk) begin
    q_valid = tbl_req_valid; q_write = tbl_req_write;
    q_addr = {tbl_row, tbl_col}; q_word = tbl_word;
  end
  always @(posedge clk) begin
    #1 tbl_rsp_valid = 0;
    if (q_valid) begin
      tbl_rsp_valid = 1;
      if (q_write) begin
        tbl_rsp_hit = cellq[q_addr].size() < SLOTS;
        if (tbl_rsp_hit) cellq[q_addr].push_back(q_word);
      end else begin
        tbl_rsp_hit = 0;
        foreach (cellq[q_addr][s]) if (cellq[q_addr][s] == q_word) tbl_rsp_hit = 1;
      end
    end
  end

  task automatic operate(input pwm_op_t o, input logic [7:0] idk, input logic [7:0] pwk,
                         input puf_word_t w, input pwm_status_t expect_st);
    int cyc; int starts0;
    logic [7:0] k = idk ^ pwk;
    starts0 = puf_starts;
    next_word = w;
    @(negedge clk);
    check(op_ready, "ready when idle");
    op_valid = 1; op = o; id_key = idk; pw_key = pwk;
    #1 check(puf_start, "puf_start with acceptance");
    @(negedge clk);
    op_valid = 0; id_key = $urandom; pw_key = $urandom;
    check(!op_ready, "busy during operation");
    cyc = 1;
    while (1) begin
      @(posedge clk); #2;
      if (res_valid) break;
      cyc++;
    end
    check(puf_starts == starts0 + 1, "one PUF run per operation");
    check(cyc == (PUF_DELAY - 1) + 3, $sformatf("latency %0d", cyc));
    check(res_row == k[7:4] && res_col == k[3:0], "row/column from XOR of keys");
    check(res_word == w, "result word");
    check(res_status == expect_st, $sformatf("status %s expected %s", res_status.name(), expect_st.name()));
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    // Paper's example: ID 'a' (0x61), password '1' (0x31): row 5, column 0.
    operate(OP_REGISTER,     8'h61, 8'h31, 16'h000a, ST_REGISTERED);
    operate(OP_AUTHENTICATE, 8'h61, 8'h31, 16'h000a, ST_APPROVED);
    operate(OP_AUTHENTICATE, 8'h61, 8'h31, 16'h00f3, ST_FAILED);
    // Collision: another user lands in the same cell.
    operate(OP_REGISTER,     8'h62, 8'h32, 16'h5555, ST_REGISTERED);
    operate(OP_AUTHENTICATE, 8'h62, 8'h32, 16'h5555, ST_APPROVED);
    operate(OP_REGISTER,     8'h00, 8'h50, 16'h6666, ST_TABLE_FULL);
    operate(OP_AUTHENTICATE, 8'h11, 8'h22, 16'h000a, ST_FAILED);
    for (int k = 0; k < 20; k++) begin
      logic [7:0] a = $urandom, b = $urandom;
      puf_word_t w = $urandom;
      int c = {a ^ b};
      operate(OP_REGISTER, a, b, w, (cellq[c].size() < SLOTS) ? ST_REGISTERED : ST_TABLE_FULL);
      operate(OP_AUTHENTICATE, a, b, w, (cellq[c].size() > 0 && (cellq[c][0] == w || cellq[c][cellq[c].size()-1] == w)) ? ST_APPROVED : ST_FAILED);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1ms;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
