// Testbench of the password table.
//
// A reference model here (a queue of words per cell) is updated alongside
// the table. Checked: appending on registration, the fill count, rejection
// of a write to a full cell, lookups that hit any stored entry and miss
// otherwise, that other cells are unaffected, the one-cycle response
// latency and the display read port.
`timescale 1ns / 1ps
module tb_password_table;

  localparam int unsigned SLOTS = 4;

  logic clk = 1'b0, rst_n = 1'b0;
  logic req_valid = 0, req_write = 0;
  logic [3:0] req_row = 0, req_col = 0, rd_row = 0, rd_col = 0;
  logic [1:0] rd_slot = 0;
  logic [15:0] req_word = 0, rd_word;
  logic rsp_valid, rsp_hit, rd_valid;
  logic [1:0] rsp_slot;
  logic [2:0] rsp_fill;
  int checks = 0, failures = 0;

  logic [15:0] model [256][$];

  always #5 clk = ~clk;

  password_table #(.ROWS(16), .COLS(16), .SLOTS(SLOTS), .W(16)) dut (
    .clk, .rst_n, .req_valid, .req_write, .req_row, .req_col, .req_word,
    .rsp_valid, .rsp_hit, .rsp_slot, .rsp_fill,
    .rd_row, .rd_col, .rd_slot, .rd_valid, .rd_word
  );

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s at %0t", what, $time);
    end
  endtask

  task automatic access(input bit wr, input int r, input int c, input logic [15:0] w);
    int a = r * 16 + c;
    bit exp_hit; int exp_slot; int exp_fill;
    if (wr) begin
      exp_hit  = model[a].size() < SLOTS;
      exp_slot = model[a].size() % SLOTS;
      if (exp_hit) model[a].push_back(w);
      exp_fill = model[a].size();
    end else begin
      exp_hit = 0; exp_slot = 0;
      for (int s = model[a].size() - 1; s >= 0; s--)
        if (model[a][s] == w) begin exp_hit = 1; exp_slot = s; end
      exp_fill = model[a].size();
    end
    @(negedge clk);
    req_valid = 1; req_write = wr; req_row = 4'(r); req_col = 4'(c); req_word = w;
    @(negedge clk);
    req_valid = 0; req_word = ~w;
    check(rsp_valid, "response one cycle after request");
    check(rsp_hit == exp_hit, $sformatf("%s hit r%0d c%0d", wr ? "write" : "lookup", r, c));
    if (exp_hit || wr) check(rsp_slot == 2'(exp_slot), "slot");
    check(rsp_fill == 3'(exp_fill), "fill count");
    @(negedge clk);
    check(!rsp_valid, "single response");
  endtask

  task automatic display_all(input int r, input int c);
    int a = r * 16 + c;
    for (int s = 0; s < SLOTS; s++) begin
      rd_row = 4'(r); rd_col = 4'(c); rd_slot = 2'(s);
      #1;
      check(rd_valid == (s < model[a].size()), "display valid");
      if (s < model[a].size()) check(rd_word == model[a][s], "display word");
    end
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    // Empty table: every lookup misses.
    access(0, 5, 0, 16'h000a);
    display_all(5, 0);
    // Registration in row 5, column 0 (keys 0x61 ^ 0x31), then a hit and a miss.
    access(1, 5, 0, 16'h000a);
    access(0, 5, 0, 16'h000a);
    access(0, 5, 0, 16'h00f3);
    // Collisions: three more users land in the same cell, then it is full.
    access(1, 5, 0, 16'h1234);
    access(1, 5, 0, 16'h00f3);
    access(1, 5, 0, 16'hbeef);
    access(1, 5, 0, 16'h7777);
    access(0, 5, 0, 16'h00f3);
    access(0, 5, 0, 16'hbeef);
    access(0, 5, 0, 16'h7777);
    display_all(5, 0);
    // Neighbouring cells stay empty.
    access(0, 5, 1, 16'h000a);
    access(0, 4, 0, 16'h000a);
    // Random traffic.
    for (int k = 0; k < 300; k++) begin
      int r = $urandom_range(15, 0), c = $urandom_range(3, 0);
      logic [15:0] w = 16'($urandom_range(7, 0));
      access($urandom_range(1, 0), r, c, w);
    end
    for (int r = 0; r < 16; r++) for (int c = 0; c < 4; c++) display_all(r, c);
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
