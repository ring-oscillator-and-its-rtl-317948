// Testbench of the PUF sequencer.
//
// The two frequency counters are replaced by a model that answers each
// cnt_start after a set latency with the count of the selected line, looked
// up in a frequency table held here. The expected word is computed here from
// the hash characters: pair i = characters 2i and 2i+1, low three bits as
// line numbers, bit i = 1 when the first count exceeds the second.
// Checked: the word, the order of selected pairs, that the rings run only
// while a pair is measured, the cycle count 16*(G+4) of one word, and the
// paper's own example (hash 04df31e3..., frequencies 136 46 26 14 204 66 394
// 56 give challenge bits 0 1 0 1 0 0 0 0 for the first eight pairs).
`timescale 1ns / 1ps
module tb_puf_sequencer;
  import ro_puf_pkg::*;

  localparam int unsigned G = 20;

  logic clk = 1'b0, rst_n = 1'b0, start = 1'b0;
  logic [127:0] hash_chars;
  logic busy, done, ring_en, cnt_start;
  logic [15:0] word;
  line_sel_t sel_first, sel_second;
  logic done_first, done_second;
  logic [15:0] count_first, count_second;
  int checks = 0, failures = 0;

  int unsigned freq [8];
  int          skew;          // extra delay of the second counter
  int          pair_seen;
  line_sel_t   exp_first [16], exp_second [16];

  always #5 clk = ~clk;

  puf_sequencer #(.PAIRS(16), .CNT_W(16)) dut (
    .clk, .rst_n, .start, .hash_chars, .busy, .done, .word,
    .sel_first, .sel_second, .ring_en, .cnt_start,
    .cnt_done_first(done_first), .cnt_done_second(done_second),
    .count_first, .count_second
  );

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s at %0t", what, $time);
    end
  endtask

  // Counter model: like freq_counter, G cycles after start is sampled, done with the count of
  // the line selected now.
  initial begin
    done_first = 0; done_second = 0; count_first = 0; count_second = 0;
    forever begin
      @(posedge clk);
      if (rst_n && cnt_start) begin
        automatic line_sel_t a = sel_first, b = sel_second;
        check(ring_en, "rings enabled while counting starts");
        check(pair_seen < 16 && a == exp_first[pair_seen] && b == exp_second[pair_seen],
              "selected lines follow the hash pairs");
        pair_seen++;
        fork
          begin
            repeat (G) @(posedge clk);
            #1 done_first = 1; count_first = 16'(freq[a]);
            @(posedge clk); #1 done_first = 0;
          end
          begin
            repeat (G + skew) @(posedge clk);
            #1 done_second = 1; count_second = 16'(freq[b]);
            @(posedge clk); #1 done_second = 0;
          end
        join_none
      end
    end
  end

  // Rings stay stopped while the sequencer is idle.
  always @(posedge clk) if (rst_n && !busy) begin
    checks++;
    if (ring_en) begin failures++; $display("FAIL ring enabled while idle"); end
  end

  task automatic run(input logic [127:0] h, input bit check_cycles, output logic [15:0] w);
    logic [15:0] e;
    int cyc;
    e = '0;
    for (int i = 0; i < 16; i++) begin
      exp_first[i]  = line_sel_t'(h[127 - 8*i -: 4]);
      exp_second[i] = line_sel_t'(h[123 - 8*i -: 4]);
      e[i] = freq[exp_first[i]] > freq[exp_second[i]];
    end
    pair_seen = 0;
    @(negedge clk);
    hash_chars = h; start = 1;
    @(negedge clk);
    start = 0; hash_chars = '0;     // hash is latched at start
    cyc = 1;
    while (1) begin
      @(posedge clk); #1;
      if (done) break;
      cyc++;
    end
    w = word;
    check(word == e, $sformatf("word %h expected %h", word, e));
    check(pair_seen == 16, "16 pairs measured");
    if (check_cycles) check(cyc == 16 * (G + 4), $sformatf("word latency %0d cycles", cyc));
    @(posedge clk); #1;
    check(!busy && !ring_en, "idle after word");
  endtask

  logic [15:0] w;
  initial begin
    freq = '{136, 46, 26, 14, 204, 66, 394, 56};
    skew = 0;
    hash_chars = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    run(128'h04df31e3361e111f42a160d1394121b1, 1'b1, w);
    check(w[7:0] == 8'b0000_1010, "paper example: challenge 0 1 0 1 0 0 0 0");
    // Wrong password of the paper's example: responses 1 1 0 0 1 1 1 1.
    run(128'h6d69327fa3d39a492fea6a47051a4362, 1'b1, w);
    check(w[7:0] == 8'b1111_0011, "paper example: response 1 1 0 0 1 1 1 1");
    skew = 3;
    run({$urandom, $urandom, $urandom, $urandom}, 1'b0, w);
    for (int k = 0; k < 5; k++) begin
      for (int i = 0; i < 8; i++) freq[i] = $urandom_range(400, 1);
      skew = (k % 2) ? 0 : int'($urandom_range(4, 1));
      run({$urandom, $urandom, $urandom, $urandom}, skew == 0, w);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #2ms;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
