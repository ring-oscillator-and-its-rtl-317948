// PUF challenge/response generator: turns 32 hash characters into a 16-bit
// word by comparing the frequencies of 16 pairs of ring lines.
//
// On start the 32 hexadecimal characters are latched. Pair i consists of
// characters 2i (first) and 2i+1 (second); the low three bits of each give
// the line number. For every pair the sequencer sets both line selectors
// with the rings stopped (SELECT), then raises ring_en and starts both
// frequency counters (MEASURE), waits for both counts, and writes bit i of
// the word: 1 when the first line's count is larger than the second's, 0
// otherwise (equal counts, as for a pair of one line with itself, give 0).
// The rings are stopped again before the next pair. After the last pair the
// word is presented and done pulses for one cycle.
//
// Interface: hash_chars carries the first character in its top nibble, so a
// hash string can be written as one hexadecimal literal. sel_first and
// sel_second go to the line demultiplexers and multiplexers; cnt_start,
// cnt_done_* and count_* connect to two freq_counter instances.
//
// Timing: with freq_counter (done GATE_CYCLES edges after it samples
// cnt_start) one pair takes GATE_CYCLES + 4 cycles, and done rises
// PAIRS * (GATE_CYCLES + 4) clock edges after the edge that samples start.
//
// Following the paper: 16 pairs from 32 hash characters, numbers 0 to 7
// taken from the characters, the comparison rule ("Second > First" gives 0)
// and both lines of a pair measured at the same time. Bit order (pair 0 in
// bit 0), the stop between pairs and the handshake are this design's own.
`timescale 1ns / 1ps
module puf_sequencer
  import ro_puf_pkg::*;
#(
  parameter int unsigned PAIRS = N_PAIRS,
  parameter int unsigned CNT_W = COUNT_W
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 start,
  input  logic [8*PAIRS-1:0]   hash_chars,
  output logic                 busy,
  output logic                 done,
  output logic [PAIRS-1:0]     word,
  // ring line selection
  output line_sel_t            sel_first,
  output line_sel_t            sel_second,
  output logic                 ring_en,
  // frequency counters
  output logic                 cnt_start,
  input  logic                 cnt_done_first,
  input  logic                 cnt_done_second,
  input  logic [CNT_W-1:0]     count_first,
  input  logic [CNT_W-1:0]     count_second
);

  localparam int unsigned IDX_W = (PAIRS > 1) ? $clog2(PAIRS) : 1;

  typedef enum logic [1:0] {S_IDLE, S_SELECT, S_MEASURE, S_COMPARE} state_t;

  state_t               state_q;
  logic [8*PAIRS-1:0]   chars_q;
  logic [IDX_W-1:0]     idx_q;
  logic                 got_first_q, got_second_q;
  logic [CNT_W-1:0]     cnt_first_q, cnt_second_q;
  line_pair_t           pair;

  // Characters of pair idx_q: first character in the top nibble.
  always_comb begin
    pair.first  = char_to_line(chars_q[8*PAIRS-1 - 8*idx_q -: 4]);
    pair.second = char_to_line(chars_q[8*PAIRS-5 - 8*idx_q -: 4]);
  end

  assign busy = (state_q != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q      <= S_IDLE;
      chars_q      <= '0;
      idx_q        <= '0;
      got_first_q  <= 1'b0;
      got_second_q <= 1'b0;
      cnt_first_q  <= '0;
      cnt_second_q <= '0;
      word         <= '0;
      done         <= 1'b0;
      sel_first    <= '0;
      sel_second   <= '0;
      ring_en      <= 1'b0;
      cnt_start    <= 1'b0;
    end else begin
      done      <= 1'b0;
      cnt_start <= 1'b0;
      unique case (state_q)
        S_IDLE: begin
          if (start) begin
            chars_q <= hash_chars;
            idx_q   <= '0;
            state_q <= S_SELECT;
          end
        end
        S_SELECT: begin
          // Selectors change only while every ring is stopped.
          sel_first    <= pair.first;
          sel_second   <= pair.second;
          got_first_q  <= 1'b0;
          got_second_q <= 1'b0;
          ring_en      <= 1'b1;
          cnt_start    <= 1'b1;
          state_q      <= S_MEASURE;
        end
        S_MEASURE: begin
          if (cnt_done_first) begin
            got_first_q <= 1'b1;
            cnt_first_q <= count_first;
          end
          if (cnt_done_second) begin
            got_second_q <= 1'b1;
            cnt_second_q <= count_second;
          end
          if ((got_first_q || cnt_done_first) && (got_second_q || cnt_done_second)) begin
            ring_en <= 1'b0;
            state_q <= S_COMPARE;
          end
        end
        S_COMPARE: begin
          word[idx_q] <= (cnt_first_q > cnt_second_q);
          if (idx_q == IDX_W'(PAIRS - 1)) begin
            done    <= 1'b1;
            state_q <= S_IDLE;
          end else begin
            idx_q   <= idx_q + 1'b1;
            state_q <= S_SELECT;
          end
        end
        default: state_q <= S_IDLE;
      endcase
    end
  end

  // A counter must not report a result outside a measurement.
  assert property (@(posedge clk) disable iff (!rst_n)
                   (cnt_done_first || cnt_done_second) |-> state_q == S_MEASURE);

endmodule
