// Synthesizable core of the ring-oscillator PUF password manager: everything
// except the ring oscillators themselves.
//
// Two demultiplexers route a common enable to the two lines of the pair being
// compared (line_en; a line chosen by both selectors is enabled once), and
// two multiplexers bring the two selected ring outputs (line_out) to two
// gated frequency counters. The PUF sequencer walks the 16 pairs given by the
// password hash and forms a 16-bit word from the frequency comparisons. The
// controller turns a request into a registration (store the word as the
// challenge in the table cell given by ID key XOR password key) or an
// authentication (compare the word, now the response, with that cell) and
// reports the outcome. A read port shows the table.
//
// Ports: line_en / line_out to the eight ring lines (line_out is
// asynchronous and is synchronised inside the counters), a request
// (op_valid/op_ready, op, id_key, pw_key, pw_hash with the first of 32 hash
// characters in its top nibble), a one-cycle result (res_*), the two counts
// of the last measured pair with a one-cycle strobe (meas_*) and the display
// port (disp_*).
//
// Timing: an operation takes N_PAIRS * (GATE_CYCLES + 4) + 3 cycles from
// acceptance to res_valid, about 8 s at the default 0.5 s gate and 1 MHz.
//
// The selectors, edge counting over 0.5 s with a 1 ms hold-off, 16 pairs and the 16 x 16 table
// follow the paper; the clock rate, the OR of the two enables, the cell depth
// and the handshakes are this design's own.
`timescale 1ns / 1ps
module ro_puf_pwm_core
  import ro_puf_pkg::*;
#(
  parameter int unsigned GATE_CYCLES  = 500000,
  parameter int unsigned HOLDOFF_CYCLES = 1000,
  parameter int unsigned SLOTS        = 4
) (
  input  logic                clk,
  input  logic                rst_n,
  // ring array
  output logic [N_LINES-1:0]  line_en,
  input  logic [N_LINES-1:0]  line_out,
  // request from the host
  input  logic                op_valid,
  output logic                op_ready,
  input  pwm_op_t             op,
  input  logic [KEY_W-1:0]    id_key,
  input  logic [KEY_W-1:0]    pw_key,
  input  logic [4*HASH_CHARS-1:0] pw_hash,
  // result
  output logic                res_valid,
  output pwm_status_t         res_status,
  output puf_word_t           res_word,
  output logic [ROW_W-1:0]    res_row,
  output logic [COL_W-1:0]    res_col,
  // last measurement
  output logic                meas_valid,
  output line_sel_t           meas_line_first,
  output line_sel_t           meas_line_second,
  output count_t              meas_count_first,
  output count_t              meas_count_second,
  // display the table
  input  logic [ROW_W-1:0]    disp_row,
  input  logic [COL_W-1:0]    disp_col,
  input  logic [$clog2(SLOTS)-1:0] disp_slot,
  output logic                disp_valid,
  output puf_word_t           disp_word
);

  // ---------------- line selection ----------------
  logic [N_LINES-1:0] en_first, en_second;
  logic               ring_en;
  line_sel_t          sel_first, sel_second;
  logic               sig_first, sig_second;

  line_demux #(.N(N_LINES)) u_demux_first  (.en_in(ring_en), .sel(sel_first),  .en_out(en_first));
  line_demux #(.N(N_LINES)) u_demux_second (.en_in(ring_en), .sel(sel_second), .en_out(en_second));

  assign line_en = en_first | en_second;

  line_mux #(.N(N_LINES)) u_mux_first  (.lines(line_out), .sel(sel_first),  .out(sig_first));
  line_mux #(.N(N_LINES)) u_mux_second (.lines(line_out), .sel(sel_second), .out(sig_second));

  // ---------------- frequency measurement ----------------
  logic   cnt_start;
  logic   busy_first, busy_second, done_first, done_second;
  count_t count_first, count_second;

  freq_counter #(.GATE_CYCLES(GATE_CYCLES), .HOLDOFF_CYCLES(HOLDOFF_CYCLES), .CNT_W(COUNT_W)) u_cnt_first (
    .clk, .rst_n, .start(cnt_start), .sig_async(sig_first),
    .busy(busy_first), .done(done_first), .count(count_first)
  );
  freq_counter #(.GATE_CYCLES(GATE_CYCLES), .HOLDOFF_CYCLES(HOLDOFF_CYCLES), .CNT_W(COUNT_W)) u_cnt_second (
    .clk, .rst_n, .start(cnt_start), .sig_async(sig_second),
    .busy(busy_second), .done(done_second), .count(count_second)
  );

  // ---------------- PUF sequencer ----------------
  logic      puf_start, puf_busy, puf_done;
  puf_word_t puf_word;

  puf_sequencer #(.PAIRS(N_PAIRS), .CNT_W(COUNT_W)) u_seq (
    .clk, .rst_n,
    .start(puf_start), .hash_chars(pw_hash),
    .busy(puf_busy), .done(puf_done), .word(puf_word),
    .sel_first, .sel_second, .ring_en,
    .cnt_start,
    .cnt_done_first(done_first), .cnt_done_second(done_second),
    .count_first, .count_second
  );

  assign meas_valid        = done_first & done_second;
  assign meas_line_first   = sel_first;
  assign meas_line_second  = sel_second;
  assign meas_count_first  = count_first;
  assign meas_count_second = count_second;

  // ---------------- controller and table ----------------
  logic                     tbl_req_valid, tbl_req_write, tbl_rsp_valid, tbl_rsp_hit;
  logic [ROW_W-1:0]         tbl_row;
  logic [COL_W-1:0]         tbl_col;
  puf_word_t                tbl_word;
  logic [$clog2(SLOTS)-1:0] tbl_rsp_slot;
  logic [$clog2(SLOTS+1)-1:0] tbl_rsp_fill;

  pwm_controller #(.KW(KEY_W)) u_ctrl (
    .clk, .rst_n,
    .op_valid, .op_ready, .op, .id_key, .pw_key,
    .puf_start, .puf_done, .puf_word,
    .tbl_req_valid, .tbl_req_write, .tbl_row, .tbl_col, .tbl_word,
    .tbl_rsp_valid, .tbl_rsp_hit,
    .res_valid, .res_status, .res_word, .res_row, .res_col
  );

  password_table #(.ROWS(TABLE_ROWS), .COLS(TABLE_COLS), .SLOTS(SLOTS), .W(WORD_W)) u_table (
    .clk, .rst_n,
    .req_valid(tbl_req_valid), .req_write(tbl_req_write),
    .req_row(tbl_row), .req_col(tbl_col), .req_word(tbl_word),
    .rsp_valid(tbl_rsp_valid), .rsp_hit(tbl_rsp_hit),
    .rsp_slot(tbl_rsp_slot), .rsp_fill(tbl_rsp_fill),
    .rd_row(disp_row), .rd_col(disp_col), .rd_slot(disp_slot),
    .rd_valid(disp_valid), .rd_word(disp_word)
  );

  // The PUF sequencer is idle whenever the controller can accept a request.
  assert property (@(posedge clk) disable iff (!rst_n) op_ready |-> !puf_busy);

endmodule
