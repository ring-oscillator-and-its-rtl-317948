// Ring-oscillator PUF password manager: top level.
//
// Eight ring-oscillator lines (ro_line, one NAND and three inverters each)
// are the physical source of the PUF; ro_puf_pwm_core holds all the logic:
// line selection, frequency counters, PUF sequencer, controller and password
// table. The core enables the two lines of the pair being compared and
// counts their outputs; see ro_puf_pwm_core for the operation.
//
// Ports: a request (op_valid/op_ready, op, id_key, pw_key, pw_hash with the
// first of 32 hash characters in its top nibble), a one-cycle result
// (res_*), the two counts of the last measured pair with a one-cycle strobe
// (meas_*) and the display port (disp_*). The hash function and the host
// link are outside this design; the host supplies the hash characters and
// the keys.
//
// Timing: an operation takes N_PAIRS * (GATE_CYCLES + 4) + 3 cycles from
// acceptance to res_valid, about 8 s at the default 0.5 s gate and 1 MHz.
//
// LINE_FREQ_HZ defaults to the line frequencies the paper measured on its
// breadboard (136, 46, 26, 14, 204, 66, 394, 56 Hz); each ring model gets the
// stage delay 1/(2*3*f) that yields its frequency. The ring models are
// behavioural (delays), so this top simulates, and the core is the part that
// synthesises.
`timescale 1ns / 1ps
module ro_puf_pwm_top
  import ro_puf_pkg::*;
#(
  parameter int unsigned GATE_CYCLES  = 500000,
  parameter int unsigned HOLDOFF_CYCLES = 1000,
  parameter int unsigned SLOTS        = 4,
  parameter int unsigned LINE_FREQ_HZ [N_LINES] = '{136, 46, 26, 14, 204, 66, 394, 56}
) (
  input  logic                clk,
  input  logic                rst_n,
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

  logic [N_LINES-1:0] line_en, line_out;

  for (genvar g = 0; g < N_LINES; g++) begin : g_line
    ro_line #(
      .STAGE_DELAY_NS(1.0e9 / (2.0 * 3.0 * real'(LINE_FREQ_HZ[g]))),
      .LOOP_STAGES   (3)
    ) u_ro (
      .en     (line_en[g]),
      .osc_out(line_out[g])
    );
  end

  ro_puf_pwm_core #(.GATE_CYCLES(GATE_CYCLES), .HOLDOFF_CYCLES(HOLDOFF_CYCLES), .SLOTS(SLOTS)) u_core (
    .clk, .rst_n, .line_en, .line_out,
    .op_valid, .op_ready, .op, .id_key, .pw_key, .pw_hash,
    .res_valid, .res_status, .res_word, .res_row, .res_col,
    .meas_valid, .meas_line_first, .meas_line_second, .meas_count_first, .meas_count_second,
    .disp_row, .disp_col, .disp_slot, .disp_valid, .disp_word
  );

endmodule
