// Behavioural model (not synthesizable) of one ring-oscillator line.
//
// The line is a two-input NAND gate followed by three inverters. The first
// NAND input is the enable; the second is fed back from the output of the
// second inverter, so the loop holds three inverting stages (NAND, first and
// second inverter) and the third inverter only buffers the output. Every
// stage is an RC-loaded gate with delay tau_D = 0.69*R*C; the loop therefore
// oscillates with period 2*n*tau_D, n = 3, as in f = 1/(2*tau_D*n).
//
// Timing: while en is low the NAND output is forced high and osc_out rests
// low. After en rises, osc_out first rises four stage delays later (NAND,
// two inverters, buffer) and then toggles every LOOP_STAGES stage delays.
// When en falls the ring stops and osc_out returns low at the end of the
// half period in progress.
//
// The structure, the RC delay and the frequency formula follow the paper;
// the default stage delay is its 10 kOhm / 1 uF example. Modelling each half
// period as one delay, instead of each gate as its own event, is this model's
// choice: a pulse on en shorter than the half period in progress neither
// stops the ring nor starts a second wave in it, as RC-loaded gates would
// filter it.
`timescale 1ns / 1ps
module ro_line #(
  parameter real         STAGE_DELAY_NS = 6900000.0,  // 0.69 * 10k * 1uF
  parameter int unsigned LOOP_STAGES    = 3
) (
  input  logic en,
  output logic osc_out
);

  localparam real HALF_PERIOD_NS = STAGE_DELAY_NS * LOOP_STAGES;

  initial osc_out = 1'b0;

  always begin
    wait (en);
    // NAND, inverter 1, inverter 2 and the buffer each add one stage delay.
    #(STAGE_DELAY_NS * (LOOP_STAGES + 1));
    while (en) begin
      osc_out = ~osc_out;
      #(HALF_PERIOD_NS);
    end
    osc_out = 1'b0;
  end

endmodule
