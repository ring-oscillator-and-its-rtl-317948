// Gated frequency counter for one ring-oscillator output.
//
// The ring output is asynchronous to clk. It passes a two-flop synchroniser
// and a third flop for edge detection; every rising edge seen while the gate
// window is open adds one to the count. A start pulse (ignored while busy)
// opens a window of exactly GATE_CYCLES clock cycles; the count is then
// latched on count and done pulses for one cycle. The count saturates at its
// all-ones value. After a counted edge, further edges are ignored for
// HOLDOFF_CYCLES cycles (an edge HOLDOFF_CYCLES+1 or more cycles later counts
// again); 0 disables the hold-off.
//
// Timing: if start is sampled at clock edge 0, busy is high after edges
// 0..GATE_CYCLES-1 (a window of GATE_CYCLES cycles, counting at edges
// 1..GATE_CYCLES), and done is high after edge GATE_CYCLES together with the
// new count. Edges are counted with a fixed two-cycle synchroniser lag.
//
// The paper counts rising edges of each line for 0.5 s with interrupts on a
// microcontroller; rising-edge counting, the 0.5 s gate and the 1 ms hold-off
// (the interrupts' bounce time of 1 ms) come from there.
// The 1 MHz clock behind the default of 500000 cycles, the synchroniser and
// the 16-bit count are this design's choices. The input must be slower than
// half the clock rate.
`timescale 1ns / 1ps
module freq_counter
  import ro_puf_pkg::*;
#(
  parameter int unsigned GATE_CYCLES = 500000,   // 0.5 s at 1 MHz
  parameter int unsigned HOLDOFF_CYCLES = 1000,  // 1 ms at 1 MHz
  parameter int unsigned CNT_W       = COUNT_W
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start,
  input  logic             sig_async,
  output logic             busy,
  output logic             done,
  output logic [CNT_W-1:0] count
);

  localparam int unsigned GATE_W = (GATE_CYCLES > 1) ? $clog2(GATE_CYCLES) : 1;
  localparam int unsigned HOLD_W = $clog2(HOLDOFF_CYCLES + 2);

  logic [2:0]        sync_q;
  logic              rise;
  logic [GATE_W-1:0] gate_q;
  logic [CNT_W-1:0]  edges_q;
  logic [CNT_W-1:0]  edges_next;
  logic [HOLD_W-1:0] hold_q;
  logic              take;

  assign rise = sync_q[1] & ~sync_q[2];
  assign take = rise && (hold_q == '0);

  always_comb begin
    edges_next = edges_q;
    if (take && edges_q != '1) edges_next = edges_q + 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sync_q  <= '0;
      gate_q  <= '0;
      edges_q <= '0;
      hold_q  <= '0;
      busy    <= 1'b0;
      done    <= 1'b0;
      count   <= '0;
    end else begin
      sync_q <= {sync_q[1:0], sig_async};
      done   <= 1'b0;
      if (!busy) begin
        if (start) begin
          busy    <= 1'b1;
          gate_q  <= GATE_W'(GATE_CYCLES - 1);
          edges_q <= '0;
          hold_q  <= '0;
        end
      end else begin
        edges_q <= edges_next;
        if (take)
          hold_q <= HOLD_W'(HOLDOFF_CYCLES);
        else if (hold_q != '0)
          hold_q <= hold_q - 1'b1;
        if (gate_q == '0) begin
          busy  <= 1'b0;
          done  <= 1'b1;
          count <= edges_next;
        end else begin
          gate_q <= gate_q - 1'b1;
        end
      end
    end
  end

  // The window length must be at least one cycle.
  initial assert (GATE_CYCLES >= 1);

endmodule
