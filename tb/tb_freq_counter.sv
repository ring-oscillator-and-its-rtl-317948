// Testbench of the gated frequency counter.
//
// Pulses are generated at known clock cycles inside the window, so the exact
// edge count is known here. Checked: the count, the window latency (done
// GATE clock edges after the edge that samples start), that a start during
// a window is ignored, that edges outside the window are not counted,
// saturation of a narrow counter, and the hold-off: with edges 4 cycles
// apart a hold-off of 3 keeps all of them and one of 5 every other one.
`timescale 1ns / 1ps
module tb_freq_counter;

  localparam int unsigned GATE = 200;

  logic clk = 1'b0, rst_n = 1'b0, start = 1'b0, sig = 1'b0;
  logic busy, done, busy4, done4;
  logic [15:0] count;
  logic [3:0]  count4;
  logic        busyh, doneh;
  logic [15:0] counth;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  freq_counter #(.GATE_CYCLES(GATE), .HOLDOFF_CYCLES(5), .CNT_W(16)) duth (.clk, .rst_n, .start,
                                                      .sig_async(sig), .busy(busyh), .done(doneh), .count(counth));
  freq_counter #(.GATE_CYCLES(GATE), .HOLDOFF_CYCLES(0), .CNT_W(16)) dut  (.clk, .rst_n, .start, .sig_async(sig),
                                                      .busy, .done, .count);
  freq_counter #(.GATE_CYCLES(GATE), .HOLDOFF_CYCLES(3), .CNT_W(4))  dut4 (.clk, .rst_n, .start, .sig_async(sig),
                                                      .busy(busy4), .done(done4), .count(count4));

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s at %0t", what, $time);
    end
  endtask

  // One window: n pulses of 2 cycles high / 2 low starting `lead` cycles
  // after the start edge; `extra_start` pulses start again mid-window.
  task automatic window(input int n, input int lead, input bit extra_start, input int post);
    int cyc;
    int got_done_at;
    @(negedge clk);
    start = 1'b1;
    @(negedge clk);            // start sampled at the edge just passed (edge 0)
    start = 1'b0;
    cyc = 1;
    got_done_at = -1;
    fork
      begin
        repeat (lead - 1) @(negedge clk);
        for (int i = 0; i < n; i++) begin
          sig = 1'b1; repeat (2) @(negedge clk);
          sig = 1'b0; repeat (2) @(negedge clk);
        end
      end
      begin
        if (extra_start) begin
          repeat (GATE / 2) @(negedge clk);
          start = 1'b1; @(negedge clk); start = 1'b0;
        end
      end
      begin
        while (got_done_at < 0) begin
          @(posedge clk); #1;
          if (done) got_done_at = cyc;
          cyc++;
        end
      end
    join
    check(got_done_at == GATE, $sformatf("done latency GATE cycles (got %0d)", got_done_at));
    check(count == 16'(n), "edge count");
    check(count4 == ((n > 15) ? 4'hF : 4'(n)), "saturating 4-bit count, hold-off 3 < spacing 4");
    // Edges 4 cycles apart with a 5-cycle hold-off: every other one counts.
    check(counth == 16'((n + 1) / 2), $sformatf("hold-off 5 count %0d", counth));
    check(!busy, "idle after window");
    // Pulses after the window must not change the count.
    for (int i = 0; i < post; i++) begin
      sig = 1'b1; repeat (2) @(negedge clk);
      sig = 1'b0; repeat (2) @(negedge clk);
    end
    check(count == 16'(n), "count held after window");
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    repeat (3) @(negedge clk);
    check(!busy && !done && count == 0, "reset state");
    window(37, 10, 1'b0, 5);
    window(0, 10, 1'b0, 3);
    window(12, 20, 1'b1, 0);
    for (int k = 0; k < 6; k++) window(int'($urandom_range(45, 1)), int'($urandom_range(20, 4)), 1'b0, 2);
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
