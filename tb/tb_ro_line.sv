// Testbench of the ring-oscillator line model.
//
// With a 1 us stage delay the loop of three inverting stages must run with a
// 6 us period (f = 1/(2*3*tau)), its first output rise must come 4 us after
// enable, and the output must stay low while the line is disabled. The
// expected times come from the frequency formula, not from the model.
`timescale 1ns / 1ps
module tb_ro_line;

  localparam real TAU_NS = 1000.0;

  logic en;
  logic osc_out;
  int   checks = 0, failures = 0;

  ro_line #(.STAGE_DELAY_NS(TAU_NS), .LOOP_STAGES(3)) dut (.en, .osc_out);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s at %0t", what, $time);
    end
  endtask

  realtime t_en, t_rise, t_prev;
  int edges;

  initial begin
    en = 1'b0;
    #50000;
    check(osc_out == 1'b0, "output low while disabled");
    // No edge may appear while disabled.
    edges = 0;
    fork
      begin #50000; end
      begin forever begin @(posedge osc_out); edges++; end end
    join_any
    disable fork;
    check(edges == 0, "no oscillation while disabled");

    en = 1'b1;
    t_en = $realtime;
    @(posedge osc_out);
    t_rise = $realtime;
    check((t_rise - t_en) > 4.0 * TAU_NS - 1.0 && (t_rise - t_en) < 4.0 * TAU_NS + 1.0,
          "first rise four stage delays after enable");
    t_prev = t_rise;
    for (int i = 0; i < 10; i++) begin
      @(posedge osc_out);
      check(($realtime - t_prev) > 6.0 * TAU_NS - 1.0 && ($realtime - t_prev) < 6.0 * TAU_NS + 1.0,
            "period 2*n*tau");
      t_prev = $realtime;
      @(negedge osc_out);
      check(($realtime - t_prev) > 3.0 * TAU_NS - 1.0 && ($realtime - t_prev) < 3.0 * TAU_NS + 1.0,
            "half period n*tau");
    end

    en = 1'b0;
    #(10.0 * TAU_NS);
    check(osc_out == 1'b0, "output returns low after disable");
    edges = 0;
    fork
      begin #50000; end
      begin forever begin @(posedge osc_out); edges++; end end
    join_any
    disable fork;
    check(edges == 0, "ring stopped after disable");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #10ms;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
