// tb_ie: self-checking test of the intermittency emulator.
//
// Default parameters (1250-sample trace, prescaler 8). A reference copy of
// the trace is read independently; after each clock edge the test predicts
// the sample on VOLTAGE from the number of edges since reset (a new sample
// every 8 cycles, the first after 8 cycles, wrap after 1250) and checks
// VOLTAGE, every THRESHOLD_COMP bit and POWER_RESET for the selected
// threshold, switching SELECT_THRESHOLD and the thresholds along the way.
// It runs 1.2 trace periods, checks the wrap and TRACE_FULL, and checks that
// with a 2800 mV threshold about 75% of the trace is a power failure.
module tb_ie;
  localparam int LEN = 1250, PS = 8;
  logic clk = 0, reset = 1;
  logic select_threshold = 0;
  logic [1:0][15:0] threshold_val;
  logic power_reset, trace_full;
  logic [1:0] threshold_comp;
  logic [15:0] voltage;
  logic [15:0] ref_trace [LEN];
  int checks = 0, failures = 0;
  int off_cycles = 0, wraps = 0;

  ie dut (.clk, .reset, .select_threshold, .threshold_val, .power_reset,
          .threshold_comp, .voltage, .trace_full);

  always #5 clk = ~clk;

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit cond, input string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s (t=%0t)", msg, $time); end
  endtask

  initial begin
    logic [15:0] exp_v;
    int ticks;
    $readmemh("rtl/ie_voltage_trace.hex", ref_trace);
    threshold_val[0] = 16'd2800;
    threshold_val[1] = 16'd3040;
    repeat (3) @(negedge clk);
    reset = 0;
    for (int c = 1; c <= LEN * PS * 6 / 5; c++) begin
      @(posedge clk); #1;
      ticks = c / PS;
      exp_v = (ticks == 0) ? 16'd0 : ref_trace[(ticks - 1) % LEN];
      if (c % 7 == 0 || voltage != exp_v)
        check(voltage == exp_v, $sformatf("cycle %0d voltage %0d want %0d", c, voltage, exp_v));
      if (c % 5 == 0) begin
        check(threshold_comp[0] == (exp_v < threshold_val[0]) &&
              threshold_comp[1] == (exp_v < threshold_val[1]), "THRESHOLD_COMP");
        check(power_reset == threshold_comp[select_threshold], "POWER_RESET follows the selected comparator");
      end
      check(trace_full == ((ticks % LEN) == LEN - 1), "TRACE_FULL on the last entry");
      if (c <= LEN * PS && select_threshold == 0 && threshold_val[0] == 16'd2800 && power_reset) off_cycles++;
      if (ticks > 0 && (ticks - 1) % LEN == 0 && c % PS == 0 && c > PS) wraps++;
      // Change the selector and a threshold during the second pass.
      if (c == LEN * PS + 100) select_threshold = 1;
      if (c == LEN * PS + 500) threshold_val[1] = 16'($urandom_range(6000));
    end
    check(wraps == 1, "trace restarted once");
    // Paper: the 2.8 V threshold puts 75% of the trace in power failure.
    $display("INFO: power failure for %0d of %0d cycles", off_cycles, LEN * PS);
    check(off_cycles * 100 >= LEN * PS * 73 && off_cycles * 100 <= LEN * PS * 77,
          "about 75% of the trace below 2800 mV");
    // Reset restarts the trace.
    @(negedge clk); reset = 1;
    @(negedge clk); reset = 0;
    #1 check(voltage == 0 && power_reset == 1, "reset empties the capacitor");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
