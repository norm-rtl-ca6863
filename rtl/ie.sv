// ie: intermittency emulator.
//
// Replays a recorded capacitor-voltage trace and turns it into the emulated
// power-failure signal. A prescaler (clk_divider) emits a tick every PRESCALE
// clock cycles; on each tick a counter steps through a ROM holding TRACE_LEN
// voltage samples (mV, unsigned) and the registered ROM output VOLTAGE takes
// the next sample. After the last entry the counter wraps and the trace
// repeats. N_TH comparators check the current sample against the run-time
// thresholds THRESHOLD_VAL: bit i of THRESHOLD_COMP is 1 while the voltage is
// below threshold i. SELECT_THRESHOLD picks which comparator drives
// POWER_RESET, the power-failure reset of all volatile logic.
//
// Timing: after RESET, VOLTAGE is 0 (empty capacitor, so POWER_RESET is high
// for any non-zero selected threshold); sample k appears PRESCALE*(k+1) cycles
// after RESET falls and stays for PRESCALE cycles. The comparators and the
// multiplexer are combinational on the registered sample.
//
// Follows the paper: trace ROM, counter with wrap, prescaler, "below
// threshold" comparators, threshold multiplexer, comparator vector output.
// Own choices: a clock enable instead of a divided clock; the FPGA RESET
// restarts the trace; 16-bit mV samples; a selector beyond N_TH-1 gives a
// permanent power failure. The default trace file is a piecewise-linear
// reading of a 1250-point RFID-harvester trace (0 to about 5.25 V, 75% of it
// under 2.8 V); the trace ROM is loaded from TRACE_FILE.
module ie #(
  parameter int unsigned N_TH       = 2,
  parameter int unsigned VOLT_W     = 16,
  parameter int unsigned TRACE_LEN  = 1250,
  parameter int unsigned PRESCALE   = 8,
  parameter string       TRACE_FILE = "rtl/ie_voltage_trace.hex",
  localparam int unsigned SW        = N_TH > 1 ? $clog2(N_TH) : 1,
  localparam int unsigned TAW       = TRACE_LEN > 1 ? $clog2(TRACE_LEN) : 1
) (
  input  logic                       clk,
  input  logic                       reset,
  input  logic [SW-1:0]              select_threshold,
  input  logic [N_TH-1:0][VOLT_W-1:0] threshold_val,
  output logic                       power_reset,
  output logic [N_TH-1:0]            threshold_comp,
  output logic [VOLT_W-1:0]          voltage,
  output logic                       trace_full
);
  logic          tick;
  logic [TAW-1:0] cnt;
  logic [VOLT_W-1:0] rom [TRACE_LEN];

  initial $readmemh(TRACE_FILE, rom);

  clk_divider #(.DIV(PRESCALE)) u_div (.clk, .rst(reset), .tick);

  // Trace counter (EN tied high, advances on the prescaled tick).
  always_ff @(posedge clk) begin
    if (reset)
      cnt <= '0;
    else if (tick)
      cnt <= (cnt == TAW'(TRACE_LEN - 1)) ? '0 : cnt + 1'b1;
  end
  assign trace_full = (cnt == TAW'(TRACE_LEN - 1));

  // Trace ROM, registered output.
  always_ff @(posedge clk) begin
    if (reset)
      voltage <= '0;
    else if (tick)
      voltage <= rom[cnt];
  end

  // Comparators: high while the sample is below the threshold.
  always_comb begin
    for (int i = 0; i < N_TH; i++)
      threshold_comp[i] = (voltage < threshold_val[i]);
  end

  // Threshold multiplexer.
  assign power_reset = (32'(select_threshold) < N_TH) ? threshold_comp[select_threshold] : 1'b1;
endmodule
