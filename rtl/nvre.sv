// nvre: non-volatile register emulator.
//
// Emulates the slow access of a non-volatile memory. An access is accepted on
// a rising clock edge where EN is high and the emulator is idle; a down-counter
// is then loaded with the access delay in clock cycles, DELAY_NS/CLK_PERIOD_NS
// (80 ns at 100 MHz = 8 cycles in the evaluation). BUSY is high for exactly
// that many cycles after the accepting edge; the user must hold the memory
// inputs constant meanwhile and may take the data when BUSY is low. BUSY_SIG
// is the same pulse but falls one cycle earlier, so a synchronous master can
// prepare its next request without losing a cycle.
//
// Follows the paper: delay given in nanoseconds and scaled by the clock,
// counter-based BUSY, BUSY_SIG one cycle ahead. Own choices: EN arriving while
// busy is ignored; RST (the FPGA reset) clears the counter. A power failure
// does not reset it, so an accepted access always runs to its end.
module nvre #(
  parameter int unsigned DELAY_NS      = 80,
  parameter int unsigned CLK_PERIOD_NS = 10
) (
  input  logic clk,
  input  logic rst,
  input  logic en,
  output logic busy,
  output logic busy_sig
);
  localparam int unsigned DELAY_CYC =
      ((DELAY_NS + CLK_PERIOD_NS - 1) / CLK_PERIOD_NS) < 1 ? 1 :
      ((DELAY_NS + CLK_PERIOD_NS - 1) / CLK_PERIOD_NS);
  localparam int unsigned CW = $clog2(DELAY_CYC + 1);

  logic [CW-1:0] cnt;

  always_ff @(posedge clk) begin
    if (rst)
      cnt <= '0;
    else if (cnt != '0)
      cnt <= cnt - 1'b1;
    else if (en)
      cnt <= CW'(DELAY_CYC);
  end

  assign busy     = (cnt != '0);
  assign busy_sig = (cnt > CW'(1));
endmodule
