// clk_divider: prescaler of the intermittency emulator.
//
// Instead of producing a slower clock, which is poor practice on an FPGA, it
// produces a one-cycle enable pulse TICK every DIV cycles of CLK_IN; the
// blocks it feeds advance only on TICK, which has the effect of clocking them
// at f/DIV. DIV = 1 gives TICK high every cycle. RST clears the phase so the
// first TICK comes DIV cycles after reset is released.
module clk_divider #(
  parameter int unsigned DIV = 8
) (
  input  logic clk,
  input  logic rst,
  output logic tick
);
  localparam int unsigned CW = DIV > 1 ? $clog2(DIV) : 1;
  logic [CW-1:0] cnt;

  always_ff @(posedge clk) begin
    if (rst || cnt == CW'(DIV - 1))
      cnt <= '0;
    else
      cnt <= cnt + 1'b1;
  end

  assign tick = !rst && (cnt == CW'(DIV - 1));
endmodule
