// reset_block: wipes the NVR memory after an FPGA hardware reset.
//
// On an FPGA the block RAM keeps its contents through a reset button press,
// unlike a real device that was powered off. While RST is high this block
// drives a write of zeros to one address per cycle, walking addresses
// 0..DEPTH-1 and wrapping, so RST must stay high for at least DEPTH cycles to
// clear the whole memory. When RST is low its EN/WE outputs are low and the
// address counter is held at 0.
//
// The paper gives only the function; the address sweep is this design's own
// simplest implementation of it.
module reset_block #(
  parameter int unsigned DEPTH  = 4,
  parameter int unsigned DATA_W = 16,
  localparam int unsigned AW    = DEPTH > 1 ? $clog2(DEPTH) : 1
) (
  input  logic              clk,
  input  logic              rst,
  output logic              en,
  output logic              we,
  output logic [AW-1:0]     addr,
  output logic [DATA_W-1:0] din
);
  always_ff @(posedge clk) begin
    if (!rst)
      addr <= '0;
    else if (addr == AW'(DEPTH - 1))
      addr <= '0;
    else
      addr <= addr + 1'b1;
  end

  assign en  = rst;
  assign we  = rst;
  assign din = '0;
endmodule
