// nvr_bram: volatile single-port block RAM that stores the NVR data.
//
// Stands in for the FPGA vendor's block-memory IP. Synchronous single port:
// on a rising edge with EN high, a write (WE high) stores DIN at ADDR and the
// output register takes the written word (write-first); a read loads DOUT with
// the word at ADDR one cycle later. With EN low DOUT holds its value.
// No reset: clearing is the job of the reset block in front of it.
//
// The port names follow the paper; the write-first behaviour and one-cycle
// read latency are this design's choices.
module nvr_bram #(
  parameter int unsigned DEPTH  = 4,
  parameter int unsigned DATA_W = 16,
  localparam int unsigned AW    = DEPTH > 1 ? $clog2(DEPTH) : 1
) (
  input  logic              clk,
  input  logic              en,
  input  logic              we,
  input  logic [AW-1:0]     addr,
  input  logic [DATA_W-1:0] din,
  output logic [DATA_W-1:0] dout
);
  logic [DATA_W-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (en) begin
      if (we) begin
        mem[addr] <= din;
        dout      <= din;
      end else begin
        dout      <= mem[addr];
      end
    end
  end
endmodule
