// vc_counter: the COUNTER block of the volatile counters.
//
// Registered incrementer: on a clock edge with EN high it loads
// DATA_IN + STEP into DATA_OUT; otherwise DATA_OUT holds. DATA_IN comes from
// the counter's flip-flop array and DATA_OUT goes back to it, so one
// increment is fetch (DATA_IN), add (this edge), save (next edge, done by the
// owner). RST clears DATA_OUT. STEP is the counter's own increment.
module vc_counter #(
  parameter int unsigned DATA_W = 16,
  parameter int unsigned STEP   = 1
) (
  input  logic              clk,
  input  logic              rst,
  input  logic              en,
  input  logic [DATA_W-1:0] data_in,
  output logic [DATA_W-1:0] data_out
);
  always_ff @(posedge clk) begin
    if (rst)
      data_out <= '0;
    else if (en)
      data_out <= data_in + DATA_W'(STEP);
  end
endmodule
