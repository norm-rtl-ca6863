// ea: energy approximator.
//
// One cycle counter per tracked entity. Counter i adds one on every clock
// edge where EA_ENABLE_ARRAY[i] is high, so it holds the number of cycles the
// entity was active; multiplied by that entity's energy per cycle (see iec)
// it approximates the entity's energy. EA_RESET_ARRAY[i] clears counter i
// synchronously (and takes priority over enable). A counter that reaches its
// maximum stops there and raises its EA_FULL_ARRAY bit, so an overflowed count
// is never mistaken for a small one; the bit clears with the counter.
//
// Follows the paper: per-entity cycle counters, configurable number of
// entities. Own choices: saturation with a full flag (the paper names an
// EA_FULL_ARRAY output without defining it), synchronous reset, 32-bit width.
module ea #(
  parameter int unsigned N_ENT = 2,
  parameter int unsigned CNT_W = 32
) (
  input  logic                        clk,
  input  logic [N_ENT-1:0]            ea_enable_array,
  input  logic [N_ENT-1:0]            ea_reset_array,
  output logic [N_ENT-1:0][CNT_W-1:0] ea_value_array,
  output logic [N_ENT-1:0]            ea_full_array
);
  for (genvar i = 0; i < N_ENT; i++) begin : g_cnt
    always_ff @(posedge clk) begin
      if (ea_reset_array[i])
        ea_value_array[i] <= CNT_W'(ea_enable_array[i]);
      else if (ea_enable_array[i] && !ea_full_array[i])
        ea_value_array[i] <= ea_value_array[i] + 1'b1;
    end
    assign ea_full_array[i] = &ea_value_array[i];
  end
endmodule
