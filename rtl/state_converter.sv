// state_converter: turns the evaluation architecture's state into the energy
// approximator's enable and reset vectors.
//
// Combinational. While the backup logic is in BL_RUN the volatile-counter
// entity (ENT_COUNTERS) is counted; while it is in BL_BACKUP or BL_RECOVER the
// NVR entity (ENT_NVR) is counted; in BL_OFF (power failure) and BL_HAZARD
// (waiting for the voltage to recover) nothing is counted. RST (the FPGA
// reset) asserts every bit of EA_RESET_ARRAY and no enable.
//
// The paper names this block and its connections only; the mapping above is
// this design's choice, made so that the two energy figures the paper reports
// (counters and NVR) can be read from the EA.
module state_converter
  import norm_pkg::*;
#(
  parameter int unsigned N_ENT = N_ENTITIES
) (
  input  logic             rst,
  input  bl_state_e        state,
  output logic [N_ENT-1:0] ea_enable_array,
  output logic [N_ENT-1:0] ea_reset_array
);
  always_comb begin
    ea_enable_array = '0;
    ea_reset_array  = rst ? '1 : '0;
    if (!rst) begin
      unique case (state)
        BL_RUN:                ea_enable_array[ENT_COUNTERS] = 1'b1;
        BL_BACKUP, BL_RECOVER: ea_enable_array[ENT_NVR]      = 1'b1;
        default: ;
      endcase
    end
  end
endmodule
