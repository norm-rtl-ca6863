// backup_logic: the backup-policy FSM of the evaluation architecture.
//
// The FSM is volatile: RST is the emulated power failure (OR-ed with the FPGA
// reset), which holds it in BL_OFF. When power returns its first action is
// BL_RECOVER (the volatile counters reload their values from the NVR), then
// BL_RUN. From BL_RUN a backup (BL_BACKUP, the counters are written to the
// NVR) is started by the policy selected with POLICY:
//  * POLICY_DBP (dynamic): when THRESHOLD_COMP[BACKUP_TH] is high, i.e. the
//    trace voltage is under the backup threshold of the intermittency
//    emulator. After the backup the FSM waits in BL_HAZARD, computing nothing,
//    until the voltage is back above the threshold, then returns to BL_RUN.
//  * POLICY_CBP (constant time): a timer loaded with PARAM counts the cycles
//    spent in BL_RUN; when it runs out a backup is taken and the timer
//    restarts. PARAM is the backup period in clock cycles (100 per us at
//    100 MHz).
//  * POLICY_TBP (task based): when COUNTER1_VAL is a non-zero multiple of
//    PARAM and differs from the value last saved or restored.
// A transfer ends when the volatile counters raise OP_DONE. PARAM = 0
// disables CBP and TBP backups. STATE is the current FSM state.
//
// Follows the paper: the three policies and their tuning parameters, the
// volatile FSM that recovers first after every power failure, "computation
// does not progress" below the DBP threshold. Own choices: the OP_DONE and
// COUNTER1_VAL inputs (not drawn in the paper), PARAM in cycles rather than
// microseconds, the BL_HAZARD exit condition, the timer counting only
// BL_RUN cycles.
module backup_logic
  import norm_pkg::*;
#(
  parameter policy_e     POLICY    = POLICY_DBP,
  parameter int unsigned N_TH      = 2,
  parameter int unsigned BACKUP_TH = 1,
  parameter int unsigned DATA_W    = 16
) (
  input  logic               clk,
  input  logic               rst,
  input  logic [PARAM_W-1:0] param,
  input  logic [N_TH-1:0]    threshold_comp,
  input  logic               op_done,
  input  logic [DATA_W-1:0]  counter1_val,
  output bl_state_e          state
);
  logic [PARAM_W-1:0] timer;
  logic [DATA_W-1:0]  last_saved;

  wire below_th  = threshold_comp[BACKUP_TH];
  wire tbp_due   = (param != '0) && (counter1_val != '0) &&
                   ((counter1_val % DATA_W'(param)) == '0) && (counter1_val != last_saved);
  wire cbp_due   = (param != '0) && (timer == PARAM_W'(1));

  logic backup_due;
  always_comb begin
    unique case (POLICY)
      POLICY_DBP: backup_due = below_th;
      POLICY_CBP: backup_due = cbp_due;
      POLICY_TBP: backup_due = tbp_due;
      default:    backup_due = 1'b0;
    endcase
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      state      <= BL_OFF;
      timer      <= '0;
      last_saved <= '0;
    end else begin
      unique case (state)
        BL_OFF: begin
          state <= BL_RECOVER;
        end
        BL_RECOVER: if (op_done) begin
          state      <= BL_RUN;
          timer      <= param;
          last_saved <= counter1_val;
        end
        BL_RUN: begin
          if (timer > PARAM_W'(1)) timer <= timer - 1'b1;
          if (backup_due) begin
            state      <= BL_BACKUP;
            last_saved <= counter1_val;
          end
        end
        BL_BACKUP: if (op_done) begin
          timer <= param;
          state <= (POLICY == POLICY_DBP) ? BL_HAZARD : BL_RUN;
        end
        BL_HAZARD: if (!below_th) state <= BL_RUN;
        default: state <= BL_OFF;
      endcase
    end
  end
endmodule
