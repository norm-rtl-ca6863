// norm_pkg: types and constants shared by the NORM emulation blocks and the
// evaluation architecture built around them.
//
// The backup-logic state (bl_state_e) travels from the backup logic to the
// volatile counters and to the state converter. The three backup policies
// (dynamic, constant-time, task-based) follow the paper's evaluation; their
// encodings and the energy-entity numbering are this design's own choices.
package norm_pkg;

  // State of the backup-logic FSM, published on its STATE output.
  typedef enum logic [2:0] {
    BL_OFF     = 3'd0,  // held in reset by a power failure (or FPGA reset)
    BL_RECOVER = 3'd1,  // restoring the counters from the NVR after power-up
    BL_RUN     = 3'd2,  // counters are incrementing
    BL_BACKUP  = 3'd3,  // copying the counters into the NVR
    BL_HAZARD  = 3'd4   // DBP only: voltage under the backup threshold, waiting
  } bl_state_e;

  // Backup policies of the evaluation architecture.
  typedef enum logic [1:0] {
    POLICY_DBP = 2'd0,  // dynamic: back up when the voltage drops below a threshold
    POLICY_CBP = 2'd1,  // constant-time: back up every PARAMETER cycles
    POLICY_TBP = 2'd2   // task-based: back up when counter 1 is a multiple of PARAMETER
  } policy_e;

  // Entities whose energy the energy approximator tracks.
  localparam int unsigned ENT_COUNTERS = 0;  // volatile counters and backup logic computing
  localparam int unsigned ENT_NVR      = 1;  // NVR accesses (backup and recovery)
  localparam int unsigned N_ENTITIES   = 2;

  // Width of the backup-logic tuning parameter.
  localparam int unsigned PARAM_W = 16;

endpackage
