// norm_top: the NORM emulation blocks wired to the evaluation architecture.
//
// The intermittency emulator (ie) replays a voltage trace and raises
// POWER_RESET while the trace is under the selected threshold. POWER_RESET
// (OR-ed with the FPGA reset) resets all volatile logic: the backup-logic FSM
// and the volatile counters. The non-volatile register (nvr) only sees it as a
// mode input: its contents survive, and it is wiped by the FPGA reset alone.
// The backup logic commands the volatile counters to recover, run and back up
// through its STATE; the counters move their values to and from the NVR
// through the NVR's emulated slow access (BUSY). The state converter turns
// STATE into enable bits of the energy approximator (ea), whose cycle counts
// the instant energy calculator (iec) turns into energy on request.
//
// Interface: SELECT_THRESHOLD and THRESHOLD_VAL set the emulated power
// supply (threshold 0 for power failure, threshold BACKUP_TH for the dynamic
// policy); PARAM tunes the CBP and TBP policies; START_CALC and INDEX request
// an energy figure, returned on ENERGY with EVALUATION_READY; a non-zero
// SAMPLE_PERIOD makes the energy calculator sample and re-initialise every
// EA counter once per period instead (results tagged by ENERGY_INDEX). The
// EA counters are reset by the FPGA reset and by those samples. The remaining
// outputs expose internal signals for observation. FPGA_RESET must be held
// for at least NVR_DEPTH cycles so that the NVR is fully cleared.
//
// The block set and connections follow the paper's evaluation architecture;
// the parameter defaults are its 100 MHz clock, 80 ns NVR access, three
// counters, 1250-point trace and 8-cycle prescaler (100 us per trace). Word
// widths and the NVR depth are this design's choices.
module norm_top
  import norm_pkg::*;
#(
  parameter policy_e     POLICY        = POLICY_DBP,
  parameter int unsigned N_TH          = 2,
  parameter int unsigned BACKUP_TH     = 1,
  parameter int unsigned VOLT_W        = 16,
  parameter int unsigned TRACE_LEN     = 1250,
  parameter int unsigned PRESCALE      = 8,
  parameter string       TRACE_FILE    = "rtl/ie_voltage_trace.hex",
  parameter int unsigned N_CNT         = 3,
  parameter int unsigned DATA_W        = 16,
  parameter int unsigned NVR_DEPTH     = 4,
  parameter int unsigned DELAY_NS      = 80,
  parameter int unsigned CLK_PERIOD_NS = 10,
  parameter int unsigned STEP_CYCLES   = 8,
  parameter int unsigned CNT_W         = 32,
  parameter int unsigned E3C_W         = 16,
  localparam int unsigned SW           = N_TH > 1 ? $clog2(N_TH) : 1,
  localparam int unsigned AW           = NVR_DEPTH > 1 ? $clog2(NVR_DEPTH) : 1,
  localparam int unsigned IW           = N_ENTITIES > 1 ? $clog2(N_ENTITIES) : 1
) (
  input  logic                             clk,
  input  logic                             fpga_reset,
  // Intermittency emulator settings
  input  logic [SW-1:0]                    select_threshold,
  input  logic [N_TH-1:0][VOLT_W-1:0]      threshold_val,
  // Backup policy tuning parameter
  input  logic [PARAM_W-1:0]               param,
  // Energy calculation
  input  logic                             start_calc,
  input  logic [IW-1:0]                    index,
  input  logic [CNT_W-1:0]                 sample_period,
  output logic [CNT_W+E3C_W-1:0]           energy,
  output logic [IW-1:0]                    energy_index,
  output logic                             evaluation_ready,
  output logic [N_ENTITIES-1:0]            ea_full_array,
  // Observation
  output logic [N_ENTITIES-1:0][CNT_W-1:0] ea_value_array,
  output logic                             power_reset,
  output logic [N_TH-1:0]                  threshold_comp,
  output logic [VOLT_W-1:0]                voltage,
  output logic                             trace_full,
  output bl_state_e                        state,
  output logic [DATA_W-1:0]                counter1_val,
  output logic                             nvr_busy,
  output logic                             nvr_busy_sig
);
  logic vol_rst;
  assign vol_rst = power_reset | fpga_reset;

  // Intermittency emulator
  ie #(
    .N_TH(N_TH), .VOLT_W(VOLT_W), .TRACE_LEN(TRACE_LEN),
    .PRESCALE(PRESCALE), .TRACE_FILE(TRACE_FILE)
  ) u_ie (
    .clk, .reset(fpga_reset), .select_threshold, .threshold_val,
    .power_reset, .threshold_comp, .voltage, .trace_full
  );

  // Non-volatile register
  logic              nv_en, nv_we;
  logic [AW-1:0]     nv_addr;
  logic [DATA_W-1:0] nv_din, nv_dout;

  nvr #(
    .DEPTH(NVR_DEPTH), .DATA_W(DATA_W),
    .DELAY_NS(DELAY_NS), .CLK_PERIOD_NS(CLK_PERIOD_NS)
  ) u_nvr (
    .clk, .reset(fpga_reset), .power_reset,
    .en(nv_en), .we(nv_we), .addr(nv_addr), .din(nv_din), .dout(nv_dout),
    .busy(nvr_busy), .busy_sig(nvr_busy_sig)
  );

  // Backup logic
  logic op_done;

  backup_logic #(
    .POLICY(POLICY), .N_TH(N_TH), .BACKUP_TH(BACKUP_TH), .DATA_W(DATA_W)
  ) u_bl (
    .clk, .rst(vol_rst), .param, .threshold_comp, .op_done, .counter1_val, .state
  );

  // Volatile counters
  volatile_counters #(
    .N_CNT(N_CNT), .DATA_W(DATA_W), .ADDR_W(AW), .STEP_CYCLES(STEP_CYCLES)
  ) u_vc (
    .clk, .rst(vol_rst), .state,
    .nvreg_en(nv_en), .nvreg_we(nv_we), .nvreg_addr(nv_addr),
    .nvreg_dout(nv_din), .nvreg_din(nv_dout), .nvreg_busy(nvr_busy),
    .op_done, .counter1_val
  );

  // Energy approximation
  logic [N_ENTITIES-1:0] ea_en, ea_rst, ea_clear;

  state_converter #(.N_ENT(N_ENTITIES)) u_sc (
    .rst(fpga_reset), .state, .ea_enable_array(ea_en), .ea_reset_array(ea_rst)
  );

  ea #(.N_ENT(N_ENTITIES), .CNT_W(CNT_W)) u_ea (
    .clk, .ea_enable_array(ea_en), .ea_reset_array(ea_rst | ea_clear),
    .ea_value_array, .ea_full_array
  );

  iec #(.N_ENT(N_ENTITIES), .CNT_W(CNT_W), .E3C_W(E3C_W)) u_iec (
    .clk, .reset(fpga_reset), .ea_values_array(ea_value_array),
    .index, .start_calc, .sample_period, .ea_clear,
    .energy, .energy_index, .evaluation_ready
  );

  // The counters need one NVR word each.
  initial assert (NVR_DEPTH >= N_CNT) else $fatal(1, "norm_top: NVR_DEPTH < N_CNT");
endmodule
