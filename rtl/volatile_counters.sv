// volatile_counters: the volatile workload of the evaluation architecture.
//
// N_CNT counters live in volatile flip-flop arrays (FF) and are cleared by
// RST, which is the emulated power failure (or the FPGA reset). The FSM obeys
// the STATE command of the backup logic:
//  * BL_RUN: the counters are incremented one after the other. Each step takes
//    STEP_CYCLES cycles: on phase 0 the selected COUNTER block loads FF + STEP,
//    on phase 1 the result is written back into FF, then the FSM waits out the
//    remaining phases and selects the next counter. Counter 1 thus advances
//    once every N_CNT*STEP_CYCLES cycles (24 cycles = 4.17 MHz at 100 MHz).
//    Leaving BL_RUN freezes the step, which resumes where it stopped.
//  * BL_BACKUP / BL_RECOVER: the FSM writes FF[i] to NVR address i, or reads
//    NVR address i into FF[i], for i = 0..N_CNT-1, then raises OP_DONE and
//    keeps it high until STATE changes.
//  * BL_OFF, BL_HAZARD: nothing happens.
// NVR access: NVREG_EN, NVREG_WE, NVREG_ADDR and NVREG_DOUT are registers.
// A request is issued only while NVREG_BUSY is low; EN is high for one cycle;
// WE, ADDR and DOUT then stay put until the next request, so they are stable
// throughout BUSY. Read data (NVREG_DIN) is taken on the first edge with BUSY
// low after the request.
//
// Follows the paper: three counters, FF arrays with RST on the power failure,
// COUNTER blocks, per-FF input multiplexers choosing counter or NVR data, an
// output multiplexer onto the NVR data input, sequential increments at
// 4.16 MHz. Own choices: the STEP_CYCLES pacing that gives that rate, the
// per-counter increments 1, 2, 3 (the paper says only that the counters use
// "different base values"), the address map (counter i at address i) and the
// OP_DONE handshake back to the backup logic, which the paper does not draw.
module volatile_counters
  import norm_pkg::*;
#(
  parameter int unsigned N_CNT       = 3,
  parameter int unsigned DATA_W      = 16,
  parameter int unsigned ADDR_W      = 2,
  parameter int unsigned STEP_CYCLES = 8
) (
  input  logic              clk,
  input  logic              rst,
  input  bl_state_e         state,
  output logic              nvreg_en,
  output logic              nvreg_we,
  output logic [ADDR_W-1:0] nvreg_addr,
  output logic [DATA_W-1:0] nvreg_dout,
  input  logic [DATA_W-1:0] nvreg_din,
  input  logic              nvreg_busy,
  output logic              op_done,
  output logic [DATA_W-1:0] counter1_val
);
  localparam int unsigned SW = N_CNT > 1 ? $clog2(N_CNT) : 1;
  localparam int unsigned PW = STEP_CYCLES > 2 ? $clog2(STEP_CYCLES) : 1;

  typedef enum logic [1:0] {X_IDLE, X_REQ, X_ISSUED, X_WAIT} xfer_e;

  logic [DATA_W-1:0] ff      [N_CNT];
  logic [DATA_W-1:0] cnt_out [N_CNT];
  logic [N_CNT-1:0]  cnt_en;

  logic [SW-1:0] sel;       // counter being incremented
  logic [PW-1:0] phase;     // phase within the increment step
  xfer_e         xstate;
  logic [SW-1:0] widx;      // word being transferred
  logic          done_r;

  // COUNTER blocks.
  for (genvar i = 0; i < N_CNT; i++) begin : g_cnt
    vc_counter #(.DATA_W(DATA_W), .STEP(i + 1)) u_cnt (
      .clk, .rst, .en(cnt_en[i]), .data_in(ff[i]), .data_out(cnt_out[i])
    );
    assign cnt_en[i] = (state == BL_RUN) && (phase == '0) && (sel == SW'(i));
  end

  wire xfer_cmd = (state == BL_BACKUP) || (state == BL_RECOVER);

  always_ff @(posedge clk) begin
    if (rst) begin
      for (int i = 0; i < N_CNT; i++) ff[i] <= '0;
      sel        <= '0;
      phase      <= '0;
      xstate     <= X_IDLE;
      widx       <= '0;
      done_r     <= 1'b0;
      nvreg_en   <= 1'b0;
      nvreg_we   <= 1'b0;
      nvreg_addr <= '0;
      nvreg_dout <= '0;
    end else begin
      // Increment sequence.
      if (state == BL_RUN) begin
        if (phase == PW'(1))
          ff[sel] <= cnt_out[sel];  // FF input mux: counter result
        if (phase == PW'(STEP_CYCLES - 1)) begin
          phase <= '0;
          sel   <= (sel == SW'(N_CNT - 1)) ? '0 : sel + 1'b1;
        end else begin
          phase <= phase + 1'b1;
        end
      end

      // NVR transfer sequence.
      unique case (xstate)
        X_IDLE: begin
          if (!xfer_cmd)
            done_r <= 1'b0;
          else if (!done_r) begin
            widx   <= '0;
            xstate <= X_REQ;
          end
        end
        X_REQ: if (!nvreg_busy) begin
          nvreg_en   <= 1'b1;
          nvreg_we   <= (state == BL_BACKUP);
          nvreg_addr <= ADDR_W'(widx);
          nvreg_dout <= ff[widx];     // output mux onto the NVR data input
          xstate     <= X_ISSUED;
        end
        X_ISSUED: begin
          nvreg_en <= 1'b0;
          xstate   <= X_WAIT;
        end
        X_WAIT: if (!nvreg_busy) begin
          if (!nvreg_we)
            ff[widx] <= nvreg_din;    // FF input mux: NVR data
          if (widx == SW'(N_CNT - 1)) begin
            done_r <= 1'b1;
            xstate <= X_IDLE;
          end else begin
            widx   <= widx + 1'b1;
            xstate <= X_REQ;
          end
        end
        default: xstate <= X_IDLE;
      endcase
    end
  end

  assign op_done      = done_r && xfer_cmd;
  assign counter1_val = ff[0];
endmodule
