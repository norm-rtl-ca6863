// iec: instant energy calculator.
//
// Converts an energy-approximator cycle count into energy. On START_CALC the
// FSM latches INDEX; next it takes the selected counter from EA_VALUES_ARRAY
// through the index multiplexer and, at the same edge, reads the energy per
// clock cycle (E3C) of that entity from a small ROM; then the multiplier forms
// ENERGY = count * E3C, ENERGY_INDEX names the entity and EVALUATION_READY
// rises.
//
// Periodic mode: when SAMPLE_PERIOD is non-zero the calculator also samples
// every entity in turn once every SAMPLE_PERIOD cycles, without START_CALC.
// On the edge where it takes entity i's count it pulses EA_CLEAR[i], which
// re-initialises that EA counter on the same edge, so each result is the
// energy of one interval and no cycle is lost or counted twice; the EA
// counters then never need to be wider than one interval. The user adds up
// the interval results (ENERGY with ENERGY_INDEX, one per EVALUATION_READY
// pulse). SAMPLE_PERIOD = 0 turns the mode off.
//
// Timing: with START_CALC sampled high on edge 0, ENERGY and EVALUATION_READY
// are updated on edge 2 (three edges including edge 0); the count used is
// the one present at edge 1. After a START_CALC request EVALUATION_READY stays
// high, with ENERGY held, until the next calculation starts; in a periodic
// sweep it is high for one cycle per entity. START_CALC while a calculation
// runs is ignored; a periodic sweep that falls due during a manual request
// starts right after it.
//
// Follows the paper: index multiplexer, E3C ROM addressed by the FSM,
// registered multiplier, FSM with START/READY, interval sampling with EA
// re-initialisation. Own choices: the latency above, the output width
// CNT_W+E3C_W (no overflow), the run-time SAMPLE_PERIOD input, ENERGY_INDEX
// and EA_CLEAR, and the ROM contents. The E3C unit is the user's; the
// defaults are pJ per 10 ns cycle: entity 0 (the volatile counters) 1, a
// placeholder to be replaced by a measured figure; entity 1 (the NVR)
// 264 = 8 mA x 3.3 V x 10 ns, from the FeRAM read/write current.
module iec #(
  parameter int unsigned N_ENT = 2,
  parameter int unsigned CNT_W = 32,
  parameter int unsigned E3C_W = 16,
  parameter logic [E3C_W-1:0] E3C [N_ENT] = '{16'd1, 16'd264},
  localparam int unsigned IW   = N_ENT > 1 ? $clog2(N_ENT) : 1
) (
  input  logic                        clk,
  input  logic                        reset,
  input  logic [N_ENT-1:0][CNT_W-1:0] ea_values_array,
  input  logic [IW-1:0]               index,
  input  logic                        start_calc,
  input  logic [CNT_W-1:0]            sample_period,
  output logic [N_ENT-1:0]            ea_clear,
  output logic [CNT_W+E3C_W-1:0]      energy,
  output logic [IW-1:0]               energy_index,
  output logic                        evaluation_ready
);
  typedef enum logic [1:0] {IEC_IDLE, IEC_FETCH, IEC_MUL} iec_state_e;

  iec_state_e        state;
  logic [IW-1:0]     idx;
  logic              sweep;  // the running calculation is a periodic sweep
  logic              due;    // a periodic sweep is pending
  logic [CNT_W-1:0]  timer;
  logic [CNT_W-1:0]  op_a;   // multiplier input A: selected counter
  logic [E3C_W-1:0]  op_b;   // multiplier input B: ROM output

  // Interval timer: DUE is set every SAMPLE_PERIOD cycles and cleared when
  // the sweep starts.
  wire wrap = (timer >= sample_period - 1'b1);
  always_ff @(posedge clk) begin
    if (reset || sample_period == '0) begin
      timer <= '0;
      due   <= 1'b0;
    end else begin
      timer <= wrap ? '0 : timer + 1'b1;
      if (wrap)
        due <= 1'b1;
      else if (state == IEC_IDLE && !start_calc)
        due <= 1'b0;
    end
  end

  always_ff @(posedge clk) begin
    if (reset) begin
      state            <= IEC_IDLE;
      idx              <= '0;
      sweep            <= 1'b0;
      op_a             <= '0;
      op_b             <= '0;
      energy           <= '0;
      energy_index     <= '0;
      evaluation_ready <= 1'b0;
    end else begin
      unique case (state)
        IEC_IDLE: begin
          if (start_calc) begin
            idx              <= index;
            sweep            <= 1'b0;
            evaluation_ready <= 1'b0;
            state            <= IEC_FETCH;
          end else if (due) begin
            idx              <= '0;
            sweep            <= 1'b1;
            evaluation_ready <= 1'b0;
            state            <= IEC_FETCH;
          end
        end
        IEC_FETCH: begin
          op_a             <= (32'(idx) < N_ENT) ? ea_values_array[idx] : '0;
          op_b             <= (32'(idx) < N_ENT) ? E3C[idx] : '0;
          evaluation_ready <= 1'b0;
          state            <= IEC_MUL;
        end
        IEC_MUL: begin
          energy           <= (CNT_W+E3C_W)'(op_a) * (CNT_W+E3C_W)'(op_b);
          energy_index     <= idx;
          evaluation_ready <= 1'b1;
          if (sweep && 32'(idx) < N_ENT - 1) begin
            idx   <= idx + 1'b1;
            state <= IEC_FETCH;
          end else begin
            sweep <= 1'b0;
            state <= IEC_IDLE;
          end
        end
        default: state <= IEC_IDLE;
      endcase
    end
  end

  // Re-initialise the sampled EA counter on the edge that samples it.
  always_comb begin
    ea_clear = '0;
    if (state == IEC_FETCH && sweep && 32'(idx) < N_ENT) ea_clear[idx] = 1'b1;
  end
endmodule
