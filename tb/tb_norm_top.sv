// tb_norm_top: end-to-end test of the whole emulation at default parameters.
//
// The top runs with its defaults (dynamic backup policy, 1250-sample trace,
// prescaler 8, 80 ns NVR) for two passes of the voltage trace (20,000 cycles
// at 10 ns = 200 us), with the power-failure threshold at 2800 mV and the
// backup threshold at 3040 mV, then asks the energy calculator for both
// entities. A reference model watches the top's signals and checks:
//  * during a power failure the FSM is OFF and counter 1 reads 0;
//  * after every recovery counter 1 equals the last value that reached the
//    NVR (word 0 accepted by the NVR);
//  * in RUN counter 1 advances by one every 24 cycles (4.17 MHz), never
//    faster, and never changes outside RUN;
//  * a backup starts only below the backup threshold;
//  * the EA counters equal the cycles spent in RUN and in BACKUP/RECOVER;
//    during the second trace pass the energy calculator samples and
//    re-initialises the EA every 1000 cycles, and the interval results plus
//    the final counts must still add up to those cycle totals;
//  * ENERGY equals count x E3C (1 and 264) for both entities.
// It counts power failures, recoveries, backups, hazard waits, NVR accesses,
// backups cut by a power failure, trace wraps, periodic samples and energy
// calculations, and
// fails if one of the mechanisms the design has never happened.
module tb_norm_top;
  import norm_pkg::*;
  logic clk = 0, fpga_reset = 1;
  logic select_threshold = 0;
  logic [1:0][15:0] threshold_val;
  logic [15:0] param = '0;
  logic start_calc = 0, index = 0;
  logic [47:0] energy;
  logic [31:0] sample_period = '0;
  logic energy_index;
  logic evaluation_ready;
  logic [1:0] ea_full_array;
  logic [1:0][31:0] ea_value_array;
  logic power_reset, trace_full, nvr_busy, nvr_busy_sig;
  logic [1:0] threshold_comp;
  logic [15:0] voltage, counter1_val;
  bl_state_e state;
  int checks = 0, failures = 0;

  norm_top dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit cond, input string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s (t=%0t)", msg, $time); end
  endtask

  // Event counters and reference model.
  int n_fail = 0, n_recover = 0, n_backup = 0, n_hazard = 0, n_access = 0;
  int n_cut = 0, n_wrap = 0, n_calc = 0, n_busy_sig = 0, n_sample = 0;
  longint acc_cyc [2] = '{0, 0};
  logic ready_d = 0;
  int run_cycles = 0, nvr_cycles = 0, run_since_inc = 0, inc_count = 0;
  logic [15:0] nv_word0 = '0, last_c1 = '0;
  bl_state_e last_state = BL_OFF;
  logic last_pr = 1, last_full = 0, last_busy_sig = 0;
  bit model_on = 0;
  bit gap_valid = 0;
  int n_gap_checked = 0;

  always @(posedge clk) if (model_on) begin
    // What the NVR holds for counter 1 (word 0), seen at the accepting edge.
    if (dut.u_nvr.en && dut.u_nvr.we && !dut.u_nvr.busy && !power_reset &&
        dut.u_nvr.addr == 0) nv_word0 <= dut.u_nvr.din;
    if (dut.u_nvr.en && !dut.u_nvr.busy && !power_reset) n_access++;
    if (state == BL_RUN) run_cycles++;
    if (state == BL_BACKUP || state == BL_RECOVER) nvr_cycles++;
    // Periodic interval results, converted back to cycles.
    if (evaluation_ready && !ready_d) begin
      acc_cyc[energy_index] += longint'(energy) / (energy_index ? 264 : 1);
      n_sample++;
    end
  end
  always @(posedge clk) ready_d <= evaluation_ready;

  always @(negedge clk) if (model_on) begin
    if (power_reset && !last_pr) n_fail++;
    if (power_reset) gap_valid = 0;
    if (power_reset && last_pr) begin
      checks++;
      if (!(state == BL_OFF && counter1_val == 0)) begin
        failures++; $display("FAIL: volatile state not cleared in power failure (t=%0t)", $time);
      end
    end
    if (last_state == BL_BACKUP && state == BL_OFF) n_cut++;
    if (state == BL_BACKUP && last_state != BL_BACKUP) begin
      n_backup++;
      check(threshold_comp[1], "backup only below the backup threshold");
    end
    if (state == BL_HAZARD && last_state != BL_HAZARD) n_hazard++;
    if (last_state == BL_RECOVER && state == BL_RUN) begin
      n_recover++;
      check(counter1_val == nv_word0,
            $sformatf("recovered counter 1 = %0d, NVR held %0d", counter1_val, nv_word0));
    end
    // Counting rate: RUN cycles are edges whose preceding state was RUN.
    if (last_state == BL_RUN) run_since_inc++;
    if (counter1_val != last_c1 && !power_reset && !(last_state == BL_RECOVER)) begin
      checks++;
      if (!(last_state == BL_RUN && counter1_val == last_c1 + 1)) begin
        failures++; $display("FAIL: counter 1 moved %0d -> %0d in %s", last_c1, counter1_val, last_state.name());
      end
        if (gap_valid) begin
        checks++;
        if (run_since_inc != 24) begin failures++; $display("FAIL: %0d RUN cycles between increments, want 24", run_since_inc); end
        n_gap_checked++;
      end
      gap_valid = 1;
      inc_count++;
      run_since_inc = 0;
    end
    if (trace_full && !last_full) n_wrap++;
    if (nvr_busy_sig && !last_busy_sig) n_busy_sig++;
    last_pr = power_reset; last_state = state; last_c1 = counter1_val;
    last_full = trace_full; last_busy_sig = nvr_busy_sig;
  end

  task automatic calc(input logic idx, input logic [15:0] e3c);
    logic [31:0] cnt;
    int lat;
    @(negedge clk);
    cnt = ea_value_array[idx];
    index = idx; start_calc = 1;
    @(negedge clk); start_calc = 0;
    lat = 1;
    while (!evaluation_ready && lat < 20) begin @(negedge clk); lat++; end
    check(evaluation_ready && lat == 3, "EVALUATION_READY three edges after START_CALC");
    check(energy == 48'(cnt) * 48'(e3c), $sformatf("ENERGY[%0d] = %0d want %0d", idx, energy, 48'(cnt) * 48'(e3c)));
    $display("INFO: entity %0d: %0d cycles -> energy %0d", idx, cnt, energy);
    n_calc++;
  endtask

  initial begin
    threshold_val[0] = 16'd2800;   // power failure
    threshold_val[1] = 16'd3040;   // DBP backup threshold
    repeat (8) @(negedge clk);
    fpga_reset = 0;
    model_on = 1;
    repeat (10000) @(negedge clk);
    sample_period = 32'd1000;
    repeat (9990) @(negedge clk);
    sample_period = '0;
    repeat (10) @(negedge clk);
    check(acc_cyc[0] + longint'(ea_value_array[0]) == longint'(run_cycles),
          $sformatf("EA counters entity %0d + sampled %0d, RUN cycles %0d", ea_value_array[0], acc_cyc[0], run_cycles));
    check(acc_cyc[1] + longint'(ea_value_array[1]) == longint'(nvr_cycles),
          $sformatf("EA NVR entity %0d + sampled %0d, NVR cycles %0d", ea_value_array[1], acc_cyc[1], nvr_cycles));
    check(ea_full_array == 2'b00, "no EA counter saturated");
    model_on = 0;
    // Freeze the energy counters during the calculation with a forced power
    // failure: select a threshold no sample can reach.
    select_threshold = 1;  threshold_val[1] = 16'hFFFF;
    @(negedge clk); @(negedge clk);
    calc(1'b0, 16'd1);
    calc(1'b1, 16'd264);

    $display("INFO: counter 1 = %0d, last value saved %0d", counter1_val, nv_word0);
    $display("INFO: power failures %0d, recoveries %0d, backups %0d (cut %0d), hazard waits %0d, NVR accesses %0d, BUSY_SIG %0d, trace wraps %0d, periodic samples %0d, energy calcs %0d",
             n_fail, n_recover, n_backup, n_cut, n_hazard, n_access, n_busy_sig, n_wrap, n_sample, n_calc);
    $display("INFO: counter 1 increments %0d, %0d intervals of 24 RUN cycles checked", inc_count, n_gap_checked);
    check(n_fail > 0, "power failure happened");
    check(n_recover > 0, "recovery happened");
    check(n_backup > 0, "backup happened");
    check(n_hazard > 0, "hazard wait happened");
    check(n_access > 0 && n_busy_sig > 0, "NVR accesses with BUSY_SIG happened");
    check(n_wrap > 0, "trace wrapped");
    check(n_calc == 2, "energy calculations happened");
    check(n_sample >= 18, $sformatf("periodic samples happened (%0d)", n_sample));
    check(inc_count > 0, "counter 1 advanced");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
