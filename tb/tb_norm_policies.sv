// tb_norm_policies: the backup-policy parameter sweeps of the evaluation.
//
// Three copies of the top, one per backup policy, each replay one pass of
// the voltage trace (10,000 cycles = 100 us at 100 MHz, power failure below
// 2800 mV) once per value of the policy's tuning parameter:
//   DBP backup threshold 3000..5010 mV in 10 mV steps (202 runs)
//   CBP backup period 2..398 us in 2 us steps = 200..39800 cycles (200 runs)
//   TBP backup task count 1..55 (55 runs)
// After each run it reads counter 1 (the progress made despite the power
// failures) and the energy of both EA entities through the IEC. Checks per
// run: counter 1 never exceeds RUN cycles / 24 plus one per recovery; the EA cycle counts never
// exceed the run length; ENERGY = count x E3C; the system is up at the end of
// the trace (the last sample is above 2800 mV). It also checks, as the paper
// reports, that for DBP the lowest threshold gives more progress than the
// highest. It prints the best parameter of each policy and the energy per
// increment there.
module tb_norm_policies;
  import norm_pkg::*;
  localparam int RUN_LEN = 10000;

  logic clk = 0;
  logic [2:0] fpga_reset = '1;
  logic [2:0][1:0][15:0] thv;
  logic [2:0][15:0] prm;
  logic [2:0] start = '0, sel = '0;
  logic [2:0] idx = '0;
  logic [2:0][47:0] energy;
  logic [2:0] ready;
  logic [2:0][1:0] full;
  logic [2:0][1:0][31:0] eav;
  logic [2:0] pr, tf, busy, busy_sig;
  logic [2:0][1:0] comp;
  logic [2:0][15:0] volt, c1;
  bl_state_e st [3];
  int checks = 0, failures = 0;

  norm_top #(.POLICY(POLICY_DBP)) u_dbp (.clk, .fpga_reset(fpga_reset[0]), .select_threshold(sel[0]),
    .threshold_val(thv[0]), .param(prm[0]), .start_calc(start[0]), .index(idx[0]), .sample_period('0), .energy_index(), .energy(energy[0]),
    .evaluation_ready(ready[0]), .ea_full_array(full[0]), .ea_value_array(eav[0]), .power_reset(pr[0]),
    .threshold_comp(comp[0]), .voltage(volt[0]), .trace_full(tf[0]), .state(st[0]), .counter1_val(c1[0]),
    .nvr_busy(busy[0]), .nvr_busy_sig(busy_sig[0]));
  norm_top #(.POLICY(POLICY_CBP)) u_cbp (.clk, .fpga_reset(fpga_reset[1]), .select_threshold(sel[1]),
    .threshold_val(thv[1]), .param(prm[1]), .start_calc(start[1]), .index(idx[1]), .sample_period('0), .energy_index(), .energy(energy[1]),
    .evaluation_ready(ready[1]), .ea_full_array(full[1]), .ea_value_array(eav[1]), .power_reset(pr[1]),
    .threshold_comp(comp[1]), .voltage(volt[1]), .trace_full(tf[1]), .state(st[1]), .counter1_val(c1[1]),
    .nvr_busy(busy[1]), .nvr_busy_sig(busy_sig[1]));
  norm_top #(.POLICY(POLICY_TBP)) u_tbp (.clk, .fpga_reset(fpga_reset[2]), .select_threshold(sel[2]),
    .threshold_val(thv[2]), .param(prm[2]), .start_calc(start[2]), .index(idx[2]), .sample_period('0), .energy_index(), .energy(energy[2]),
    .evaluation_ready(ready[2]), .ea_full_array(full[2]), .ea_value_array(eav[2]), .power_reset(pr[2]),
    .threshold_comp(comp[2]), .voltage(volt[2]), .trace_full(tf[2]), .state(st[2]), .counter1_val(c1[2]),
    .nvr_busy(busy[2]), .nvr_busy_sig(busy_sig[2]));

  always #5 clk = ~clk;

  initial begin
    repeat (6_000_000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit cond, input string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s (t=%0t)", msg, $time); end
  endtask

  // RUN cycles of each copy since its last FPGA reset.
  // A recovery restarts the increment sequence at counter 1, so each one can
  // give counter 1 one step ahead of its turn.
  int run_cyc [3], n_rec [3];
  bl_state_e st_d [3];
  always @(posedge clk)
    for (int k = 0; k < 3; k++) begin
      st_d[k] <= st[k];
      if (fpga_reset[k]) begin run_cyc[k] <= 0; n_rec[k] <= 0; end
      else begin
        if (st[k] == BL_RUN) run_cyc[k] <= run_cyc[k] + 1;
        if (st[k] == BL_RUN && st_d[k] == BL_RECOVER) n_rec[k] <= n_rec[k] + 1;
      end
    end

  task automatic energy_of(input int k, input logic e, output logic [47:0] en);
    logic [31:0] cnt;
    cnt = eav[k][e];
    @(negedge clk); idx[k] = e; start[k] = 1;
    @(negedge clk); start[k] = 0;
    while (!ready[k]) @(negedge clk);
    en = energy[k];
    check(en == 48'(cnt) * (e ? 48'd264 : 48'd1), "ENERGY = count x E3C");
  endtask

  // One run of copy k; returns counter 1 and both energies.
  task automatic one_run(input int k, input logic [15:0] backup_th, input logic [15:0] p,
                         output int cnt1, output logic [47:0] e_cnt, output logic [47:0] e_nvr);
    @(negedge clk);
    fpga_reset[k] = 1; sel[k] = 0;
    thv[k][0] = 16'd2800; thv[k][1] = backup_th; prm[k] = p;
    repeat (8) @(negedge clk);
    fpga_reset[k] = 0;
    repeat (RUN_LEN) @(negedge clk);
    cnt1 = int'(c1[k]);
    check(!pr[k], "system up at the end of the trace");
    check(cnt1 <= run_cyc[k] / 24 + n_rec[k] + 1,
          $sformatf("counter 1 %0d within %0d RUN cycles, %0d recoveries", cnt1, run_cyc[k], n_rec[k]));
    check(eav[k][0] + eav[k][1] <= RUN_LEN, "EA counts within the run length");
    // Freeze the EA with a forced power failure, then read the energies.
    sel[k] = 1; thv[k][1] = 16'hFFFF;
    @(negedge clk); @(negedge clk);
    energy_of(k, 1'b0, e_cnt);
    energy_of(k, 1'b1, e_nvr);
  endtask

  int best_c1 [3], best_p [3];
  logic [47:0] best_ec [3], best_en [3];
  int dbp_first, dbp_last;

  task automatic sweep(input int k, input int first, input int last, input int step);
    int c; logic [47:0] ec, en;
    best_c1[k] = -1;
    for (int v = first; v <= last; v += step) begin
      if (k == 0) one_run(k, 16'(v), 16'd0, c, ec, en);
      else        one_run(k, 16'hFFFF, 16'(k == 1 ? v * 100 : v), c, ec, en);
      if (k == 0 && v == first) dbp_first = c;
      if (k == 0 && v == last)  dbp_last = c;
      if (v == first || (v - first) % (step * 10) == 0)
        $display("INFO: policy %0d param %0d: counter1 %0d, E(counters) %0d, E(NVR) %0d", k, v, c, ec, en);
      if (c > best_c1[k]) begin best_c1[k] = c; best_p[k] = v; best_ec[k] = ec; best_en[k] = en; end
    end
    $display("INFO: policy %0d best param %0d: counter1 %0d, E(counters) %0d, E(NVR) %0d",
             k, best_p[k], best_c1[k], best_ec[k], best_en[k]);
  endtask

  initial begin
    thv = '0; prm = '0;
    fork
      sweep(0, 3000, 5010, 10);   // DBP threshold, mV
      sweep(1, 2, 398, 2);        // CBP period, us
      sweep(2, 1, 55, 1);         // TBP task count
    join
    for (int k = 0; k < 3; k++) check(best_c1[k] > 0, "policy made progress");
    check(dbp_first > dbp_last, "DBP: a lower backup threshold leaves more time to compute");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
