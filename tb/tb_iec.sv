// tb_iec: self-checking test of the instant energy calculator.
//
// Four entities with E3C values 3, 264, 1000 and 65535 and random 32-bit
// counter values. Each calculation checks ENERGY = count x E3C computed here,
// that EVALUATION_READY drops after START_CALC and rises on the third edge
// counting the one that sampled START_CALC, and that the result holds until
// the next request. Index 3 with the largest values checks the full width.
// Periodic mode: a model of the EA counters (re-initialised by EA_CLEAR)
// counts random activity; with SAMPLE_PERIOD = 60 the test checks that a
// sweep starts every 60 cycles, that every entity is sampled in order, and
// that the interval energies plus the counts left over add up to exactly
// E3C x the active cycles of each entity, i.e. no cycle lost or doubled.
module tb_iec;
  localparam int N = 4;
  localparam logic [15:0] E3C_T [N] = '{16'd3, 16'd264, 16'd1000, 16'd65535};
  logic clk = 0, reset = 1, start = 0;
  logic [N-1:0][31:0] vals;
  logic [1:0] index = '0;
  logic [47:0] energy;
  logic ready;
  logic [31:0] sample_period = '0;
  logic [N-1:0] ea_clear;
  logic [1:0] energy_index;
  int checks = 0, failures = 0;

  iec #(.N_ENT(N), .CNT_W(32), .E3C_W(16), .E3C(E3C_T)) dut (
    .clk, .reset, .ea_values_array(vals), .index, .start_calc(start),
    .sample_period, .ea_clear, .energy, .energy_index, .evaluation_ready(ready));

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit cond, input string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s (t=%0t)", msg, $time); end
  endtask

  // EA model for the periodic test.
  bit model_on = 0;
  logic [N-1:0] act;
  longint acc [N], active [N];
  int n_sweeps = 0, n_results = 0, last_sweep = -1, cyc = 0;
  logic ready_d = 0;
  logic [1:0] exp_idx = '0;
  always @(posedge clk) if (model_on) begin
    cyc++;
    act = N'($urandom);
    for (int i = 0; i < N; i++) begin
      if (act[i]) active[i]++;
      vals[i] <= ea_clear[i] ? 32'(act[i]) : vals[i] + 32'(act[i]);
    end
    if (ea_clear[0]) begin
      if (last_sweep >= 0) begin
        checks++;
        if (cyc - last_sweep != 60) begin failures++; $display("FAIL: sweep interval %0d", cyc - last_sweep); end
      end
      last_sweep = cyc; n_sweeps++;
    end
    if (ready && !ready_d) begin
      checks++;
      if (energy_index != exp_idx) begin failures++; $display("FAIL: result for entity %0d, want %0d", energy_index, exp_idx); end
      acc[energy_index] += longint'(energy);
      exp_idx++;
      n_results++;
    end
  end
  always @(posedge clk) ready_d <= ready;

  initial begin
    for (int i = 0; i < N; i++) begin vals[i] = $urandom; acc[i] = 0; active[i] = 0; end
    repeat (3) @(negedge clk);
    reset = 0;
    @(negedge clk);
    check(!ready && energy == 0, "idle after reset");
    for (int k = 0; k < 200; k++) begin
      logic [1:0] idx;
      logic [47:0] want;
      int lat;
      idx = (k == 0) ? 2'd3 : 2'($urandom_range(N - 1));
      if (k == 0) vals[3] = 32'hFFFF_FFFF;
      index = idx; start = 1;
      want = 48'(vals[idx]) * 48'(E3C_T[idx]);
      @(negedge clk);           // edge 0 sampled START_CALC
      start = 0; index = 2'($urandom);
      check(!ready, "READY low while calculating");
      lat = 1;
      while (!ready && lat < 10) begin @(negedge clk); lat++; end
      check(lat == 3, $sformatf("latency %0d edges, want 3", lat));
      check(energy == want, $sformatf("energy %0d want %0d (idx %0d)", energy, want, idx));
      vals[idx] = $urandom;     // result must not follow the input afterwards
      repeat ($urandom_range(3)) @(negedge clk);
      check(ready && energy == want, "result held until the next request");
    end

    // ---- periodic mode
    for (int i = 0; i < N; i++) vals[i] = 0;
    model_on = 1;
    sample_period = 32'd60;
    repeat (60 * 40) @(negedge clk);
    sample_period = '0;
    repeat (10) @(negedge clk);
    model_on = 0;
    for (int i = 0; i < N; i++)
      check(acc[i] + 64'(vals[i]) * 64'(E3C_T[i]) == 64'(active[i]) * 64'(E3C_T[i]),
            $sformatf("entity %0d: interval energies %0d + rest %0d x %0d = active %0d x E3C",
                      i, acc[i], vals[i], E3C_T[i], active[i]));
    check(n_sweeps >= 39, $sformatf("%0d periodic sweeps", n_sweeps));
    check(n_results == 4 * n_sweeps, "one result per entity per sweep");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
