// tb_volatile_counters: self-checking test of the volatile counters.
//
// The block is connected to a real NVR (default 80 ns access) and driven by
// hand with the backup-logic states. Checks: RUN increments counter i by
// i+1 once per 24 cycles (counter 1 at 100 MHz / 24 = 4.17 MHz); HAZARD and
// OFF freeze the counters; BACKUP writes the three counters to NVR addresses
// 0..2 and raises OP_DONE; a power failure (RST) clears them; RECOVER brings
// back the saved values; counting resumes from there.
module tb_volatile_counters;
  import norm_pkg::*;
  logic clk = 0, nv_reset = 1, rst = 1;
  bl_state_e state = BL_OFF;
  logic nv_en, nv_we, nv_busy, nv_busy_sig, op_done;
  logic [1:0] nv_addr;
  logic [15:0] nv_din, nv_dout, c1;
  int checks = 0, failures = 0;

  volatile_counters dut (
    .clk, .rst, .state, .nvreg_en(nv_en), .nvreg_we(nv_we), .nvreg_addr(nv_addr),
    .nvreg_dout(nv_din), .nvreg_din(nv_dout), .nvreg_busy(nv_busy), .op_done, .counter1_val(c1));

  nvr u_nvr (.clk, .reset(nv_reset), .power_reset(rst && !nv_reset), .en(nv_en), .we(nv_we),
             .addr(nv_addr), .din(nv_din), .dout(nv_dout), .busy(nv_busy), .busy_sig(nv_busy_sig));

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

  function automatic logic [15:0] cnt(int i);
    return dut.ff[i];
  endfunction

  task automatic do_transfer(input bl_state_e cmd, output int cycles);
    @(negedge clk); state = cmd; cycles = 0;
    while (!op_done && cycles < 500) begin @(negedge clk); cycles++; end
    check(op_done, $sformatf("OP_DONE after %s", cmd.name()));
    @(negedge clk); state = BL_OFF;
    @(negedge clk);
    check(!op_done, "OP_DONE drops with the command");
  endtask

  initial begin
    logic [15:0] saved [3];
    int cyc, changes, first_change, last_change;
    logic [15:0] prev;
    repeat (6) @(negedge clk);
    nv_reset = 0; rst = 0;

    do_transfer(BL_RECOVER, cyc);
    for (int i = 0; i < 3; i++) check(cnt(i) == 0, "recovered zeros from a wiped NVR");

    // RUN for 240 cycles: each counter steps 10 times.
    @(negedge clk); state = BL_RUN;
    prev = c1; changes = 0; first_change = -1; last_change = -1;
    for (int c = 0; c < 240; c++) begin
      @(negedge clk);
      if (c1 != prev) begin
        changes++; if (first_change < 0) first_change = c; last_change = c; prev = c1;
      end
    end
    state = BL_HAZARD;
    check(changes == 10, $sformatf("counter 1 changed %0d times in 240 cycles", changes));
    check(last_change - first_change == 9 * 24, "counter 1 period 24 cycles");
    for (int i = 0; i < 3; i++)
      check(cnt(i) == 16'(10 * (i + 1)), $sformatf("counter %0d = %0d want %0d", i + 1, cnt(i), 10 * (i + 1)));
    repeat (50) @(negedge clk);
    check(cnt(0) == 10 && cnt(2) == 30, "HAZARD freezes the counters");

    // Backup.
    for (int i = 0; i < 3; i++) saved[i] = cnt(i);
    do_transfer(BL_BACKUP, cyc);
    $display("INFO: backup of 3 words took %0d cycles", cyc);
    check(cyc >= 3 * 8, "backup waits out the NVR delay for each word");
    for (int i = 0; i < 3; i++)
      check(u_nvr.u_ram.mem[i] == saved[i], $sformatf("NVR word %0d holds the counter", i));

    // Keep counting, then lose power.
    @(negedge clk); state = BL_RUN;
    repeat (100) @(negedge clk);
    check(cnt(0) != saved[0], "counting continued after backup");
    rst = 1; state = BL_OFF;
    @(negedge clk); @(negedge clk);
    for (int i = 0; i < 3; i++) check(cnt(i) == 0, "power failure clears the volatile counters");
    repeat (20) @(negedge clk);
    rst = 0;

    do_transfer(BL_RECOVER, cyc);
    for (int i = 0; i < 3; i++)
      check(cnt(i) == saved[i], $sformatf("counter %0d restored to %0d (got %0d)", i + 1, saved[i], cnt(i)));
    @(negedge clk); state = BL_RUN;
    repeat (72) @(negedge clk);
    state = BL_HAZARD;
    @(negedge clk);
    check(cnt(0) == saved[0] + 3, "counting resumes from the restored value");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
