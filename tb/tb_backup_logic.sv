// tb_backup_logic: self-checking test of the backup-policy FSM.
//
// Three instances, one per policy, share the clock and RST. For each, a small
// responder stands in for the volatile counters: it raises OP_DONE 5 cycles
// after the FSM enters BACKUP or RECOVER. Checks:
//  * after RST every policy goes OFF -> RECOVER -> RUN;
//  * DBP backs up as soon as the backup comparator is set, then waits in
//    HAZARD until the voltage recovers;
//  * CBP backs up after exactly PARAM cycles of RUN, again and again;
//  * TBP backs up when counter 1 reaches a non-zero multiple of PARAM, once
//    per value, and not right after a recovery to such a value;
//  * RST in any state returns to OFF.
module tb_backup_logic;
  import norm_pkg::*;
  logic clk = 0, rst = 1;
  logic [1:0] comp = '0;
  logic [15:0] c1 = '0;
  bl_state_e st [3];
  logic done [3];
  int since [3];
  int checks = 0, failures = 0;
  logic [PARAM_W-1:0] prm [3];

  backup_logic #(.POLICY(POLICY_DBP)) u_dbp (.clk, .rst, .param(prm[0]), .threshold_comp(comp),
    .op_done(done[0]), .counter1_val(c1), .state(st[0]));
  backup_logic #(.POLICY(POLICY_CBP)) u_cbp (.clk, .rst, .param(prm[1]), .threshold_comp(comp),
    .op_done(done[1]), .counter1_val(c1), .state(st[1]));
  backup_logic #(.POLICY(POLICY_TBP)) u_tbp (.clk, .rst, .param(prm[2]), .threshold_comp(comp),
    .op_done(done[2]), .counter1_val(c1), .state(st[2]));

  always #5 clk = ~clk;

  // Responders.
  for (genvar k = 0; k < 3; k++) begin : g_resp
    bl_state_e last;
    always_ff @(posedge clk) begin
      last <= st[k];
      if (st[k] != last) since[k] <= 0; else since[k] <= since[k] + 1;
    end
    assign done[k] = (st[k] == BL_BACKUP || st[k] == BL_RECOVER) && since[k] >= 5;
  end

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

  task automatic wait_state(input int k, input bl_state_e s, input int limit, output int n);
    n = 0;
    while (st[k] != s && n < limit) begin @(negedge clk); n++; end
    check(st[k] == s, $sformatf("policy %0d reaches %s", k, s.name()));
  endtask

  initial begin
    int n;
    prm[0] = 0; prm[1] = 16'd50; prm[2] = 16'd5;
    repeat (3) @(negedge clk);
    for (int k = 0; k < 3; k++) check(st[k] == BL_OFF, "OFF while RST");
    rst = 0;
    @(negedge clk);
    for (int k = 0; k < 3; k++) check(st[k] == BL_RECOVER, "RECOVER first after power-up");
    for (int k = 0; k < 3; k++) wait_state(k, BL_RUN, 20, n);

    // ---- DBP
    repeat (30) @(negedge clk);
    check(st[0] == BL_RUN, "DBP stays in RUN above the threshold");
    comp[1] = 1;
    @(negedge clk);
    check(st[0] == BL_BACKUP, "DBP backs up when the voltage drops below the threshold");
    wait_state(0, BL_HAZARD, 20, n);
    repeat (40) @(negedge clk);
    check(st[0] == BL_HAZARD, "DBP waits while below the threshold");
    comp[1] = 0;
    @(negedge clk);
    check(st[0] == BL_RUN, "DBP resumes when the voltage recovers");

    // ---- CBP: count RUN cycles between backups (started at RUN entry)
    while (st[1] != BL_BACKUP) @(negedge clk);   // skip the partial first period
    for (int r = 0; r < 3; r++) begin
      int run_cycles;
      run_cycles = 0;
      while (st[1] != BL_RUN) @(negedge clk);
      while (st[1] == BL_RUN) begin run_cycles++; @(negedge clk); end
      check(st[1] == BL_BACKUP, "CBP leaves RUN for BACKUP");
      check(run_cycles == 50, $sformatf("CBP period %0d cycles, want 50", run_cycles));
    end

    // ---- TBP
    for (int v = 1; v <= 12; v++) begin
      @(negedge clk); c1 = 16'(v);
      @(negedge clk);
      if (v % 5 == 0) begin
        check(st[2] == BL_BACKUP, $sformatf("TBP backs up at counter %0d", v));
        wait_state(2, BL_RUN, 20, n);
        repeat (3) @(negedge clk);
        check(st[2] == BL_RUN, "TBP backs up once per value");
      end else begin
        check(st[2] == BL_RUN, $sformatf("TBP no backup at counter %0d", v));
      end
    end

    // ---- power failure in the middle, recovery to a multiple of PARAM
    @(negedge clk); c1 = 16'd15;
    @(negedge clk);
    check(st[2] == BL_BACKUP, "TBP backup at 15");
    rst = 1;
    @(negedge clk);
    for (int k = 0; k < 3; k++) check(st[k] == BL_OFF, "RST returns every FSM to OFF");
    rst = 0; c1 = 16'd10;   // value restored by the counters
    for (int k = 0; k < 3; k++) wait_state(k, BL_RUN, 20, n);
    repeat (5) @(negedge clk);
    check(st[2] == BL_RUN, "no TBP backup right after recovering a saved value");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
