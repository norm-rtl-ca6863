// tb_nvre: self-checking test of the NV register emulator.
//
// At the default 80 ns / 10 ns the access delay is 8 cycles. The test issues
// single-cycle and held EN requests and checks, cycle by cycle, that BUSY is
// high for exactly 8 cycles after the accepting edge, that BUSY_SIG is high
// for 7 and falls one cycle before BUSY, that EN during BUSY is ignored, that
// a held EN starts a new access on the first edge after BUSY falls, and that
// RST cancels an access.
module tb_nvre;
  logic clk = 0, rst = 1, en = 0;
  logic busy, busy_sig;
  int checks = 0, failures = 0;

  nvre dut (.clk, .rst, .en, .busy, .busy_sig);

  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit cond, input string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s (t=%0t)", msg, $time); end
  endtask

  // Issue EN for one cycle, then record BUSY/BUSY_SIG after each edge.
  task automatic one_access(input int hold_en_cycles);
    int nb = 0, ns = 0, last_sig = -1, last_busy = -1;
    @(negedge clk); en = 1;
    @(posedge clk); #1;
    check(busy && busy_sig, "BUSY and BUSY_SIG rise right after the accepting edge");
    for (int c = 1; c <= 12; c++) begin
      if (busy) begin nb++; last_busy = c; end
      if (busy_sig) begin ns++; last_sig = c; end
      if (c >= hold_en_cycles) begin @(negedge clk); en = 0; end
      @(posedge clk); #1;
    end
    check(nb == 8, $sformatf("BUSY high for 8 cycles (got %0d)", nb));
    check(ns == 7, $sformatf("BUSY_SIG high for 7 cycles (got %0d)", ns));
    check(last_sig == last_busy - 1, "BUSY_SIG falls one cycle before BUSY");
  endtask

  initial begin
    repeat (3) @(posedge clk);
    @(negedge clk) rst = 0;
    @(posedge clk); #1;
    check(!busy && !busy_sig, "idle after reset");

    one_access(1);
    check(!busy, "idle after a single access");
    // EN held through the access (allowed: the emulator ignores it while busy)
    one_access(6);
    check(!busy, "EN held while busy does not extend BUSY");

    // A held EN restarts an access on the first edge after BUSY falls.
    begin
      automatic int gap = 0;
      @(negedge clk); en = 1;
      @(posedge clk); #1;
      while (busy) begin @(posedge clk); #1; gap++; end
      // here BUSY is low; the next edge must accept again
      @(posedge clk); #1;
      check(busy, "held EN re-accepted right after BUSY falls");
      check(gap == 8, $sformatf("BUSY high 8 cycles for a held EN (gap %0d)", gap));
      @(negedge clk); en = 0;
    end

    // RST cancels an access.
    repeat (10) @(posedge clk);
    @(negedge clk); en = 1;
    @(negedge clk); en = 0;
    @(negedge clk); rst = 1;
    @(posedge clk); #1;
    check(!busy && !busy_sig, "RST clears BUSY");
    @(negedge clk); rst = 0;

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
