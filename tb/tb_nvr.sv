// tb_nvr: self-checking test of the non-volatile register.
//
// Default parameters (4 words of 16 bits, 80 ns access at 10 ns clock).
// Checks: the FPGA reset wipes every word; a write or read keeps BUSY high
// for 8 cycles and read data is right once BUSY falls; DOUT is zero during a
// power failure and during an FPGA reset; the contents survive a power
// failure; a write accepted just before a power failure still completes;
// a write attempted during a power failure has no effect.
module tb_nvr;
  logic clk = 0, reset = 1, power_reset = 0, en = 0, we = 0;
  logic [1:0]  addr = '0;
  logic [15:0] din = '0, dout;
  logic busy, busy_sig;
  logic [15:0] ref_mem [4];
  int checks = 0, failures = 0;

  nvr dut (.clk, .reset, .power_reset, .en, .we, .addr, .din, .dout, .busy, .busy_sig);

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

  // One access; returns the number of cycles BUSY stayed high.
  task automatic access(input bit w, input logic [1:0] a, input logic [15:0] d, output int nbusy);
    @(negedge clk);
    en = 1; we = w; addr = a; din = d;
    @(negedge clk);
    en = 0;
    nbusy = 0;
    while (busy) begin nbusy++; @(negedge clk); end
  endtask

  task automatic write_word(input logic [1:0] a, input logic [15:0] d);
    int nb;
    access(1'b1, a, d, nb);
    ref_mem[a] = d;
    check(nb == 8, $sformatf("write BUSY for 8 cycles (got %0d)", nb));
  endtask

  task automatic read_check(input logic [1:0] a);
    int nb;
    access(1'b0, a, 16'h0, nb);
    check(nb == 8, $sformatf("read BUSY for 8 cycles (got %0d)", nb));
    check(dout == ref_mem[a], $sformatf("read addr %0d got %h want %h", a, dout, ref_mem[a]));
  endtask

  task automatic fpga_reset();
    @(negedge clk); reset = 1;
    repeat (5) @(negedge clk);
    check(dout == '0, "DOUT zero during FPGA reset");
    reset = 0;
    for (int a = 0; a < 4; a++) ref_mem[a] = '0;
  endtask

  initial begin
    repeat (6) @(negedge clk);   // >= DEPTH cycles of reset
    reset = 0;
    for (int a = 0; a < 4; a++) ref_mem[a] = '0;
    for (int a = 0; a < 4; a++) read_check(2'(a));          // wiped

    for (int a = 0; a < 4; a++) write_word(2'(a), 16'($urandom));
    for (int a = 3; a >= 0; a--) read_check(2'(a));

    // Power failure: DOUT is zero, contents survive.
    @(negedge clk); power_reset = 1;
    repeat (3) @(negedge clk);
    check(dout == '0, "DOUT zero during power failure");
    // Attempted write during the failure must not land.
    en = 1; we = 1; addr = 2'd1; din = ~ref_mem[1];
    @(negedge clk); en = 0; we = 0;
    repeat (12) @(negedge clk);
    power_reset = 0;
    for (int a = 0; a < 4; a++) read_check(2'(a));

    // A write accepted right before a power failure completes.
    @(negedge clk);
    en = 1; we = 1; addr = 2'd2; din = 16'hA5C3; ref_mem[2] = 16'hA5C3;
    @(negedge clk);
    en = 0;
    @(negedge clk); power_reset = 1;
    check(busy, "BUSY continues through the power failure");
    repeat (15) @(negedge clk);
    power_reset = 0; we = 0;
    for (int a = 0; a < 4; a++) read_check(2'(a));

    // FPGA reset wipes everything.
    fpga_reset();
    for (int a = 0; a < 4; a++) read_check(2'(a));

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
