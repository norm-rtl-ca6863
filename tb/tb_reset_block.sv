// tb_reset_block: self-checking test of the NVR wipe sequencer.
//
// With DEPTH = 4 it checks that EN and WE follow RST, that DIN is zero, and
// that while RST is high the address walks 0,1,2,3,0,... one step per cycle,
// restarting from 0 after RST has been low.
module tb_reset_block;
  localparam int DEPTH = 4;
  logic clk = 0, rst = 0;
  logic en, we;
  logic [1:0] addr;
  logic [15:0] din;
  int checks = 0, failures = 0;

  reset_block #(.DEPTH(DEPTH), .DATA_W(16)) dut (.clk, .rst, .en, .we, .addr, .din);

  always #5 clk = ~clk;

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit cond, input string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s (t=%0t)", msg, $time); end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    for (int round = 0; round < 3; round++) begin
      @(negedge clk);
      check(!en && !we, "EN/WE low while RST is low");
      rst = 1;
      for (int c = 0; c < 2 * DEPTH + round; c++) begin
        #1;
        check(en && we && din == '0, "write of zeros while RST is high");
        check(addr == 2'(c % DEPTH), $sformatf("address %0d expected %0d", addr, c % DEPTH));
        @(negedge clk);
      end
      rst = 0;
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
