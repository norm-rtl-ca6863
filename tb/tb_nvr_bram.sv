// tb_nvr_bram: self-checking test of the single-port RAM behind the NVR.
//
// Writes random words to all 16 addresses, reads them back in random order
// against a reference array, and checks the one-cycle read latency, the
// write-first output and that DOUT holds while EN is low.
module tb_nvr_bram;
  localparam int DEPTH = 16;
  logic clk = 0, en = 0, we = 0;
  logic [3:0]  addr = '0;
  logic [15:0] din = '0, dout;
  logic [15:0] ref_mem [DEPTH];
  int checks = 0, failures = 0;

  nvr_bram #(.DEPTH(DEPTH), .DATA_W(16)) dut (.clk, .en, .we, .addr, .din, .dout);

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

  initial begin
    for (int a = 0; a < DEPTH; a++) begin
      @(negedge clk);
      en = 1; we = 1; addr = 4'(a); din = 16'($urandom); ref_mem[a] = din;
      @(posedge clk); #1;
      check(dout == ref_mem[a], "write-first output");
    end
    for (int k = 0; k < 64; k++) begin
      automatic int a = $urandom_range(DEPTH - 1);
      @(negedge clk);
      en = 1; we = 0; addr = 4'(a);
      @(posedge clk); #1;
      check(dout == ref_mem[a], $sformatf("read addr %0d got %h want %h", a, dout, ref_mem[a]));
      @(negedge clk);
      en = 0; addr = 4'(a + 1); we = 1; din = ~ref_mem[a];
      @(posedge clk); #1;
      check(dout == ref_mem[a], "DOUT holds and no write with EN low");
    end
    @(negedge clk); en = 0; we = 0;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
