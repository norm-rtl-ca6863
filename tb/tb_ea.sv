// tb_ea: self-checking test of the energy approximator.
//
// Three 8-bit counters (small so that saturation is reached quickly) are
// driven with random enable and reset patterns; a reference model counts the
// same cycles. Checks every value and full flag each cycle, and that each
// counter saturated at 255 at least once.
module tb_ea;
  localparam int N = 3, W = 8;
  logic clk = 0;
  logic [N-1:0] en = '0, rst = '1;
  logic [N-1:0][W-1:0] val;
  logic [N-1:0] full;
  int ref_cnt [N];
  int saturated [N];
  int checks = 0, failures = 0;

  ea #(.N_ENT(N), .CNT_W(W)) dut (.clk, .ea_enable_array(en), .ea_reset_array(rst),
                                  .ea_value_array(val), .ea_full_array(full));

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

  initial begin
    for (int i = 0; i < N; i++) begin ref_cnt[i] = 0; saturated[i] = 0; end
    @(negedge clk); @(negedge clk);
    rst = '0;
    for (int c = 0; c < 4000; c++) begin
      // counter i is enabled with probability (i+2)/(i+4); rare resets
      for (int i = 0; i < N; i++) begin
        en[i]  = ($urandom_range(i + 3) >= 2);
        rst[i] = ($urandom_range(999) == 0);
      end
      @(posedge clk);
      for (int i = 0; i < N; i++) begin
        if (rst[i]) ref_cnt[i] = en[i] ? 1 : 0;
        else if (en[i] && ref_cnt[i] < (1 << W) - 1) ref_cnt[i]++;
      end
      #1;
      for (int i = 0; i < N; i++) begin
        check(val[i] == W'(ref_cnt[i]), $sformatf("counter %0d = %0d want %0d", i, val[i], ref_cnt[i]));
        check(full[i] == (ref_cnt[i] == (1 << W) - 1), "full flag");
        if (full[i]) saturated[i]++;
      end
      @(negedge clk);
    end
    for (int i = 0; i < N; i++) check(saturated[i] > 0, "counter reached saturation");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
