// tb_state_converter: self-checking test of the state converter.
//
// Applies every backup-logic state with and without RST and checks the
// enable and reset vectors against the mapping: RUN counts the counters
// entity, BACKUP and RECOVER count the NVR entity, OFF and HAZARD count
// nothing, and RST resets all entities and enables none.
module tb_state_converter;
  import norm_pkg::*;
  logic rst;
  bl_state_e state;
  logic [N_ENTITIES-1:0] en, rs;
  int checks = 0, failures = 0;

  state_converter dut (.rst, .state, .ea_enable_array(en), .ea_reset_array(rs));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit cond, input string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s (t=%0t)", msg, $time); end
  endtask

  initial begin
    automatic bl_state_e all [5] = '{BL_OFF, BL_RECOVER, BL_RUN, BL_BACKUP, BL_HAZARD};
    for (int r = 0; r < 2; r++)
      for (int s = 0; s < 5; s++) begin
        logic [1:0] want_en;
        rst = r[0]; state = all[s];
        #1;
        want_en = 2'b00;
        if (!rst && state == BL_RUN) want_en = 2'b01;
        if (!rst && (state == BL_BACKUP || state == BL_RECOVER)) want_en = 2'b10;
        check(en == want_en, $sformatf("enable %b want %b in %s rst=%0d", en, want_en, state.name(), rst));
        check(rs == (rst ? 2'b11 : 2'b00), "reset vector follows RST");
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
