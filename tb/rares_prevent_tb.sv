// rares_prevent_tb: self-checking test of the prevention logic: CPUOFF
// override by D9, flash/app-RAM chip-enable gating by D6/D7, reset request
// by D10 and the recovery request.
module rares_prevent_tb;
  import rares_pkg::*;

  word_t ctrl;
  logic cpuoff_i, pcen_i, dcen_i;
  logic cpuoff_o, pcen_o, dcen_o, rst_o, rec_o;
  int checks = 0, failures = 0;

  rares_prevent dut (.ctrl_i(ctrl), .cpuoff_i(cpuoff_i), .pmem_cen_i(pcen_i), .dmem_cen_i(dcen_i),
                     .cpuoff_o(cpuoff_o), .pmem_cen_o(pcen_o), .dmem_cen_o(dcen_o),
                     .sys_rst_o(rst_o), .recovery_req_o(rec_o));

  task automatic apply(word_t c, logic off, logic pc, logic dc);
    logic ram;
    logic [4:0] exp, got;
    ctrl = c; cpuoff_i = off; pcen_i = pc; dcen_i = dc;
    #1;
    ram = c[6] | c[7];
    exp = {off | c[9], ram | pc, ram | dc, c[10], ram};
    got = {cpuoff_o, pcen_o, dcen_o, rst_o, rec_o};
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL ctrl=%h off=%b pc=%b dc=%b got=%b exp=%b", c, off, pc, dc, got, exp);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    apply(16'h0000, 0, 0, 0);
    apply(16'h0200, 0, 0, 0);   // D9 -> CPU off
    apply(16'h0080, 0, 0, 0);   // D7 -> memories disabled, recovery
    apply(16'h0040, 0, 0, 1);   // D6
    apply(16'h0400, 0, 0, 0);   // D10 -> reset
    apply(16'h003F, 0, 0, 0);   // DMA/atomicity flags touch none of these
    for (int b = 0; b < 16; b++)
      for (int k = 0; k < 8; k++) apply(word_t'(1 << b), k[0], k[1], k[2]);
    repeat (2000) apply(word_t'($urandom), 1'($urandom), 1'($urandom), 1'($urandom));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
