// cen_mux_tb: exhaustive test of the chip-enable override over every
// single-bit and random Ctrl_register value and both backbone cen levels.
module cen_mux_tb;
  import rares_pkg::*;

  word_t ctrl;
  logic actl, cen, sel;
  int checks = 0, failures = 0;

  cen_mux dut (.ctrl_i(ctrl), .actl_cen_i(actl), .rares_cen_o(cen), .ctrl_cen_sel_o(sel));

  task automatic apply(word_t c, logic a);
    logic es, ec;
    ctrl = c; actl = a;
    #1;
    es = c[7] | c[6];
    ec = es ? 1'b1 : a;
    checks++;
    if (sel !== es || cen !== ec) begin
      failures++;
      $display("FAIL ctrl=%h actl=%b got sel=%b cen=%b exp sel=%b cen=%b", c, a, sel, cen, es, ec);
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
    apply(16'h0000, 1'b0);
    if (cen !== 1'b0) begin failures++; $display("FAIL pass-through"); end
    apply(16'h0040, 1'b0);
    if (cen !== 1'b1) begin failures++; $display("FAIL D6 gate"); end
    for (int b = 0; b < 16; b++) begin
      apply(word_t'(1 << b), 1'b0);
      apply(word_t'(1 << b), 1'b1);
    end
    repeat (1000) apply(word_t'($urandom), 1'($urandom));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
