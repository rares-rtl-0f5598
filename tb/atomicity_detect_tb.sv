// atomicity_detect_tb: self-checking test of the atomicity detector.
// Sweeps the PC over region edges and random values with and without an
// interrupt and checks D0 (app RAM) and D1 (SW-Att) against a reference.
module atomicity_detect_tb;
  import rares_pkg::*;

  addr_t pc;
  logic irq;
  atom_viol_t v;
  int checks = 0, failures = 0;

  atomicity_detect dut (.pc_i(pc), .irq_i(irq), .viol_o(v));

  task automatic apply(addr_t p, logic i);
    logic [1:0] exp;
    pc = p; irq = i;
    #1;
    exp = {i && p >= 16'hA000 && p <= 16'hDFFF, i && p >= 16'h0C00 && p <= 16'h1FFF};
    checks++;
    if (v !== exp) begin
      failures++;
      $display("FAIL pc=%h irq=%b got=%b exp=%b", p, i, v, exp);
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
    automatic addr_t edges [8] = '{16'h0BFF, 16'h0C00, 16'h1FFF, 16'h2000,
                         16'h9FFF, 16'hA000, 16'hDFFF, 16'hE000};
    foreach (edges[k]) begin
      apply(edges[k], 1'b1);
      apply(edges[k], 1'b0);
    end
    repeat (3000) apply(addr_t'($urandom), 1'($urandom));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
