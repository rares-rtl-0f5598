// cpu_access_detect_tb: self-checking test of the CPU access classifier.
// Drives directed cases (one per rule, plus allowed accesses) and random
// accesses biased toward the region edges, and compares the four flags
// with a reference written from the access rules over the default map.
module cpu_access_detect_tb;
  import rares_pkg::*;

  addr_t pc, daddr;
  logic ren, wen;
  cpu_viol_t v;
  int checks = 0, failures = 0;

  cpu_access_detect dut (.pc_i(pc), .ren_i(ren), .wen_i(wen), .daddr_i(daddr), .viol_o(v));

  function automatic logic [3:0] ref_model(addr_t p, logic r, logic w, addr_t a);
    logic sw, key, stk, app;
    sw  = p >= 16'hA000 && p <= 16'hDFFF;
    key = a >= 16'h6A00 && a <= 16'h6A3F;
    stk = a >= 16'h0400 && a <= 16'h0BFF;
    app = a >= 16'h0C00 && a <= 16'h1FFF;
    return {r && key && !sw, r && stk && !sw, r && app && sw, w && app && sw};
  endfunction

  task automatic apply(addr_t p, logic r, logic w, addr_t a);
    logic [3:0] exp;
    pc = p; ren = r; wen = w; daddr = a;
    #1;
    exp = ref_model(p, r, w, a);
    checks++;
    if (v !== exp) begin
      failures++;
      $display("FAIL pc=%h ren=%b wen=%b daddr=%h got=%b exp=%b", p, r, w, a, v, exp);
    end
  endtask

  function automatic addr_t pick_addr();
    addr_t edges [10] = '{16'h6A00, 16'h6A3F, 16'h6A40, 16'h69FF, 16'h0400,
                          16'h0BFF, 16'h0C00, 16'h1FFF, 16'h2000, 16'h03FF};
    if ($urandom_range(1) == 0) return edges[$urandom_range(9)];
    return addr_t'($urandom);
  endfunction

  function automatic addr_t pick_pc();
    addr_t edges [6] = '{16'hA000, 16'hDFFF, 16'h9FFF, 16'hE000, 16'h0C10, 16'hE100};
    if ($urandom_range(1) == 0) return edges[$urandom_range(5)];
    return addr_t'($urandom);
  endfunction

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    // directed: app code (flash) reads the key -> D9
    apply(16'hE100, 1, 0, 16'h6A10);
    if (!v.rom_rd) begin failures++; $display("FAIL D9 directed"); end
    // SW-Att reads the key -> allowed
    apply(16'hA100, 1, 0, 16'h6A10);
    // app code reads reserved stack -> D8
    apply(16'h0C40, 1, 0, 16'h0500);
    // SW-Att uses its stack -> allowed
    apply(16'hA100, 1, 1, 16'h0500);
    // SW-Att reads / writes app RAM -> D7 / D6
    apply(16'hA100, 1, 0, 16'h1000);
    apply(16'hA100, 0, 1, 16'h1000);
    // app code uses app RAM -> allowed
    apply(16'h0C40, 1, 1, 16'h1000);
    // no access -> nothing
    apply(16'hE100, 0, 0, 16'h6A10);
    repeat (5000) apply(pick_pc(), 1'($urandom), 1'($urandom), pick_addr());
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
