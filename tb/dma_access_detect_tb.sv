// dma_access_detect_tb: self-checking test of the DMA access classifier.
// Directed cases for each rule and for allowed accesses, then random
// accesses near region edges, checked against an independent reference.
module dma_access_detect_tb;
  import rares_pkg::*;

  addr_t pc, a;
  logic en, we;
  dma_viol_t v;
  int checks = 0, failures = 0;

  dma_access_detect dut (.pc_i(pc), .dma_en_i(en), .dma_wen_i(we), .dma_addr_i(a), .viol_o(v));

  function automatic logic [3:0] ref_model(addr_t p, logic e, logic w, addr_t ad);
    logic sw, key, stk, app;
    sw  = p >= 16'hA000 && p <= 16'hDFFF;
    key = ad >= 16'h6A00 && ad <= 16'h6A3F;
    stk = ad >= 16'h0400 && ad <= 16'h0BFF;
    app = ad >= 16'h0C00 && ad <= 16'h1FFF;
    return {e && !w && key && !sw, e && !w && stk && sw, e && !w && app && sw, e && w && app && sw};
  endfunction

  task automatic apply(addr_t p, logic e, logic w, addr_t ad);
    logic [3:0] exp;
    pc = p; en = e; we = w; a = ad;
    #1;
    exp = ref_model(p, e, w, ad);
    checks++;
    if (v !== exp) begin
      failures++;
      $display("FAIL pc=%h en=%b we=%b addr=%h got=%b exp=%b", p, e, w, ad, v, exp);
    end
  endtask

  function automatic addr_t pick(addr_t e0, addr_t e1, addr_t e2, addr_t e3);
    case ($urandom_range(5))
      0: return e0;
      1: return e1;
      2: return e2;
      3: return e3;
      default: return addr_t'($urandom);
    endcase
  endfunction

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    apply(16'hE100, 1, 0, 16'h6A3F);   // D5: key read while app runs
    apply(16'hA000, 1, 0, 16'h6A00);   // allowed: key read during SW-Att
    apply(16'hA000, 1, 0, 16'h0BFF);   // D4: stack read during SW-Att
    apply(16'h0C40, 1, 0, 16'h0400);   // allowed: stack read while app runs
    apply(16'hDFFF, 1, 0, 16'h0C00);   // D3
    apply(16'hDFFF, 1, 1, 16'h1FFF);   // D2
    apply(16'hE000, 1, 1, 16'h1FFF);   // allowed: DMA write while app runs
    apply(16'hA000, 0, 0, 16'h6A00);   // no DMA cycle
    repeat (5000)
      apply(pick(16'hA000, 16'hDFFF, 16'h9FFF, 16'hE000), 1'($urandom), 1'($urandom),
            pick(16'h6A00, 16'h0BFF, 16'h0C00, 16'h2000));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
