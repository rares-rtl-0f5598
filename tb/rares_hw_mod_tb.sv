// rares_hw_mod_tb: self-checking test of the RARES hardware module. It
// replays the attack scenarios of the design one at a time (key read from
// app code, stack read, SW-Att touching app RAM, DMA variants, interrupts
// during app and SW-Att code), checks the bit each one sets one mclk later,
// then runs random traffic against a cycle-accurate reference of all ten
// rules and the sticky register.
module rares_hw_mod_tb;
  import rares_pkg::*;

  logic clk = 0, rst_n;
  addr_t pc, daddr, dma_addr, rd_addr;
  logic irq, ren, wen, dma_en, dma_wen, rd_en;
  word_t rd_data, ctrl;
  int checks = 0, failures = 0;

  logic [9:0] ref_flags;
  logic       ref_rst;

  rares_hw_mod dut (.clk, .rst_n, .pc_i(pc), .irq_i(irq), .ren_i(ren), .wen_i(wen),
                    .daddr_i(daddr), .dma_en_i(dma_en), .dma_wen_i(dma_wen),
                    .dma_addr_i(dma_addr), .rd_en_i(rd_en), .rd_addr_i(rd_addr),
                    .rd_data_o(rd_data), .ctrl_o(ctrl));

  always #5 clk = ~clk;

  function automatic logic in_r(addr_t a, addr_t lo, addr_t hi);
    return a >= lo && a <= hi;
  endfunction

  // reference: the ten rules, D0 first
  function automatic logic [9:0] rules();
    logic sw, app_pc;
    logic [9:0] f;
    sw     = in_r(pc, 16'hA000, 16'hDFFF);
    app_pc = in_r(pc, 16'h0C00, 16'h1FFF);
    f[0] = irq & app_pc;
    f[1] = irq & sw;
    f[2] = dma_en &  dma_wen & in_r(dma_addr, 16'h0C00, 16'h1FFF) & sw;
    f[3] = dma_en & ~dma_wen & in_r(dma_addr, 16'h0C00, 16'h1FFF) & sw;
    f[4] = dma_en & ~dma_wen & in_r(dma_addr, 16'h0400, 16'h0BFF) & sw;
    f[5] = dma_en & ~dma_wen & in_r(dma_addr, 16'h6A00, 16'h6A3F) & ~sw;
    f[6] = wen & in_r(daddr, 16'h0C00, 16'h1FFF) & sw;
    f[7] = ren & in_r(daddr, 16'h0C00, 16'h1FFF) & sw;
    f[8] = ren & in_r(daddr, 16'h0400, 16'h0BFF) & ~sw;
    f[9] = ren & in_r(daddr, 16'h6A00, 16'h6A3F) & ~sw;
    return f;
  endfunction

  task automatic idle();
    irq = 0; ren = 0; wen = 0; dma_en = 0; dma_wen = 0;
    daddr = '0; dma_addr = '0;
  endtask

  task automatic check(string what, logic [15:0] got, logic [15:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s got=%h exp=%h", what, got, exp);
    end
  endtask

  task automatic do_reset();
    rst_n = 0; idle();
    @(posedge clk); #1;
    rst_n = 1;
    ref_flags = '0; ref_rst = 0;
  endtask


  initial begin
    #500000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rd_en = 0; rd_addr = '0; pc = 16'hE000;
    do_reset();
    // D9: app code in RAM reads the key (the key-read attack)
    run_one(16'h0C20, 1, 0, 16'h6A04, 0, 0, 16'h0, 0, 9, "CPU_ROM_Rd");
    run_one(16'h0C20, 1, 0, 16'h0500, 0, 0, 16'h0, 0, 8, "CPU_Stack_Rd");
    run_one(16'hA010, 1, 0, 16'h0C80, 0, 0, 16'h0, 0, 7, "CPU_RAM_Rd");
    run_one(16'hA010, 0, 1, 16'h0C80, 0, 0, 16'h0, 0, 6, "CPU_RAM_Wr");
    run_one(16'h0C20, 0, 0, 16'h0000, 1, 0, 16'h6A00, 0, 5, "DMA_ROM_Rd");
    run_one(16'hA010, 0, 0, 16'h0000, 1, 0, 16'h0600, 0, 4, "DMA_Stack_Rd");
    run_one(16'hA010, 0, 0, 16'h0000, 1, 0, 16'h1800, 0, 3, "DMA_RAM_Rd");
    run_one(16'hA010, 0, 0, 16'h0000, 1, 1, 16'h1800, 0, 2, "DMA_RAM_Wr");
    run_one(16'hA010, 0, 0, 16'h0000, 0, 0, 16'h0000, 1, 1, "Atomicity_Stack");
    run_one(16'h0C20, 0, 0, 16'h0000, 0, 0, 16'h0000, 1, 0, "Atomicity_RAM");
    // D10 follows D0 one cycle later
    @(posedge clk); #1;
    check("D10 after atomicity", ctrl, 16'h0401);
    // allowed accesses set nothing
    do_reset();
    pc = 16'hA010; ren = 1; daddr = 16'h6A00; dma_en = 1; dma_addr = 16'h6A10;
    @(posedge clk); #1;
    pc = 16'h0C20; ren = 1; daddr = 16'h0C40; wen = 1; dma_en = 1; dma_addr = 16'h0500;
    @(posedge clk); #1;
    idle();
    check("allowed accesses", ctrl, 16'h0);
    // random traffic against the reference
    do_reset();
    for (int c = 0; c < 4000; c++) begin
      logic [9:0] f;
      pc       = ($urandom_range(1) == 1) ? 16'hA000 + 16'($urandom_range(16'h3FFF)) : 16'h0C00 + 16'($urandom_range(16'h13FF));
      irq      = ($urandom_range(40) == 0);
      ren      = ($urandom_range(15) == 0);
      wen      = ($urandom_range(15) == 0);
      daddr    = 16'h0300 + 16'($urandom_range(16'h1E00));
      if ($urandom_range(7) == 0) daddr = 16'h6A00 + 16'($urandom_range(16'h7F));
      dma_en   = ($urandom_range(15) == 0);
      dma_wen  = 1'($urandom);
      dma_addr = 16'h0300 + 16'($urandom_range(16'h1E00));
      if ($urandom_range(7) == 0) dma_addr = 16'h6A00 + 16'($urandom_range(16'h7F));
      rst_n    = ($urandom_range(30) != 0);
      #1;
      f = rules();
      @(posedge clk);
      if (!rst_n) begin ref_flags = '0; ref_rst = 0; end
      else begin
        ref_rst = ref_rst | ref_flags[0] | ref_flags[1];
        ref_flags = ref_flags | f;
      end
      #1;
      check($sformatf("random cycle %0d", c), ctrl, {5'b0, ref_rst, ref_flags});
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic scenario_body(int b, string name);
    #1 check({name, " quiet before edge"}, ctrl, 16'h0);
    @(posedge clk); #1;
    idle();
    check(name, ctrl, 16'(1 << b));
    rd_en = 1; rd_addr = 16'h014A; #1;
    check({name, " read back"}, rd_data, 16'(1 << b));
    rd_en = 0;
  endtask

  task automatic run_one(addr_t p, logic r, logic w, addr_t da, logic de, logic dw,
                         addr_t dadr, logic i, int b, string name);
    do_reset();
    pc = p; ren = r; wen = w; daddr = da; dma_en = de; dma_wen = dw; dma_addr = dadr; irq = i;
    scenario_body(b, name);
  endtask
endmodule
