// rares_top_tb_body.svh: shared body of the end-to-end testbenches of
// rares_top (declarations, counters and the five attack scenarios).
// The including module declares HAVE_IMAGE and instantiates the design as
// 'dut' after including this file's declarations part.


  logic mclk = 0, rst_n;
  addr_t pc, daddr, dma_addr, ctrl_rd_addr;
  logic irq, ren, wen, dma_en, dma_wen, cpuoff, ctrl_rd_en;
  word_t ctrl_rd_data, ctrl;
  logic pmem_cen_i, dmem_cen_i, pmem_cen_o, dmem_cen_o;
  logic rrom_cen;
  logic [12:0] rrom_addr;
  logic [15:0] rrom_dout;
  logic cpuoff_o, core_rst_n, recovery_req;
  int checks = 0, failures = 0;

  // mechanism counters
  int n_flag [11];
  int n_cpuoff = 0, n_pmem_gate = 0, n_dmem_gate = 0, n_reset = 0;
  int n_recovery_req = 0, n_rrom_read = 0, n_sw_read = 0;


  always #5 mclk = ~mclk;

  // count what the design did, every cycle
  always @(posedge mclk) begin
    for (int b = 0; b <= 10; b++) if (ctrl[b]) n_flag[b]++;
    if (cpuoff_o && !cpuoff) n_cpuoff++;
    if (pmem_cen_o && !pmem_cen_i) n_pmem_gate++;
    if (dmem_cen_o && !dmem_cen_i) n_dmem_gate++;
    if (!core_rst_n && rst_n) n_reset++;
    if (recovery_req) n_recovery_req++;
  end

  // contents expected from the recovery ROM: the 512-word test image
  // (word i = (i*0x9E37 + 0x1234) mod 2^16) when one is loaded, zero above it
  function automatic logic [15:0] golden(int i);
    return (HAVE_IMAGE && i < 512) ? 16'((i * 32'h9E37 + 32'h1234) & 32'hFFFF) : 16'h0000;
  endfunction

  task automatic check(string what, logic [15:0] got, logic [15:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s got=%h exp=%h", what, got, exp);
    end
  endtask

  task automatic idle();
    irq = 0; ren = 0; wen = 0; dma_en = 0; dma_wen = 0; daddr = '0; dma_addr = '0;
    cpuoff = 0; ctrl_rd_en = 0; ctrl_rd_addr = '0; pmem_cen_i = 1; dmem_cen_i = 1;
    rrom_cen = 1; rrom_addr = '0;
  endtask

  task automatic power_on_reset();
    rst_n = 0; idle(); pc = 16'hE000;
    repeat (2) @(posedge mclk);
    #1 rst_n = 1;
  endtask

  // one CPU data access from code at p, with the backbone enabling the
  // target memory (flash or app RAM chip enables are modelled)
  task automatic cpu_access(addr_t p, logic r, logic w, addr_t a);
    pc = p; ren = r; wen = w; daddr = a;
    dmem_cen_i = !(a >= 16'h0C00 && a <= 16'h1FFF);
    pmem_cen_i = !(a >= 16'hE000);
    @(posedge mclk); #1;
    ren = 0; wen = 0; dmem_cen_i = 1; pmem_cen_i = 1;
  endtask

  task automatic dma_access(addr_t p, logic w, addr_t a);
    pc = p; dma_en = 1; dma_wen = w; dma_addr = a;
    @(posedge mclk); #1;
    dma_en = 0; dma_wen = 0;
  endtask

  task automatic sw_read(output word_t v);
    ctrl_rd_en = 1; ctrl_rd_addr = 16'h014A;
    #1 v = ctrl_rd_data;
    n_sw_read++;
    @(posedge mclk); #1;
    ctrl_rd_en = 0;
  endtask

  initial begin
    #2000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    word_t v;
    foreach (n_flag[b]) n_flag[b] = 0;
    power_on_reset();

    // 1. normal operation: app code in RAM, then SW-Att attesting flash
    for (int i = 0; i < 16; i++) cpu_access(16'h0C00 + 16'(2 * i), 1, 1, 16'h1000 + 16'(2 * i));
    for (int i = 0; i < 32; i++) cpu_access(16'hA000 + 16'(2 * i), 1, 0, 16'h6A00 + 16'(2 * (i % 32)));
    for (int i = 0; i < 16; i++) cpu_access(16'hA100, 1, 1, 16'h0400 + 16'(2 * i));
    for (int i = 0; i < 16; i++) cpu_access(16'hA200, 1, 0, 16'hE000 + 16'(2 * i));  // attest flash
    dma_access(16'h0C20, 1, 16'h1200);
    dma_access(16'h0C20, 0, 16'h0500);
    check("normal operation leaves Ctrl_register clear", ctrl, 16'h0000);
    pc = 16'h0C20; dmem_cen_i = 0; #1;
    check("dmem cen passes when clear", {15'b0, dmem_cen_o}, 16'h0);
    dmem_cen_i = 1;

    // 2. key-ROM read attack from app code -> D9, CPU idled, DMA still runs
    cpu_access(16'h0C40, 1, 0, 16'h6A08);
    check("D9 set one mclk after key read", ctrl, 16'h0200);
    check("CPUOFF forced on", {15'b0, cpuoff_o}, 16'h1);
    dma_access(16'h0C40, 1, 16'h1300);
    dmem_cen_i = 0; #1;
    check("app RAM still enabled for DMA after D9", {15'b0, dmem_cen_o}, 16'h0);
    dmem_cen_i = 1;
    sw_read(v);
    check("software reads D9", v, 16'h0200);
    power_on_reset();
    check("cleared by reset", ctrl, 16'h0000);
    check("CPUOFF released after reset", {15'b0, cpuoff_o}, 16'h0);

    // 3. SW-Att writes app RAM -> D6, memories stalled, recovery
    cpu_access(16'hA300, 0, 1, 16'h1400);
    check("D6 set", ctrl, 16'h0040);
    pmem_cen_i = 0; dmem_cen_i = 0; #1;
    check("flash cen forced off", {15'b0, pmem_cen_o}, 16'h1);
    check("app RAM cen forced off", {15'b0, dmem_cen_o}, 16'h1);
    check("recovery requested", {15'b0, recovery_req}, 16'h1);
    pmem_cen_i = 1; dmem_cen_i = 1;
    // later flash reads by SW-Att are stalled too
    for (int i = 0; i < 4; i++) cpu_access(16'hA304, 1, 0, 16'hE000 + 16'(2 * i));
    check("flash reads do not add flags", ctrl, 16'h0040);
    cpu_access(16'hA300, 1, 0, 16'h1402);   // SW-Att now also reads app RAM -> D7
    check("D7 added", ctrl, 16'h00C0);
    // reflash routine: read the golden image from the recovery ROM
    for (int i = 0; i < 1024; i++) begin
      rrom_cen = 0; rrom_addr = 13'(i);
      @(posedge mclk); #1;
      check($sformatf("recovery word %0d", i), rrom_dout, golden(i));
      n_rrom_read++;
    end
    rrom_cen = 1;
    power_on_reset();   // the routine ends with a reset
    check("normal after recovery", ctrl, 16'h0000);

    // 4. DMA violations: recorded, no prevention action
    dma_access(16'hE100, 0, 16'h6A20);      // D5
    dma_access(16'hA400, 0, 16'h0800);      // D4
    dma_access(16'hA400, 0, 16'h1000);      // D3
    dma_access(16'hA400, 1, 16'h1000);      // D2
    check("DMA flags D2..D5", ctrl, 16'h003C);
    check("no CPUOFF for DMA flags", {15'b0, cpuoff_o}, 16'h0);
    sw_read(v);
    check("software reads DMA flags", v, 16'h003C);
    // CPU stack read from app code -> D8
    cpu_access(16'h0C40, 1, 0, 16'h0600);
    check("D8 added", ctrl, 16'h013C);
    power_on_reset();

    // 5. atomicity: interrupt during app code -> D0 -> D10 -> one-cycle reset
    pc = 16'h0C60; irq = 1;
    @(posedge mclk); #1;
    irq = 0;
    check("D0 set", ctrl, 16'h0001);
    @(posedge mclk); #1;
    check("D10 set one mclk later", ctrl, 16'h0401);
    check("core reset asserted", {15'b0, core_rst_n}, 16'h0);
    @(posedge mclk); #1;
    check("register cleared by the reset", ctrl, 16'h0000);
    check("core reset released", {15'b0, core_rst_n}, 16'h1);
    // interrupt during SW-Att -> D1 -> D10
    pc = 16'hA500; irq = 1;
    @(posedge mclk); #1;
    irq = 0;
    check("D1 set", ctrl, 16'h0002);
    repeat (2) @(posedge mclk);
    #1 check("cleared after D1 reset", ctrl, 16'h0000);

    // every mechanism must have happened
    for (int b = 0; b <= 10; b++) begin
      checks++;
      if (n_flag[b] == 0) begin failures++; $display("FAIL flag D%0d never set", b); end
    end
    begin
      int counts [7];
      string names [7];
      counts = '{n_cpuoff, n_pmem_gate, n_dmem_gate, n_reset, n_recovery_req, n_rrom_read, n_sw_read};
      names = '{"cpuoff", "flash cen gate", "app RAM cen gate", "D10 reset",
                           "recovery request", "recovery ROM read", "software read"};
      for (int k = 0; k < 7; k++) begin
        checks++;
        if (counts[k] == 0) begin failures++; $display("FAIL mechanism %s never happened", names[k]); end
        else $display("mechanism %-18s happened in %0d cycles", names[k], counts[k]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
