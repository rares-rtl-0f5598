// ctrl_register_tb: self-checking test of the 16-bit Ctrl_register.
// Drives random violation pulses and resets, keeps a cycle-accurate
// reference (sticky D0..D9, D10 one cycle after D0/D1, D11..D15 zero) and
// checks the register value and the read port every cycle, including the
// one-mclk detection latency and that the register cannot be written.
module ctrl_register_tb;
  import rares_pkg::*;

  logic clk = 0, rst_n;
  atom_viol_t atom;
  dma_viol_t dma;
  cpu_viol_t cpu;
  logic rd_en;
  addr_t rd_addr;
  word_t rd_data, ctrl;
  int checks = 0, failures = 0, cyc = 0;

  logic [9:0] ref_flags;
  logic       ref_rst;

  ctrl_register dut (.clk, .rst_n, .atom_i(atom), .dma_i(dma), .cpu_i(cpu),
                     .rd_en_i(rd_en), .rd_addr_i(rd_addr), .rd_data_o(rd_data), .ctrl_o(ctrl));

  always #5 clk = ~clk;

  task automatic check(string what, logic [15:0] got, logic [15:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL cyc=%0d %s got=%h exp=%h", cyc, what, got, exp);
    end
  endtask

  initial begin
    #200000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [9:0] in;
    rst_n = 0; atom = '0; dma = '0; cpu = '0; rd_en = 0; rd_addr = '0;
    ref_flags = '0; ref_rst = 0;
    @(posedge clk); #1;
    rst_n = 1;
    check("after reset", ctrl, 16'h0000);
    // latency: a single D9 pulse shows after exactly one clock edge
    cpu = '{rom_rd: 1'b1, default: 1'b0};
    #1 check("before edge", ctrl, 16'h0000);
    @(posedge clk); #1;
    cpu = '0;
    check("D9 after one mclk", ctrl, 16'h0200);
    ref_flags = 10'h200;
    // read port at the METADATA address, and elsewhere
    rd_en = 1; rd_addr = 16'h014A; #1 check("read port", rd_data, 16'h0200);
    rd_addr = 16'h014C; #1 check("read other addr", rd_data, 16'h0000);
    rd_en = 0; rd_addr = 16'h014A; #1 check("read no strobe", rd_data, 16'h0000);
    // random traffic
    for (cyc = 0; cyc < 3000; cyc++) begin
      in = ($urandom_range(7) == 0) ? 10'(1 << $urandom_range(9)) : 10'h0;
      {cpu, dma, atom} = in;
      rst_n = ($urandom_range(60) != 0);
      rd_en = 1'($urandom_range(1));
      rd_addr = ($urandom_range(1) == 1) ? 16'h014A : addr_t'($urandom);
      @(posedge clk);
      if (!rst_n) begin ref_flags = '0; ref_rst = 0; end
      else begin
        ref_rst = ref_rst | ref_flags[0] | ref_flags[1];
        ref_flags = ref_flags | in;
      end
      #1;
      check("ctrl", ctrl, {5'b0, ref_rst, ref_flags});
      check("rd_data", rd_data, (rd_en && rd_addr == 16'h014A) ? {5'b0, ref_rst, ref_flags} : 16'h0);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
