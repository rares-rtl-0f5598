// recovery_rom_tb: self-checking test of the 16 KB recovery ROM at its
// default size. It loads a 512-word golden image whose word i is
// (i*0x9E37 + 0x1234) mod 2^16, reads every word of the ROM, and checks the
// image, the zero fill above it, the one-cycle read latency and that the
// output holds while the chip enable is high.
module recovery_rom_tb;
  localparam int unsigned BYTES = 16384;
  localparam int unsigned AW = $clog2(BYTES / 2);

  logic clk = 0, cen;
  logic [AW-1:0] addr;
  logic [15:0] dout;
  int checks = 0, failures = 0;

  recovery_rom #(.INIT_FILE("tb/recovery_image.hex")) dut (.clk, .cen, .addr, .dout);

  always #5 clk = ~clk;

  function automatic logic [15:0] golden(int i);
    return (i < 512) ? 16'((i * 32'h9E37 + 32'h1234) & 32'hFFFF) : 16'h0000;
  endfunction

  task automatic check(string what, logic [15:0] got, logic [15:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s got=%h exp=%h", what, got, exp);
    end
  endtask

  initial begin
    #2000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    cen = 1; addr = '0;
    @(posedge clk); #1;
    for (int i = 0; i < BYTES / 2; i++) begin
      cen = 0; addr = AW'(i);
      @(posedge clk); #1;
      check($sformatf("word %0d", i), dout, golden(i));
    end
    // hold while disabled
    cen = 0; addr = AW'(7);
    @(posedge clk); #1;
    cen = 1; addr = AW'(8);
    @(posedge clk); #1;
    check("hold with cen high", dout, golden(7));
    cen = 0;
    @(posedge clk); #1;
    check("read after hold", dout, golden(8));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
