// recovery_rom: the on-board recovery ROM that holds the golden image used
// to reflash corrupted code.
//
// SIZE_BYTES bytes organised as 16-bit words (the openMSP430 memory width),
// with an active-low chip enable and one-cycle synchronous read: when
// cen is low at a clock edge, dout shows the word at addr after that edge;
// when cen is high dout holds its value. The contents are loaded at
// elaboration from INIT_FILE (a $readmemh word file); words the file does
// not cover, or all words when no file is given, read as zero. The 16 KB size is the one the design reports for its
// recovery memory; organisation, port timing and initialisation are this
// design's own choices.
module recovery_rom #(
  parameter int unsigned SIZE_BYTES = 16384,
  parameter string       INIT_FILE  = "",
  localparam int unsigned WORDS = SIZE_BYTES / 2,
  localparam int unsigned AW    = $clog2(WORDS)
) (
  input  logic          clk,
  input  logic          cen,
  input  logic [AW-1:0] addr,
  output logic [15:0]   dout
);

  logic [15:0] mem [WORDS];

  initial begin
    for (int i = 0; i < WORDS; i++) mem[i] = '0;
    if (INIT_FILE != "") $readmemh(INIT_FILE, mem);
  end

  always_ff @(posedge clk) begin
    if (!cen) dout <= mem[addr];
  end

endmodule
