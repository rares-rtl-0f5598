// rares_pkg: types and constants shared by the RARES runtime-attack
// detection and prevention hardware.
//
// The 16-bit Ctrl_register layout (bit positions D0..D10) follows the
// register figure of the design: D0/D1 atomicity (RAM, stack), D2..D5 DMA
// violations, D6..D9 CPU violations, D10 reset, D11..D15 unused.
// The memory map below is this design's own choice; the design only fixes
// the regions (SW-Att ROM, key ROM, a reserved stack of about 2 KB, and
// app-available RAM), not their addresses. The map is openMSP430-like
// (byte addresses, 16-bit address space).
package rares_pkg;

  typedef logic [15:0] addr_t;
  typedef logic [15:0] word_t;

  // Ctrl_register bit positions
  typedef enum int unsigned {
    D_ATOM_RAM    = 0,
    D_ATOM_STACK  = 1,
    D_DMA_RAM_WR  = 2,
    D_DMA_RAM_RD  = 3,
    D_DMA_STK_RD  = 4,
    D_DMA_ROM_RD  = 5,
    D_CPU_RAM_WR  = 6,
    D_CPU_RAM_RD  = 7,
    D_CPU_STK_RD  = 8,
    D_CPU_ROM_RD  = 9,
    D_RESET       = 10
  } ctrl_bit_e;

  localparam int unsigned N_FLAGS    = 10;  // D0..D9

  // CPU violation flags, MSB first so that {atom, dma, cpu} maps to D0..D9
  typedef struct packed {
    logic rom_rd;    // D9  CPU_ROM_Rd   (key ROM read outside SW-Att)
    logic stack_rd;  // D8  CPU_Stack_Rd
    logic ram_rd;    // D7  CPU_RAM_Rd
    logic ram_wr;    // D6  CPU_RAM_Wr
  } cpu_viol_t;

  typedef struct packed {
    logic rom_rd;    // D5  DMA_ROM_Rd
    logic stack_rd;  // D4  DMA_Stack_Rd
    logic ram_rd;    // D3  DMA_RAM_Rd
    logic ram_wr;    // D2  DMA_RAM_Wr
  } dma_viol_t;

  typedef struct packed {
    logic stk;       // D1  Atomicity_Stack
    logic ram;       // D0  Atomicity_RAM
  } atom_viol_t;

  // Default memory map (assumed, see header)
  localparam addr_t SWATT_BASE_D = 16'hA000;  // SW-Att ROM (HMAC code)
  localparam addr_t SWATT_LAST_D = 16'hDFFF;
  localparam addr_t KEY_BASE_D   = 16'h6A00;  // key ROM (secret K)
  localparam addr_t KEY_LAST_D   = 16'h6A3F;
  localparam addr_t STACK_BASE_D = 16'h0400;  // reserved SW-Att stack, 2 KB
  localparam addr_t STACK_LAST_D = 16'h0BFF;
  localparam addr_t APP_BASE_D   = 16'h0C00;  // app-available RAM
  localparam addr_t APP_LAST_D   = 16'h1FFF;
  localparam addr_t CTRL_ADDR_D  = 16'h014A;  // Ctrl_register in METADATA

  function automatic logic in_range(addr_t a, addr_t lo, addr_t hi);
    return (a >= lo) && (a <= hi);
  endfunction

endpackage
