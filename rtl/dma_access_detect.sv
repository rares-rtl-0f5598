// dma_access_detect: DMA access-violation classifier of the RARES hardware
// module (Ctrl_register bits D2..D5).
//
// Purely combinational; ctrl_register latches the flags one mclk later.
// A DMA access is a cycle with dma_en_i set; dma_wen_i tells a write from a
// read (the openMSP430 DMA port carries its own write enable; the design
// lists only DMAen and DMAaddr, so the separate write strobe is this
// design's choice). The rules:
//   rom_rd   (D5): DMA reads the key ROM while the PC is outside SW-Att.
//   stack_rd (D4): DMA reads the reserved stack while the PC is inside
//                  SW-Att (stack reads by DMA are allowed while app code
//                  runs, as the design states; the remaining case is the
//                  violation).
//   ram_rd   (D3): DMA reads app-available RAM while the PC is inside SW-Att.
//   ram_wr   (D2): DMA writes app-available RAM while the PC is inside SW-Att.
module dma_access_detect
  import rares_pkg::*;
#(
  parameter addr_t SWATT_BASE = SWATT_BASE_D,
  parameter addr_t SWATT_LAST = SWATT_LAST_D,
  parameter addr_t KEY_BASE   = KEY_BASE_D,
  parameter addr_t KEY_LAST   = KEY_LAST_D,
  parameter addr_t STACK_BASE = STACK_BASE_D,
  parameter addr_t STACK_LAST = STACK_LAST_D,
  parameter addr_t APP_BASE   = APP_BASE_D,
  parameter addr_t APP_LAST   = APP_LAST_D
) (
  input  addr_t     pc_i,
  input  logic      dma_en_i,
  input  logic      dma_wen_i,
  input  addr_t     dma_addr_i,
  output dma_viol_t viol_o
);

  logic pc_in_swatt, a_key, a_stack, a_app, dma_rd, dma_wr;

  always_comb begin
    pc_in_swatt = in_range(pc_i, SWATT_BASE, SWATT_LAST);
    a_key       = in_range(dma_addr_i, KEY_BASE, KEY_LAST);
    a_stack     = in_range(dma_addr_i, STACK_BASE, STACK_LAST);
    a_app       = in_range(dma_addr_i, APP_BASE, APP_LAST);
    dma_rd      = dma_en_i & ~dma_wen_i;
    dma_wr      = dma_en_i &  dma_wen_i;

    viol_o.rom_rd   = dma_rd & a_key   & ~pc_in_swatt;
    viol_o.stack_rd = dma_rd & a_stack &  pc_in_swatt;
    viol_o.ram_rd   = dma_rd & a_app   &  pc_in_swatt;
    viol_o.ram_wr   = dma_wr & a_app   &  pc_in_swatt;
  end

endmodule
