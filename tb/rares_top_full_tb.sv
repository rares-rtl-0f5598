// rares_top_full_tb: end-to-end test of the RARES additions with every
// parameter at its default: 16 KB recovery ROM with no image loaded (it
// reads as zero), default memory map. Same scenarios as rares_top_tb.
//
// The test plays the part of the openMSP430 core and its memory backbone:
// it drives the tapped-out CPU/DMA signals cycle by cycle the way the
// attack scenarios of the design would produce them, and checks what the
// RARES logic does in response:
//   1. normal operation: app code in RAM, SW-Att attesting with the key and
//      its stack -> no flag, chip enables pass through;
//   2. key-ROM read from app code -> D9, CPUOFF forced on, DMA unaffected;
//   3. SW-Att writing/reading app RAM -> D6/D7, flash and app-RAM chip
//      enables forced off, recovery requested, golden image read back from
//      the recovery ROM, then a reset restores normal operation;
//   4. DMA violations -> D2..D5 recorded and readable by software;
//   5. interrupt during app code and during SW-Att -> D0/D1, then D10
//      resets the core for one mclk and clears the register.
// Every mechanism is counted; a mechanism that never happens is a failure.
module rares_top_full_tb;
  import rares_pkg::*;
  localparam bit HAVE_IMAGE = 1'b0;
  `include "rares_top_tb_body.svh"

  rares_top dut (
    .mclk, .rst_n, .pc_i(pc), .irq_i(irq), .ren_i(ren), .wen_i(wen), .daddr_i(daddr),
    .dma_en_i(dma_en), .dma_wen_i(dma_wen), .dma_addr_i(dma_addr), .cpuoff_i(cpuoff),
    .ctrl_rd_en_i(ctrl_rd_en), .ctrl_rd_addr_i(ctrl_rd_addr), .ctrl_rd_data_o(ctrl_rd_data),
    .pmem_cen_i, .dmem_cen_i, .pmem_cen_o, .dmem_cen_o,
    .rrom_cen_i(rrom_cen), .rrom_addr_i(rrom_addr), .rrom_dout_o(rrom_dout),
    .cpuoff_o, .core_rst_n_o(core_rst_n), .recovery_req_o(recovery_req), .ctrl_o(ctrl)
  );
endmodule
