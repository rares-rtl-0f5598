// rares_top: the RARES additions to an openMSP430/APEX microcontroller.
//
// It holds the hardware module (three access classifiers and the 16-bit
// Ctrl_register), the prevention logic (CPUOFF override, flash/app-RAM
// chip-enable gating, reset request, recovery request) and the 16 KB
// recovery ROM. The CPU, its memory backbone, the SW-Att/key ROMs, flash,
// RAM and the APEX/VRASED monitors are not part of this RTL: their signals
// are the ports below.
//
// Reset: rst_n is the external (power-on) reset. An atomicity violation
// sets D10, which drives core_rst_n_o low and also clears Ctrl_register
// through the synchronous system reset, so the reset request lasts one
// mclk and the system restarts with a clean register.
//
// Timing: detection is registered, so every prevention output reacts one
// mclk after the violating access. ctrl_rd_data_o and the gated chip
// enables are combinational from their inputs and the register; the
// recovery ROM answers one mclk after a read with rrom_cen_i low.
module rares_top
  import rares_pkg::*;
#(
  parameter addr_t       SWATT_BASE = SWATT_BASE_D,
  parameter addr_t       SWATT_LAST = SWATT_LAST_D,
  parameter addr_t       KEY_BASE   = KEY_BASE_D,
  parameter addr_t       KEY_LAST   = KEY_LAST_D,
  parameter addr_t       STACK_BASE = STACK_BASE_D,
  parameter addr_t       STACK_LAST = STACK_LAST_D,
  parameter addr_t       APP_BASE   = APP_BASE_D,
  parameter addr_t       APP_LAST   = APP_LAST_D,
  parameter addr_t       CTRL_ADDR  = CTRL_ADDR_D,
  parameter int unsigned RROM_BYTES = 16384,
  parameter string       RROM_INIT  = "",
  localparam int unsigned RROM_AW   = $clog2(RROM_BYTES / 2)
) (
  input  logic               mclk,
  input  logic               rst_n,
  // signals tapped out of the CPU
  input  addr_t              pc_i,
  input  logic               irq_i,
  input  logic               ren_i,
  input  logic               wen_i,
  input  addr_t              daddr_i,
  input  logic               dma_en_i,
  input  logic               dma_wen_i,
  input  addr_t              dma_addr_i,
  input  logic               cpuoff_i,      // CPUOFF bit of the status register
  // software read of Ctrl_register (METADATA)
  input  logic               ctrl_rd_en_i,
  input  addr_t              ctrl_rd_addr_i,
  output word_t              ctrl_rd_data_o,
  // memory backbone chip enables (active low)
  input  logic               pmem_cen_i,
  input  logic               dmem_cen_i,
  output logic               pmem_cen_o,
  output logic               dmem_cen_o,
  // recovery ROM port on the memory backbone
  input  logic               rrom_cen_i,
  input  logic [RROM_AW-1:0] rrom_addr_i,
  output logic [15:0]        rrom_dout_o,
  // prevention outputs
  output logic               cpuoff_o,       // to the clock module
  output logic               core_rst_n_o,   // system reset to the core
  output logic               recovery_req_o, // run the reflash routine
  output word_t              ctrl_o
);

  logic sys_rst_req;
  logic sys_rst_n;

  assign sys_rst_n    = rst_n & ~sys_rst_req;
  assign core_rst_n_o = sys_rst_n;

  rares_hw_mod #(
    .SWATT_BASE(SWATT_BASE), .SWATT_LAST(SWATT_LAST),
    .KEY_BASE(KEY_BASE), .KEY_LAST(KEY_LAST),
    .STACK_BASE(STACK_BASE), .STACK_LAST(STACK_LAST),
    .APP_BASE(APP_BASE), .APP_LAST(APP_LAST),
    .CTRL_ADDR(CTRL_ADDR)
  ) u_hw_mod (
    .clk(mclk), .rst_n(sys_rst_n),
    .pc_i(pc_i), .irq_i(irq_i), .ren_i(ren_i), .wen_i(wen_i), .daddr_i(daddr_i),
    .dma_en_i(dma_en_i), .dma_wen_i(dma_wen_i), .dma_addr_i(dma_addr_i),
    .rd_en_i(ctrl_rd_en_i), .rd_addr_i(ctrl_rd_addr_i), .rd_data_o(ctrl_rd_data_o),
    .ctrl_o(ctrl_o)
  );

  rares_prevent u_prevent (
    .ctrl_i(ctrl_o), .cpuoff_i(cpuoff_i),
    .pmem_cen_i(pmem_cen_i), .dmem_cen_i(dmem_cen_i),
    .cpuoff_o(cpuoff_o), .pmem_cen_o(pmem_cen_o), .dmem_cen_o(dmem_cen_o),
    .sys_rst_o(sys_rst_req), .recovery_req_o(recovery_req_o)
  );

  recovery_rom #(.SIZE_BYTES(RROM_BYTES), .INIT_FILE(RROM_INIT)) u_rrom (
    .clk(mclk), .cen(rrom_cen_i), .addr(rrom_addr_i), .dout(rrom_dout_o)
  );

endmodule
