// rares_hw_mod: the RARES custom hardware module (Hw_mod).
//
// It receives the control signals tapped out of the CPU (Pc, Irq, Ren, Wen,
// Daddr, DMAen, DMAaddr, plus the DMA write strobe), classifies every access
// with the CPU, DMA and atomicity classifiers and records the result in
// Ctrl_register. Detection latency is one mclk: a violation in cycle n shows
// in ctrl_o after the clock edge that ends cycle n. The structure (three
// classifiers feeding one 16-bit register) follows the design; the
// individual access rules are documented in the classifier modules.
module rares_hw_mod
  import rares_pkg::*;
#(
  parameter addr_t SWATT_BASE = SWATT_BASE_D,
  parameter addr_t SWATT_LAST = SWATT_LAST_D,
  parameter addr_t KEY_BASE   = KEY_BASE_D,
  parameter addr_t KEY_LAST   = KEY_LAST_D,
  parameter addr_t STACK_BASE = STACK_BASE_D,
  parameter addr_t STACK_LAST = STACK_LAST_D,
  parameter addr_t APP_BASE   = APP_BASE_D,
  parameter addr_t APP_LAST   = APP_LAST_D,
  parameter addr_t CTRL_ADDR  = CTRL_ADDR_D
) (
  input  logic  clk,
  input  logic  rst_n,
  input  addr_t pc_i,
  input  logic  irq_i,
  input  logic  ren_i,
  input  logic  wen_i,
  input  addr_t daddr_i,
  input  logic  dma_en_i,
  input  logic  dma_wen_i,
  input  addr_t dma_addr_i,
  input  logic  rd_en_i,
  input  addr_t rd_addr_i,
  output word_t rd_data_o,
  output word_t ctrl_o
);

  cpu_viol_t  cpu_v;
  dma_viol_t  dma_v;
  atom_viol_t atom_v;

  cpu_access_detect #(
    .SWATT_BASE(SWATT_BASE), .SWATT_LAST(SWATT_LAST),
    .KEY_BASE(KEY_BASE), .KEY_LAST(KEY_LAST),
    .STACK_BASE(STACK_BASE), .STACK_LAST(STACK_LAST),
    .APP_BASE(APP_BASE), .APP_LAST(APP_LAST)
  ) u_cpu (
    .pc_i(pc_i), .ren_i(ren_i), .wen_i(wen_i), .daddr_i(daddr_i), .viol_o(cpu_v)
  );

  dma_access_detect #(
    .SWATT_BASE(SWATT_BASE), .SWATT_LAST(SWATT_LAST),
    .KEY_BASE(KEY_BASE), .KEY_LAST(KEY_LAST),
    .STACK_BASE(STACK_BASE), .STACK_LAST(STACK_LAST),
    .APP_BASE(APP_BASE), .APP_LAST(APP_LAST)
  ) u_dma (
    .pc_i(pc_i), .dma_en_i(dma_en_i), .dma_wen_i(dma_wen_i),
    .dma_addr_i(dma_addr_i), .viol_o(dma_v)
  );

  atomicity_detect #(
    .SWATT_BASE(SWATT_BASE), .SWATT_LAST(SWATT_LAST),
    .APP_BASE(APP_BASE), .APP_LAST(APP_LAST)
  ) u_atom (
    .pc_i(pc_i), .irq_i(irq_i), .viol_o(atom_v)
  );

  ctrl_register #(.CTRL_ADDR(CTRL_ADDR)) u_ctrl (
    .clk(clk), .rst_n(rst_n),
    .atom_i(atom_v), .dma_i(dma_v), .cpu_i(cpu_v),
    .rd_en_i(rd_en_i), .rd_addr_i(rd_addr_i), .rd_data_o(rd_data_o),
    .ctrl_o(ctrl_o)
  );

endmodule
