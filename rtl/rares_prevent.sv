// rares_prevent: the hardware prevention actions of RARES, driven by
// Ctrl_register.
//
//  * CPUOFF: the CPUOFF request to the openMSP430 clock module is the
//    status-register CPUOFF bit ORed with D9 (CPU_ROM_Rd). After a key-ROM
//    read attack the CPU idles while mclk, peripherals and DMA keep running.
//  * Chip-enable gating: the flash and app-RAM chip enables pass through a
//    cen_mux each, so both memories are disabled after a CPU RAM access
//    violation (D6/D7), which stalls the offending code.
//  * Reset: D10 is the system-reset request raised after an atomicity
//    violation.
//  * Recovery: while a RAM access violation is recorded, recovery_req_o asks
//    the CPU to run the reflash routine from the recovery ROM (the routine is
//    software). Using the cen select as that request is this design's choice.
// All outputs are combinational functions of the inputs.
module rares_prevent
  import rares_pkg::*;
(
  input  word_t ctrl_i,
  input  logic  cpuoff_i,
  input  logic  pmem_cen_i,
  input  logic  dmem_cen_i,
  output logic  cpuoff_o,
  output logic  pmem_cen_o,
  output logic  dmem_cen_o,
  output logic  sys_rst_o,
  output logic  recovery_req_o
);

  logic sel_p, sel_d;

  cen_mux u_pmem_mux (
    .ctrl_i(ctrl_i), .actl_cen_i(pmem_cen_i),
    .rares_cen_o(pmem_cen_o), .ctrl_cen_sel_o(sel_p)
  );

  cen_mux u_dmem_mux (
    .ctrl_i(ctrl_i), .actl_cen_i(dmem_cen_i),
    .rares_cen_o(dmem_cen_o), .ctrl_cen_sel_o(sel_d)
  );

  always_comb begin
    cpuoff_o       = cpuoff_i | ctrl_i[D_CPU_ROM_RD];
    sys_rst_o      = ctrl_i[D_RESET];
    recovery_req_o = sel_p | sel_d;
  end

endmodule
