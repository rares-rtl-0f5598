// atomicity_detect: atomicity-violation detector of the RARES hardware
// module (Ctrl_register bits D0, D1).
//
// Purely combinational; ctrl_register latches the flags one mclk later.
// An interrupt taken (irq_i) while the PC lies in app-available RAM breaks
// the atomic execution of the application (D0, Atomicity_RAM); one taken
// while the PC lies in the SW-Att region breaks the atomic attestation run
// (D1, Atomicity_Stack). The design calls the second case code execution
// "inside the reserved stack (Sw-Att)"; this design takes that to mean the
// SW-Att code region.
module atomicity_detect
  import rares_pkg::*;
#(
  parameter addr_t SWATT_BASE = SWATT_BASE_D,
  parameter addr_t SWATT_LAST = SWATT_LAST_D,
  parameter addr_t APP_BASE   = APP_BASE_D,
  parameter addr_t APP_LAST   = APP_LAST_D
) (
  input  addr_t      pc_i,
  input  logic       irq_i,
  output atom_viol_t viol_o
);

  always_comb begin
    viol_o.ram   = irq_i & in_range(pc_i, APP_BASE, APP_LAST);
    viol_o.stk   = irq_i & in_range(pc_i, SWATT_BASE, SWATT_LAST);
  end

endmodule
