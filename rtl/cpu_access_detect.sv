// cpu_access_detect: CPU access-violation classifier of the RARES hardware
// module (Ctrl_register bits D6..D9).
//
// Purely combinational; the flags are registered one mclk later in
// ctrl_register. The rules:
//   rom_rd   (D9): CPU reads the key ROM while the PC is outside SW-Att.
//   stack_rd (D8): CPU reads the reserved SW-Att stack while the PC is
//                  outside SW-Att.
//   ram_rd   (D7): CPU reads app-available RAM while the PC is inside SW-Att.
//   ram_wr   (D6): CPU writes app-available RAM while the PC is inside SW-Att.
// D9 and D6/D7 follow the design directly. For D8 the description is
// ambiguous (it both allows stack reads from app code and calls "all other"
// stack reads violations); this design uses the VRASED rule that the
// reserved stack is private to SW-Att. Region bounds are inclusive and
// parameterised; their defaults are this design's own memory map.
module cpu_access_detect
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
  input  logic      ren_i,
  input  logic      wen_i,
  input  addr_t     daddr_i,
  output cpu_viol_t viol_o
);

  logic pc_in_swatt, a_key, a_stack, a_app;

  always_comb begin
    pc_in_swatt = in_range(pc_i, SWATT_BASE, SWATT_LAST);
    a_key       = in_range(daddr_i, KEY_BASE, KEY_LAST);
    a_stack     = in_range(daddr_i, STACK_BASE, STACK_LAST);
    a_app       = in_range(daddr_i, APP_BASE, APP_LAST);

    viol_o.rom_rd   = ren_i & a_key   & ~pc_in_swatt;
    viol_o.stack_rd = ren_i & a_stack & ~pc_in_swatt;
    viol_o.ram_rd   = ren_i & a_app   &  pc_in_swatt;
    viol_o.ram_wr   = wen_i & a_app   &  pc_in_swatt;
  end

endmodule
