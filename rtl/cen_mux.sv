// cen_mux: chip-enable override used to stop unauthorised RAM accesses.
//
// ctrl_cen_sel is the OR of Ctrl_register bits 7 and 6 (CPU_RAM_Rd,
// CPU_RAM_Wr), exactly as the prevention figure of the design prints it.
// The 2:1 mux passes the memory backbone's own active-low chip enable
// (select 0) or forces it to 1'b1, i.e. disabled (select 1), so the memory
// stops answering once a RAM access violation has been recorded. Purely
// combinational; since the flags are registered, gating starts one mclk
// after the violating access.
module cen_mux
  import rares_pkg::*;
(
  input  word_t ctrl_i,
  input  logic  actl_cen_i,
  output logic  rares_cen_o,
  output logic  ctrl_cen_sel_o
);

  always_comb begin
    ctrl_cen_sel_o = ctrl_i[D_CPU_RAM_RD] | ctrl_i[D_CPU_RAM_WR];
    rares_cen_o    = ctrl_cen_sel_o ? 1'b1 : actl_cen_i;
  end

endmodule
