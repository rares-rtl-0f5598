// ctrl_register: the 16-bit RARES Ctrl_register.
//
// Each cycle the ten violation flags from the three classifiers are ORed
// into bits D0..D9, so an attack is recorded one mclk after the offending
// access and stays recorded (sticky) until the next system reset. Bit D10
// is the reset request: it is set one mclk after D0 or D1 (an atomicity
// violation) is set; the system reset it drives clears the whole register.
// D11..D15 are unused and read as 0.
//
// Software can read the register at CTRL_ADDR (inside the APEX METADATA
// area) through a combinational read port; there is no write port, since
// the design gives the register no software write access. The address and
// the read-port timing (data in the same cycle as rd_en_i, 0 otherwise) are
// this design's own choices, as are stickiness and the one-cycle D10 delay.
module ctrl_register
  import rares_pkg::*;
#(
  parameter addr_t CTRL_ADDR = CTRL_ADDR_D
) (
  input  logic       clk,
  input  logic       rst_n,       // system reset (PUC), active low, synchronous
  input  atom_viol_t atom_i,
  input  dma_viol_t  dma_i,
  input  cpu_viol_t  cpu_i,
  input  logic       rd_en_i,
  input  addr_t      rd_addr_i,
  output word_t      rd_data_o,
  output word_t      ctrl_o
);

  logic [N_FLAGS-1:0] flags_q;
  logic               rst_q;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      flags_q <= '0;
      rst_q   <= 1'b0;
    end else begin
      flags_q <= flags_q | {cpu_i, dma_i, atom_i};
      rst_q   <= rst_q | flags_q[D_ATOM_RAM] | flags_q[D_ATOM_STACK];
    end
  end

  // a recorded flag is only ever cleared by the system reset
  a_sticky: assert property (@(posedge clk) rst_n |=> ((flags_q & $past(flags_q)) == $past(flags_q)));

  assign ctrl_o    = {5'b0, rst_q, flags_q};
  assign rd_data_o = (rd_en_i && rd_addr_i == CTRL_ADDR) ? ctrl_o : '0;

endmodule
