// local_reg: the 16-bit local register of one neuron.
//
// Holds intermediate results of the adder tree, comparator and RELU
// schedules. One bit is written per enabled clock edge (the neuron's new
// output is written at the same edge the neuron evaluates, see tulip_pe); all
// 16 bits are always visible on the register bus that feeds the neuron's own
// routing muxes. The paper builds this register from latches; here it is a
// bank of edge-triggered flops so that reads and writes in the same cycle are
// race-free. Reset clears it.
module local_reg
  import tulip_pkg::*;
(
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 we,
  input  logic [3:0]           wa,
  input  logic                 wd,
  output logic [LREG_BITS-1:0] rbus
);
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n)  rbus <= '0;
    else if (we) rbus[wa] <= wd;
endmodule
