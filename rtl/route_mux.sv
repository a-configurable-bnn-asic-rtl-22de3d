// route_mux: routing multiplexer "M" in front of every neuron input.
//
// A 32-to-1 selector with a 5-bit select line. Its 32 sources follow the
// paper's breakdown: 4 input-channel bits, 12 bits made of 9 neighbour bits,
// 1 feedback bit and the constants 0 and 1, and the 16 bits of the neuron's
// own local register (the register bus). The numbering of the sources inside
// the 32 codes is this design's choice and is fixed in tulip_pkg (SEL_*).
// Purely combinational.
module route_mux
  import tulip_pkg::*;
(
  input  logic [3:0]           inp,   // input-channel bits
  input  logic [8:0]           nbr,   // {c lines[2:0], b lines[2:0], outputs[2:0]}
  input  logic                 fb,    // own neuron output
  input  logic [LREG_BITS-1:0] rbus,  // own local register
  input  logic [SEL_W-1:0]     sel,
  output logic                 o
);
  logic [31:0] src;
  always_comb begin
    src = {rbus, 1'b1, 1'b0, fb, nbr, inp};
    o   = src[sel];
  end
endmodule
