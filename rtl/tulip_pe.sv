// tulip_pe: the TULIP processing element, a fully connected cluster of four
// binary neurons N1..N4 (index 0..3 here), each with its own 16-bit local
// register and four routing muxes.
//
// How it works: every cycle the broadcast control word picks, for each
// neuron, the source of each of its inputs a,b,c,d (routing mux select), an
// optional inversion per input, the threshold T, a clock enable, and whether
// the new output is written into one bit of the neuron's local register.
// Additions, accumulation, comparison, batch normalisation, max-pooling and
// RELU are all just sequences of such control words (see the schedules in
// the README); the PE itself has no notion of which operation it runs.
//
// Sources of a routing mux: four input-channel bits (four consecutive bits
// of the product vector starting at the neuron's ibase), the three neighbour
// outputs, the three neighbours' shared b lines and shared c lines, the
// neuron's own output, the constants 0 and 1 and the 16 local-register bits.
// The paper says the four neurons share their inputs b and c so that a
// neuron can read its local register and broadcast the data to the others;
// here the "shared b/c line" of a neuron is the value its own b/c mux
// selects from its own sources. To keep the network free of combinational
// loops, a neighbour's b/c line is never passed on: when a neuron's b or c
// mux selects a neighbour's b/c line, the neuron itself sees that value but
// its own shared line carries 0. That restriction is this design's own.
//
// Timing: neuron outputs and register writes change at the rising edge that
// ends the cycle of the control word; a result is visible to all neurons the
// following cycle. Reset clears outputs and registers.
module tulip_pe
  import tulip_pkg::*;
#(
  parameter int unsigned PW = 298     // bits of the product vector
)(
  input  logic                                   clk,
  input  logic                                   rst_n,
  input  pe_ctrl_t                               ctrl,
  input  logic [PW-1:0]                          prod,
  output logic [NEURONS-1:0]                     y,
  output logic [NEURONS-1:0][LREG_BITS-1:0]      rbus,
  output logic                                   result   // y of ctrl.out_sel
);
  logic [NEURONS-1:0][3:0]     inp;
  logic [NEURONS-1:0]          bl, cl;        // shared b and c lines
  logic [NEURONS-1:0][NIN-1:0] x;
  logic [NEURONS-1:0]          f;
  logic [NEURONS-1:0][2:0]     ny, nb, nc;    // neighbour k of neuron n

  // input channels: four product bits per neuron, 0 beyond the vector
  always_comb begin
    for (int n = 0; n < NEURONS; n++)
      for (int j = 0; j < 4; j++)
        inp[n][j] = (int'(ctrl.n[n].ibase) + j < int'(PW)) ?
                    prod[int'(ctrl.n[n].ibase) + j] : 1'b0;
  end

  // neighbour k of neuron n is neuron (n+k+1) mod 4
  always_comb begin
    for (int n = 0; n < NEURONS; n++)
      for (int k = 0; k < 3; k++) begin
        ny[n][k] = y [(n + k + 1) % NEURONS];
        nb[n][k] = bl[(n + k + 1) % NEURONS];
        nc[n][k] = cl[(n + k + 1) % NEURONS];
      end
  end

  for (genvar n = 0; n < NEURONS; n++) begin : g_n
    // shared lines: the local selection of the b and c muxes, in which a
    // neighbour b/c code reads 0 (keeps the network free of loops)
    route_mux u_sb (.inp(inp[n]), .nbr({6'b0, ny[n]}), .fb(y[n]), .rbus(rbus[n]),
                    .sel(ctrl.n[n].sel[1]), .o(bl[n]));
    route_mux u_sc (.inp(inp[n]), .nbr({6'b0, ny[n]}), .fb(y[n]), .rbus(rbus[n]),
                    .sel(ctrl.n[n].sel[2]), .o(cl[n]));
    // the four routing muxes M that feed the neuron
    for (genvar i = 0; i < NIN; i++) begin : g_m
      route_mux u_m (.inp(inp[n]), .nbr({nc[n], nb[n], ny[n]}), .fb(y[n]), .rbus(rbus[n]),
                     .sel(ctrl.n[n].sel[i]), .o(x[n][i]));
    end

    tl_neuron u_neuron (.clk, .rst_n, .en(ctrl.n[n].en), .x(x[n]), .inv(ctrl.n[n].inv),
                        .thr(ctrl.n[n].thr), .f(f[n]), .y(y[n]));

    local_reg u_reg (.clk, .rst_n, .we(ctrl.n[n].en & ctrl.n[n].we), .wa(ctrl.n[n].wa),
                     .wd(f[n]), .rbus(rbus[n]));
  end

  assign result = y[ctrl.out_sel];
endmodule
