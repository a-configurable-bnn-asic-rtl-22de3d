// tl_neuron: one configurable binary neuron, the threshold-logic standard cell
// at the heart of every TULIP processing element.
//
// Function: at a rising clock edge, when enabled, the neuron evaluates the
// threshold function [2,1,1,1;T] on its inputs a,b,c,d,
//     y <= (2*a + b + c + d >= T),
// and holds the result until the next enabled edge, like an edge-triggered
// flip-flop. T is a 3-bit code chosen at run time (0..6; 0 makes y=1, 6 makes
// y=0). Each input may be inverted before weighting; the paper's schedules
// draw such an inverted input (the "bubble") on the sum and compare neurons.
//
// The physical cell in the paper is mixed-signal: weighted currents in a left
// and a right input network are compared by a clocked sense amplifier that
// sets or resets an output latch. Only its logic behaviour is modelled here;
// this module is the synthesizable logical equivalent of that cell. The
// per-input inversion and the enable (standing for clock gating) are choices
// of this design. Reset clears y to 0.
//
// Interface: x[0]=a (weight 2), x[1]=b, x[2]=c, x[3]=d. Latency one cycle.
// f is the combinational result that y takes at the next enabled edge; the
// PE writes f into the local register at that same edge.
module tl_neuron
  import tulip_pkg::*;
(
  input  logic             clk,
  input  logic             rst_n,
  input  logic             en,
  input  logic [NIN-1:0]   x,
  input  logic [NIN-1:0]   inv,
  input  logic [THR_W-1:0] thr,
  output logic             f,    // value y takes at the next enabled edge
  output logic             y
);
  logic [NIN-1:0] xe;
  logic [2:0]     wsum;   // 0..5

  always_comb begin
    xe   = x ^ inv;
    wsum = {1'b0, xe[0], 1'b0} + {2'b0, xe[1]} + {2'b0, xe[2]} + {2'b0, xe[3]};
    f    = (wsum >= thr);
  end

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n)  y <= 1'b0;
    else if (en) y <= f;
endmodule
