// kernel_buffer: the weight store of the chip, a shift register as in the
// paper. Weights (and, in this design, the per-PE and per-MAC thresholds)
// are shifted in KW bits per cycle before the inputs are loaded; the whole
// register is visible in parallel to the processing units.
//
// Word order: data enters at the top and moves towards bit 0, so after
// DEPTH = BITS/KW shifts the first word sent sits at bits [KW-1:0]. Slot u of
// PU_SLOT bits (processing unit u) is at bits [u*PU_SLOT +: PU_SLOT]. The
// shift width KW is this design's choice. No reset: contents are only valid
// after a full load.
module kernel_buffer
  import tulip_pkg::*;
#(
  parameter int unsigned BITS = NPU*PU_SLOT,
  parameter int unsigned KW   = 32
)(
  input  logic            clk,
  input  logic            shift,
  input  logic [KW-1:0]   din,
  output logic [BITS-1:0] q
);
  always_ff @(posedge clk)
    if (shift) q <= {din, q[BITS-1:KW]};

  initial assert (BITS % KW == 0) else $error("BITS must be a multiple of KW");
endmodule
