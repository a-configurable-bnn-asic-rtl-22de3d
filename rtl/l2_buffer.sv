// l2_buffer: the second-level image buffer, a standard-cell memory (SCM)
// holding a tile of NIFM input feature maps.
//
// It is loaded pixel by pixel (one PIX_W-bit value of one feature map per
// cycle) and read one pixel position at a time, all NIFM maps of that
// position at once, by the L1 fetch. The paper gives the two-level
// structure, the pixel-by-pixel load and the 32 IFMs; the tile size
// (ROWS x COLS) and the one-cycle read latency are this design's choices.
module l2_buffer
  import tulip_pkg::*;
#(
  parameter int unsigned ROWS = 8,
  parameter int unsigned COLS = 32,
  parameter int unsigned AW   = $clog2(ROWS*COLS)
)(
  input  logic                             clk,
  input  logic                             we,
  input  logic [AW-1:0]                    waddr,   // row*COLS + col
  input  logic [$clog2(NIFM)-1:0]          wifm,
  input  logic [PIX_W-1:0]                 wdata,
  input  logic [AW-1:0]                    raddr,
  output logic [NIFM-1:0][PIX_W-1:0]       rdata    // registered, one cycle
);
  logic [NIFM-1:0][PIX_W-1:0] mem [ROWS*COLS];

  always_ff @(posedge clk) begin
    if (we) mem[waddr][wifm] <= wdata;
    rdata <= mem[raddr];
  end
endmodule
