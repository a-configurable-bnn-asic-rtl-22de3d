// l1_buffer: the first-level image buffer. It holds one KMAX x KMAX
// convolution window of all NIFM input feature maps, which is broadcast to
// every processing unit. The memory controller fills it from L2 one window
// position (all NIFM pixels) per cycle. Position r*KMAX + c holds window row
// r, column c. Reset clears it. The window size follows the largest MAC
// kernel in the paper (7x7); the write organisation is this design's.
module l1_buffer
  import tulip_pkg::*;
(
  input  logic                                        clk,
  input  logic                                        rst_n,
  input  logic                                        we,
  input  logic [$clog2(KMAX*KMAX)-1:0]                wpos,
  input  logic [NIFM-1:0][PIX_W-1:0]                  wdata,
  output logic [KMAX*KMAX-1:0][NIFM-1:0][PIX_W-1:0]   win
);
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n)  win <= '0;
    else if (we) win[wpos] <= wdata;
endmodule
