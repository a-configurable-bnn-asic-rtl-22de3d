// processing_unit: one of the processing units of the TULIP array: one
// simplified MAC for integer layers and eight TULIP-PEs for binary layers.
//
// Binary layers: the L1 window is broadcast to every unit; each PE owns one
// output feature map and gets its own slot of the kernel buffer. The unit
// multiplies activations and weights with XNOR gates (the paper's product
// terms), and hands each PE a product vector made of its NPROD products
// followed by the TH_BITS threshold bits stored in its kernel slot (the
// threshold reaches the PE through its input channels). The binary
// activation of a pixel is its least significant bit. The product order is
// (r*KB + c)*NIFM + ifm for the KB x KB binary window.
//
// Integer layers: the MAC walks the full window with its own weights and
// threshold from the unit's kernel slot.
//
// Kernel slot layout (this design's choice): MAC weights [MAC_NW-1:0], MAC
// threshold next (ACC_W bits, two's complement), then PE j at
// MAC_SLOT + j*PE_SLOT: weights [NPROD-1:0], threshold (T) above them.
//
// All PEs run the same broadcast control word; the MAC is started by the
// unit controller. Unused parts are idle (the control word's enables and the
// MAC's start stand for the paper's clock gating).
module processing_unit
  import tulip_pkg::*;
(
  input  logic                                   clk,
  input  logic                                   rst_n,
  input  logic [KMAX*KMAX-1:0][NIFM-1:0][PIX_W-1:0] win,
  input  logic [PU_SLOT-1:0]                     kslot,
  input  pe_ctrl_t                               ctrl,
  input  logic                                   mac_start,
  input  logic [3:0]                             mac_k,
  output logic [PE_PER_PU-1:0]                   pe_result,
  output logic                                   mac_done,
  output logic                                   mac_busy,
  output logic signed [ACC_W-1:0]                mac_acc,
  output logic                                   mac_bit
);
  localparam int unsigned PW = PE_SLOT;

  logic [NPROD-1:0] act;

  always_comb
    for (int r = 0; r < KBIN; r++)
      for (int c = 0; c < KBIN; c++)
        for (int i = 0; i < NIFM; i++)
          act[(r*KBIN + c)*NIFM + i] = win[r*KMAX + c][i][0];

  for (genvar j = 0; j < PE_PER_PU; j++) begin : g_pe
    logic [PW-1:0] prod;
    logic [PE_SLOT-1:0] slot;
    assign slot = kslot[MAC_SLOT + j*PE_SLOT +: PE_SLOT];
    assign prod = {slot[NPROD +: TH_BITS], ~(act ^ slot[NPROD-1:0])};

    tulip_pe #(.PW(PW)) u_pe (
      .clk, .rst_n, .ctrl, .prod,
      .y(), .rbus(), .result(pe_result[j])
    );
  end

  mac_unit u_mac (
    .clk, .rst_n, .start(mac_start), .k(mac_k), .win,
    .w(kslot[MAC_NW-1:0]), .thr(kslot[MAC_NW +: ACC_W]),
    .busy(mac_busy), .done(mac_done), .acc(mac_acc), .bit_o(mac_bit)
  );
endmodule
