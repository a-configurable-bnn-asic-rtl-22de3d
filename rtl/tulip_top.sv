// tulip_top: the TULIP binary-neural-network accelerator.
//
// Structure (as in the paper's top-level figure): a memory controller; a
// kernel buffer (shift register) holding the weights of every processing
// unit; a two-level image buffer, L2 (loaded pixel by pixel with a tile of
// NIFM input feature maps) and L1 (one convolution window, broadcast to all
// units); NP processing units, each one simplified MAC plus eight TULIP-PEs;
// the processing-unit controller (the sequence generator, whose control
// words go to every PE of every unit, plus the MAC start); and output
// buffers.
//
// Operation, driven by a host:
//  1. CMD_KERNEL with KDEPTH 32-bit words on kdata: fills the kernel buffer.
//  2. CMD_IMAGE with ROWS*COLS*NIFM pixels on pdata: fills L2.
//  3. Load a PE program into the sequence generator (uc_*).
//  4. For each output pixel: CMD_FETCH (window corner, k) fills L1; then
//     run_bin plays the PE program (binary layer: NP*8 output maps at once)
//     or run_int starts all MACs (integer layer: NP output maps at once).
//     Results appear in the output buffer (ofm_valid / mac_valid).
// A run request is ignored while the memory controller is busy, so units
// start only after their window and weights are in place.
//
// Off-chip memory is not part of the design; its streams are the kdata and
// pdata ports. Every size defaults to the paper's evaluated configuration
// where the paper gives one (32 units of 1 MAC + 8 PEs = 256 PEs, 32 IFMs,
// 12-bit inputs, 3x3 binary and up to 7x7 integer kernels).
module tulip_top
  import tulip_pkg::*;
#(
  parameter int unsigned NP       = NPU,   // processing units (paper: 32)
  parameter int unsigned ROWS     = 8,     // L2 tile rows (assumed)
  parameter int unsigned COLS     = 32,    // L2 tile columns (assumed)
  parameter int unsigned UC_DEPTH = 1024,  // sequence-generator program words (assumed)
  parameter int unsigned KDEPTH   = NP*PU_SLOT/32
)(
  input  logic                          clk,
  input  logic                          rst_n,
  // memory controller commands
  input  logic                          cmd_valid,
  input  mem_cmd_e                      cmd,
  input  logic [$clog2(ROWS)-1:0]       cmd_row,
  input  logic [$clog2(COLS)-1:0]       cmd_col,
  input  logic [3:0]                    cmd_k,
  output logic                          mem_busy,
  output logic                          mem_done,
  // kernel and pixel streams
  input  logic                          kvalid,
  input  logic [31:0]                   kdata,
  output logic                          kready,
  input  logic                          pvalid,
  input  logic [PIX_W-1:0]              pdata,
  output logic                          pready,
  // PE program store
  input  logic                          uc_we,
  input  logic [$clog2(UC_DEPTH)-1:0]   uc_addr,
  input  pe_ctrl_t                      uc_wdata,
  // compute
  input  logic                          run_bin,
  input  logic [$clog2(UC_DEPTH):0]     run_len,
  input  logic                          run_int,
  input  logic [3:0]                    mac_k,
  output logic                          seq_busy,
  output logic                          seq_done,
  output logic                          mac_busy,
  // results
  input  logic                          out_clear,
  output logic [NP*PE_PER_PU-1:0]       ofm_bits,
  output logic                          ofm_valid,
  output logic [NP-1:0]                 mac_bits,
  output logic [NP-1:0][ACC_W-1:0]      mac_accs,
  output logic                          mac_valid
);
  localparam int unsigned AW = $clog2(ROWS*COLS);

  logic                                        kshift;
  logic [NP*PU_SLOT-1:0]                       kbuf;
  logic                                        l2_we, l1_we;
  logic [AW-1:0]                               l2_waddr, l2_raddr;
  logic [$clog2(NIFM)-1:0]                     l2_wifm;
  logic [$clog2(KMAX*KMAX)-1:0]                l1_wpos;
  logic [NIFM-1:0][PIX_W-1:0]                  l2_rdata;
  logic [KMAX*KMAX-1:0][NIFM-1:0][PIX_W-1:0]   win;
  pe_ctrl_t                                    ctrl;
  logic                                        mac_start;
  logic [NP*PE_PER_PU-1:0]                     pe_res;
  logic [NP-1:0]                               mac_done_v, mac_busy_v, mac_bit_v;
  logic [NP-1:0][ACC_W-1:0]                    mac_acc_v;

  mem_ctrl #(.ROWS(ROWS), .COLS(COLS), .KDEPTH(KDEPTH)) u_mem_ctrl (
    .clk, .rst_n, .cmd_valid, .cmd, .cmd_row, .cmd_col, .cmd_k,
    .busy(mem_busy), .done(mem_done),
    .kvalid, .kready, .kshift, .pvalid, .pready,
    .l2_we, .l2_waddr, .l2_wifm, .l2_raddr, .l1_we, .l1_wpos
  );

  kernel_buffer #(.BITS(NP*PU_SLOT), .KW(32)) u_kbuf (
    .clk, .shift(kshift), .din(kdata), .q(kbuf)
  );

  l2_buffer #(.ROWS(ROWS), .COLS(COLS)) u_l2 (
    .clk, .we(l2_we), .waddr(l2_waddr), .wifm(l2_wifm), .wdata(pdata),
    .raddr(l2_raddr), .rdata(l2_rdata)
  );

  l1_buffer u_l1 (.clk, .rst_n, .we(l1_we), .wpos(l1_wpos), .wdata(l2_rdata), .win);

  seq_gen #(.DEPTH(UC_DEPTH)) u_seq (
    .clk, .rst_n, .uc_we, .uc_addr, .uc_wdata,
    .start(run_bin & ~mem_busy), .len(run_len),
    .ctrl, .busy(seq_busy), .done(seq_done)
  );

  assign mac_start = run_int & ~mem_busy & ~mac_busy;

  for (genvar u = 0; u < NP; u++) begin : g_pu
    processing_unit u_pu (
      .clk, .rst_n, .win, .kslot(kbuf[u*PU_SLOT +: PU_SLOT]), .ctrl,
      .mac_start, .mac_k,
      .pe_result(pe_res[u*PE_PER_PU +: PE_PER_PU]),
      .mac_done(mac_done_v[u]), .mac_busy(mac_busy_v[u]),
      .mac_acc(mac_acc_v[u]), .mac_bit(mac_bit_v[u])
    );
  end

  assign mac_busy = mac_busy_v[0];

  output_buffer #(.NP(NP)) u_out (
    .clk, .rst_n, .clear(out_clear),
    .pe_cap(ctrl.capture), .pe_in(pe_res),
    .mac_cap(mac_done_v[0]), .mac_bit_in(mac_bit_v), .mac_acc_in(mac_acc_v),
    .ofm_bits, .ofm_valid, .mac_bits, .mac_accs, .mac_valid
  );
endmodule
