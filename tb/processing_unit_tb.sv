// processing_unit_tb: one processing unit with a random window and kernel
// slot. Binary layer: the compiled 288-input neuron program runs on all
// eight PEs at once; each PE result must equal popcount(XNOR(act, w)) >= T
// with its own T (chosen around its popcount). Integer layer: the MAC with
// k = 5 and 7 must give the signed window sum and its thresholded bit.
module processing_unit_tb;
  import tulip_pkg::*;
  import tulip_sched_pkg::*;
  timeunit 1ns; timeprecision 1ps;
  logic clk = 0, rst_n = 0, mac_start = 0, mac_done, mac_busy, mac_bit;
  logic [KMAX*KMAX-1:0][NIFM-1:0][PIX_W-1:0] win;
  logic [PU_SLOT-1:0] kslot;
  pe_ctrl_t ctrl;
  logic [3:0] mac_k;
  logic [PE_PER_PU-1:0] pe_result;
  logic signed [ACC_W-1:0] mac_acc;
  int checks = 0, failures = 0;
  processing_unit dut (.*);
  always #5 clk = ~clk;
  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    tulip_prog p = new();
    val_t v;
    int pc [PE_PER_PU];
    int e;
    ctrl = '0; mac_k = 7;
    @(negedge clk); rst_n = 1;
    v = p.neuron(NPROD, NPROD, TH_BITS);
    for (int trial = 0; trial < 4; trial++) begin
      for (int q = 0; q < KMAX*KMAX; q++) for (int i = 0; i < NIFM; i++) win[q][i] = PIX_W'($urandom);
      for (int b = 0; b < PU_SLOT; b++) kslot[b] = 1'($urandom);
      for (int j = 0; j < PE_PER_PU; j++) begin
        pc[j] = 0;
        for (int r = 0; r < KBIN; r++) for (int c = 0; c < KBIN; c++) for (int i = 0; i < NIFM; i++)
          pc[j] += (win[r*KMAX+c][i][0] == kslot[MAC_SLOT + j*PE_SLOT + (r*KBIN+c)*NIFM + i]) ? 1 : 0;
        kslot[MAC_SLOT + j*PE_SLOT + NPROD +: TH_BITS] = TH_BITS'(pc[j] + (j % 3) - 1);
      end
      foreach (p.w[i]) begin @(negedge clk); ctrl = p.w[i]; end
      @(negedge clk); ctrl = '0;
      for (int j = 0; j < PE_PER_PU; j++) begin
        checks++;
        if (pe_result[j] !== (pc[j] >= pc[j] + (j % 3) - 1)) begin
          failures++; $display("FAIL PE %0d pc=%0d", j, pc[j]);
        end
      end
      // integer layer on the same unit
      mac_k = (trial % 2) ? 4'd5 : 4'd7;
      e = 0;
      for (int r = 0; r < mac_k; r++) for (int c = 0; c < mac_k; c++) for (int i = 0; i < NIFM; i++)
        e += kslot[(r*KMAX+c)*NIFM + i] ? int'(win[r*KMAX+c][i]) : -int'(win[r*KMAX+c][i]);
      kslot[MAC_NW +: ACC_W] = ACC_W'(e - 1 + trial % 2 * 2);
      @(negedge clk); mac_start = 1; @(negedge clk); mac_start = 0;
      while (!mac_done) @(negedge clk);
      checks++; if (int'(mac_acc) != e) begin failures++; $display("FAIL mac %0d vs %0d", mac_acc, e); end
      checks++; if (mac_bit !== (e >= e - 1 + trial % 2 * 2)) begin failures++; $display("FAIL mac bit"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
