// tulip_top_tb: end-to-end test of the whole accelerator at its default
// size except the number of processing units (NP = 4 of the 32; each unit
// still has 1 MAC + 8 TULIP-PEs, and all other sizes are the defaults).
//
// Sequence: load the full kernel buffer over the 32-bit kernel stream, load
// the whole L2 tile pixel by pixel, load the compiled 288-input binary-neuron
// program, then
//   - binary layer: fetch a 3x3 window, run the program on all PEs and
//     compare every output bit with popcount(XNOR(act, w)) >= T;
//   - integer layer: fetch a 7x7 window, run all 32 MACs and compare sums
//     and thresholded bits;
//   - a second binary window at another position (same weights);
//   - max-pooling: a one-word program of four 4-input ORs per PE;
//   - a run request while the memory controller is busy, which must be held
//     off (the units start only once window and weights are in place).
// Every mechanism is counted; one that never happened counts as a failure.
module tulip_top_tb;
  import tulip_pkg::*;
  import tulip_sched_pkg::*;
  timeunit 1ns; timeprecision 1ps;

  localparam int NP = 4;     // processing units simulated (design default 32)
  localparam int ROWS = 8, COLS = 32, UC_DEPTH = 1024;
  localparam int KDEPTH = NP*PU_SLOT/32;
  localparam int UAW = $clog2(UC_DEPTH);

  logic clk = 0, rst_n = 0;
  logic cmd_valid = 0; mem_cmd_e cmd = CMD_KERNEL;
  logic [2:0] cmd_row = 0; logic [4:0] cmd_col = 0; logic [3:0] cmd_k = 0;
  logic mem_busy, mem_done, kvalid = 0, kready, pvalid = 0, pready;
  logic [31:0] kdata = 0; logic [PIX_W-1:0] pdata = 0;
  logic uc_we = 0; logic [UAW-1:0] uc_addr = 0; pe_ctrl_t uc_wdata = '0;
  logic run_bin = 0, run_int = 0; logic [UAW:0] run_len = 0; logic [3:0] mac_k = 7;
  logic seq_busy, seq_done, mac_busy, out_clear = 0;
  logic [NP*PE_PER_PU-1:0] ofm_bits; logic ofm_valid;
  logic [NP-1:0] mac_bits; logic [NP-1:0][ACC_W-1:0] mac_accs; logic mac_valid;

  tulip_top #(.NP(NP)) dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int n_kernel = 0, n_image = 0, n_fetch = 0, n_bin = 0, n_int = 0, n_pool = 0, n_holdoff = 0;
  int n_pe_one = 0, n_pe_zero = 0;

  logic [NP*PU_SLOT-1:0] kb;
  logic [PIX_W-1:0] img [ROWS][COLS][NIFM];

  initial begin
    repeat (300000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic chk(bit ok, string s);
    checks++; if (!ok) begin failures++; $display("FAIL %s", s); end
  endtask

  task automatic command(mem_cmd_e c, int r, int co, int k);
    @(negedge clk); cmd_valid = 1; cmd = c; cmd_row = 3'(r); cmd_col = 5'(co); cmd_k = 4'(k);
    @(negedge clk); cmd_valid = 0;
  endtask

  task automatic wait_mem();
    while (!mem_done) @(negedge clk);
  endtask

  task automatic load_prog(tulip_prog p);
    foreach (p.w[i]) begin
      @(negedge clk); uc_we = 1; uc_addr = UAW'(i); uc_wdata = p.w[i];
    end
    @(negedge clk); uc_we = 0;
  endtask

  task automatic run_binary(int len);
    @(negedge clk); out_clear = 1; @(negedge clk); out_clear = 0;
    run_bin = 1; run_len = (UAW+1)'(len);
    @(negedge clk); run_bin = 0;
    while (!seq_done) @(negedge clk);
  endtask

  function automatic int pe_popc(int u, int j, int r0, int c0);
    int s = 0;
    for (int r = 0; r < KBIN; r++) for (int c = 0; c < KBIN; c++) for (int i = 0; i < NIFM; i++)
      s += (img[r0+r][c0+c][i][0] == kb[u*PU_SLOT + MAC_SLOT + j*PE_SLOT + (r*KBIN+c)*NIFM + i]) ? 1 : 0;
    return s;
  endfunction

  function automatic int pe_thr(int u, int j);
    return int'(kb[u*PU_SLOT + MAC_SLOT + j*PE_SLOT + NPROD +: TH_BITS]);
  endfunction

  initial begin
    tulip_prog p = new();
    val_t v;
    int len, r0, c0, pc, e, c;

    // ---- data ------------------------------------------------------------
    for (int r = 0; r < ROWS; r++) for (int co = 0; co < COLS; co++) for (int i = 0; i < NIFM; i++)
      img[r][co][i] = PIX_W'($urandom);
    for (int b = 0; b < NP*PU_SLOT; b++) kb[b] = 1'($urandom);
    r0 = 2; c0 = 5;
    for (int u = 0; u < NP; u++) begin
      for (int j = 0; j < PE_PER_PU; j++) begin
        pc = pe_popc(u, j, r0, c0);
        kb[u*PU_SLOT + MAC_SLOT + j*PE_SLOT + NPROD +: TH_BITS] = TH_BITS'(pc + int'($urandom % 3) - 1);
      end
      e = 0;
      for (int r = 0; r < 7; r++) for (int co = 0; co < 7; co++) for (int i = 0; i < NIFM; i++)
        e += kb[u*PU_SLOT + (r*KMAX+co)*NIFM + i] ? int'(img[1+r][20+co][i]) : -int'(img[1+r][20+co][i]);
      kb[u*PU_SLOT + MAC_NW +: ACC_W] = ACC_W'(e + int'($urandom % 3) - 1);
    end

    repeat (3) @(negedge clk); rst_n = 1;

    // ---- kernel load ------------------------------------------------------
    command(CMD_KERNEL, 0, 0, 0);
    for (int wd = 0; wd < KDEPTH; wd++) begin
      kvalid = 1; kdata = kb[wd*32 +: 32];
      @(negedge clk);
      while (!kready && !mem_done) @(negedge clk);
    end
    kvalid = 0;
    while (mem_busy) @(negedge clk);
    n_kernel++;
    chk(dut.kbuf === kb, "kernel buffer contents");

    // ---- image load -------------------------------------------------------
    command(CMD_IMAGE, 0, 0, 0);
    for (int r = 0; r < ROWS; r++) for (int co = 0; co < COLS; co++) for (int i = 0; i < NIFM; i++) begin
      pvalid = 1; pdata = img[r][co][i];
      @(negedge clk);
    end
    pvalid = 0;
    while (mem_busy) @(negedge clk);
    n_image++;

    // ---- program ---------------------------------------------------------
    v = p.neuron(NPROD, NPROD, TH_BITS);
    len = p.w.size();
    chk(len <= UC_DEPTH, "program fits the sequence generator");
    load_prog(p);

    // ---- binary layer, window 1, with a run request during the fetch -----
    command(CMD_FETCH, r0, c0, 3);
    run_bin = 1; run_len = (UAW+1)'(len);
    @(negedge clk); run_bin = 0;
    if (!seq_busy) n_holdoff++;
    chk(!seq_busy, "run held off while the window is fetched");
    wait_mem(); n_fetch++;
    c = 0;
    begin
      int t0 = $time;
      run_binary(len);
      $display("binary layer: %0d output maps in %0d cycles", NP*PE_PER_PU, ($time - t0) / 10);
    end
    n_bin++;
    chk(ofm_valid, "ofm valid");
    for (int u = 0; u < NP; u++) for (int j = 0; j < PE_PER_PU; j++) begin
      pc = pe_popc(u, j, r0, c0);
      chk(ofm_bits[u*PE_PER_PU + j] == (pc >= pe_thr(u, j)), $sformatf("binary PU %0d PE %0d", u, j));
      if (ofm_bits[u*PE_PER_PU + j]) n_pe_one++; else n_pe_zero++;
    end

    // ---- integer layer: 7x7 window on the MACs ----------------------------
    command(CMD_FETCH, 1, 20, 7); wait_mem(); n_fetch++;
    @(negedge clk); run_int = 1; mac_k = 7; @(negedge clk); run_int = 0;
    while (!mac_valid) @(negedge clk);
    n_int++;
    for (int u = 0; u < NP; u++) begin
      e = 0;
      for (int r = 0; r < 7; r++) for (int co = 0; co < 7; co++) for (int i = 0; i < NIFM; i++)
        e += kb[u*PU_SLOT + (r*KMAX+co)*NIFM + i] ? int'(img[1+r][20+co][i]) : -int'(img[1+r][20+co][i]);
      chk(int'($signed(mac_accs[u])) == e, $sformatf("MAC %0d sum", u));
      chk(mac_bits[u] == (e >= int'($signed(kb[u*PU_SLOT + MAC_NW +: ACC_W]))), $sformatf("MAC %0d bit", u));
    end

    // ---- binary layer, window 2 ------------------------------------------
    command(CMD_FETCH, 4, 11, 3); wait_mem(); n_fetch++;
    run_binary(len); n_bin++;
    for (int u = 0; u < NP; u++) for (int j = 0; j < PE_PER_PU; j++) begin
      pc = pe_popc(u, j, 4, 11);
      chk(ofm_bits[u*PE_PER_PU + j] == (pc >= pe_thr(u, j)), $sformatf("binary2 PU %0d PE %0d", u, j));
    end

    // ---- max-pooling on the product bits 20..35 --------------------------
    p.clear(); p.maxpool(20); p.capture(2);
    load_prog(p);
    run_binary(p.w.size()); n_pool++;
    for (int u = 0; u < NP; u++) for (int j = 0; j < PE_PER_PU; j++) begin
      logic orv;
      orv = 0;
      for (int q = 28; q < 32; q++) begin   // neuron 2 reads bits 20+8 .. 20+11
        int r, co, i;
        r = (q / NIFM) / KBIN; co = (q / NIFM) % KBIN; i = q % NIFM;
        orv |= (img[4+r][11+co][i][0] == kb[u*PU_SLOT + MAC_SLOT + j*PE_SLOT + q]);
      end
      chk(ofm_bits[u*PE_PER_PU + j] == orv, $sformatf("maxpool PU %0d PE %0d", u, j));
    end

    $display("mechanisms: kernel=%0d image=%0d fetch=%0d binary=%0d integer=%0d maxpool=%0d holdoff=%0d pe1=%0d pe0=%0d",
             n_kernel, n_image, n_fetch, n_bin, n_int, n_pool, n_holdoff, n_pe_one, n_pe_zero);
    chk(n_kernel > 0 && n_image > 0 && n_fetch > 0 && n_bin > 0 && n_int > 0 && n_pool > 0 && n_holdoff > 0,
        "every mechanism exercised");
    chk(n_pe_one > 0 && n_pe_zero > 0, "both neuron outcomes seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
