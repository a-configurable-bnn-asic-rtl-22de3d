// tulip_pe_tb: self-checking test of one TULIP-PE running compiled programs.
//
// Checks: adder trees of 1..40 inputs (partial sum read back from the local
// register and compared with the popcount), full 288-input binary neurons
// (popcount >= T, thresholds near the popcount so both outcomes occur),
// comparisons in both modes, RELU and 4x4-input max-pooling. Reference values
// are computed directly from the random product vectors.
module tulip_pe_tb;
  timeunit 1ns; timeprecision 1ps;
  import tulip_pkg::*;
  import tulip_sched_pkg::*;

  localparam int unsigned PW = PE_SLOT;
  logic clk = 0, rst_n = 0;
  pe_ctrl_t ctrl;
  logic [PW-1:0] prod;
  logic [NEURONS-1:0] y;
  logic [NEURONS-1:0][LREG_BITS-1:0] rbus;
  logic result;
  int checks = 0, failures = 0;
  int cycles = 0;

  tulip_pe #(.PW(PW)) dut (.clk, .rst_n, .ctrl, .prod, .y, .rbus, .result);

  always #5 clk = ~clk;
  always @(posedge clk) cycles++;

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(tulip_prog p);
    foreach (p.w[i]) begin
      ctrl = p.w[i];
      @(posedge clk);
      #1;
    end
    ctrl = '0;
  endtask

  function automatic int popc(int lo, int n);
    int s = 0;
    for (int i = 0; i < n; i++) s += prod[lo+i];
    return s;
  endfunction

  function automatic int regval(val_t v);
    int s = 0;
    for (int i = 0; i < v.width; i++) s |= int'(rbus[v.n][v.addr+i]) << i;
    return s;
  endfunction

  task automatic check(string what, int got, int exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  initial begin
    tulip_prog p = new();
    val_t v;
    int t, pc, len288;
    ctrl = '0; prod = '0;
    repeat (3) @(posedge clk);
    rst_n = 1; #1;

    // adder trees of every size 1..40
    for (int n = 1; n <= 40; n++) begin
      for (int i = 0; i < PW; i++) prod[i] = 1'($urandom);
      p.clear();
      v = p.tree(0, n);
      run(p);
      check($sformatf("tree n=%0d", n), regval(v), popc(0, n));
    end

    // 288-input binary neurons (3x3 kernel, 32 IFMs) with thresholds
    for (int trial = 0; trial < 12; trial++) begin
      for (int i = 0; i < NPROD; i++) prod[i] = ($urandom % 100) < 20 + trial * 5;
      pc = popc(0, NPROD);
      t  = pc + (trial % 3) - 1;                // T = pc-1, pc, pc+1
      if (trial == 11) t = 0;
      prod[NPROD +: TH_BITS] = TH_BITS'(t);
      p.clear();
      v = p.neuron(NPROD, NPROD, TH_BITS);
      len288 = p.w.size();
      run(p);
      check($sformatf("tree288 trial %0d", trial), regval(v), pc);
      check($sformatf("neuron288 trial %0d (pc=%0d T=%0d)", trial, pc, t), int'(y[v.n]), int'(pc >= t));
    end
    $display("288-input neuron program: %0d cycles (%0d leaves, %0d adders, %0d moves)", len288, p.n_leaf, p.n_add, p.n_move);

    // comparator, both modes, on a 7-input sum
    for (int trial = 0; trial < 20; trial++) begin
      for (int i = 0; i < PW; i++) prod[i] = 1'($urandom);
      pc = popc(0, 7);
      t = pc + int'($urandom % 3) - 1; if (t < 0) t = 0;
      prod[100 +: 4] = 4'(t);
      p.clear(); v = p.tree(0, 7); p.cmp(v, 100, 4, trial[0]); run(p);
      check($sformatf("cmp ge=%0d pc=%0d T=%0d", trial[0], pc, t), int'(y[v.n]),
            trial[0] ? int'(pc >= t) : int'(pc > t));
    end

    // RELU: x if x > T else 0
    for (int trial = 0; trial < 20; trial++) begin
      int z;
      for (int i = 0; i < PW; i++) prod[i] = 1'($urandom);
      pc = popc(0, 15);
      t = pc + int'($urandom % 5) - 2; if (t < 0) t = 0;
      prod[200 +: 5] = 5'(t);
      p.clear(); v = p.tree(0, 15);
      z = (v.n + 1) % NEURONS;
      begin
        int dst;
        val_t r;
        dst = p.alloc(z, v.width); r.n = z; r.addr = dst; r.width = v.width;
        p.relu(v, 200, 5, z, dst);
        run(p);
        check($sformatf("relu pc=%0d T=%0d", pc, t), regval(r), (pc > t) ? pc : 0);
      end
    end

    // max-pooling: four 4-input ORs in one cycle
    for (int trial = 0; trial < 20; trial++) begin
      for (int i = 0; i < PW; i++) prod[i] = ($urandom % 100) < 15;
      p.clear(); p.maxpool(40); run(p);
      for (int n = 0; n < NEURONS; n++)
        check($sformatf("maxpool n=%0d", n), int'(y[n]), int'(|prod[40 + 4*n +: 4]));
      begin
        int c0;
        c0 = cycles;
        p.clear(); p.maxpool(40); run(p);
        check("maxpool takes one cycle", cycles - c0, 1);
      end
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
