// mem_ctrl_tb: drives the three commands of the memory controller on a small
// configuration and checks the kernel shift count, the pixel-by-pixel L2
// write order, the L2 read / L1 write sequence of window fetches (with the
// one-cycle L2 latency) and the done pulses.
module mem_ctrl_tb;
  import tulip_pkg::*;
  timeunit 1ns; timeprecision 1ps;
  localparam int R = 4, C = 8, KD = 10, AW = 5;
  logic clk = 0, rst_n = 0, cmd_valid = 0, busy, done, kvalid = 0, kready, kshift, pvalid = 0, pready;
  mem_cmd_e cmd; logic [1:0] cmd_row; logic [2:0] cmd_col; logic [3:0] cmd_k;
  logic l2_we, l1_we; logic [AW-1:0] l2_waddr, l2_raddr; logic [4:0] l2_wifm; logic [5:0] l1_wpos;
  int checks = 0, failures = 0;
  mem_ctrl #(.ROWS(R), .COLS(C), .KDEPTH(KD)) dut (.*);
  always #5 clk = ~clk;
  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  task automatic chk(bit ok, string s);
    checks++; if (!ok) begin failures++; $display("FAIL %s", s); end
  endtask
  task automatic issue(mem_cmd_e c, int r, int co, int k);
    @(negedge clk); cmd_valid = 1; cmd = c; cmd_row = 2'(r); cmd_col = 3'(co); cmd_k = 4'(k);
    @(negedge clk); cmd_valid = 0;
  endtask
  initial begin
    int n, got_done, exp_a, prev_ra;
    cmd = CMD_KERNEL; cmd_row = 0; cmd_col = 0; cmd_k = 0;
    @(negedge clk); rst_n = 1;
    // kernel: gaps in kvalid must not count
    issue(CMD_KERNEL, 0, 0, 0);
    n = 0; got_done = 0;
    while (busy) begin
      kvalid = 1'($urandom); #1;
      if (kshift) n++;
      chk(kshift == (kvalid & kready), "kshift");
      @(negedge clk); if (done) got_done++;
    end
    kvalid = 0;
    chk(n == KD, $sformatf("kernel words %0d", n));
    chk(got_done == 1, "kernel done");
    // image: L2 write order map, column, row
    issue(CMD_IMAGE, 0, 0, 0);
    n = 0;
    while (busy) begin
      pvalid = 1'($urandom); #1;
      if (l2_we) begin
        chk(int'(l2_wifm) == n % NIFM && int'(l2_waddr) == n / NIFM, $sformatf("pixel %0d", n));
        n++;
      end
      @(negedge clk);
    end
    pvalid = 0;
    chk(n == R*C*NIFM, "pixel count");
    // window fetches
    for (int t = 0; t < 6; t++) begin
      int k, r0, c0;
      k = 1 + (t % 4);
      if (k > R) k = R;
      r0 = $urandom % (R - k + 1); c0 = $urandom % (C - ((k>C)?C:k) + 1);
      issue(CMD_FETCH, r0, c0, k);
      n = 0; got_done = 0; prev_ra = -1;
      repeat (k*k + 3) begin
        #1;
        if (l1_we) begin
          exp_a = (r0 + n / k) * C + c0 + n % k;
          chk(prev_ra == exp_a, $sformatf("L2 read addr for pos %0d", n));
          chk(int'(l1_wpos) == (n / k) * KMAX + n % k, "L1 position");
          n++;
        end
        prev_ra = busy ? int'(l2_raddr) : -1;
        @(negedge clk); if (done) got_done++;
      end
      chk(n == k*k, $sformatf("fetch writes %0d k=%0d", n, k));
      chk(got_done == 1, "fetch done");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
