// seq_gen_tb: loads random control words, plays programs of several lengths
// and checks word order, busy/done timing (one word per cycle, done one cycle
// after the last word) and the all-zero idle word.
module seq_gen_tb;
  import tulip_pkg::*;
  timeunit 1ns; timeprecision 1ps;
  localparam int D = 64;
  logic clk = 0, rst_n = 0, uc_we = 0, start = 0, busy, done;
  logic [5:0] uc_addr; pe_ctrl_t uc_wdata, ctrl; logic [6:0] len;
  pe_ctrl_t img [D];
  int checks = 0, failures = 0;
  seq_gen #(.DEPTH(D)) dut (.clk, .rst_n, .uc_we, .uc_addr, .uc_wdata, .start, .len, .ctrl, .busy, .done);
  always #5 clk = ~clk;
  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    int n, c;
    len = 0; uc_addr = 0; uc_wdata = '0;
    @(negedge clk); rst_n = 1;
    for (int i = 0; i < D; i++) begin
      for (int b = 0; b < $bits(pe_ctrl_t); b++) img[i][b] = 1'($urandom);
      @(negedge clk); uc_we = 1; uc_addr = 6'(i); uc_wdata = img[i];
    end
    @(negedge clk); uc_we = 0;
    checks++; if (ctrl !== '0) begin failures++; $display("FAIL idle word"); end
    for (int k = 0; k < 4; k++) begin
      n = (k == 0) ? 1 : (k == 1) ? 5 : (k == 2) ? 17 : 64;
      @(negedge clk); start = 1; len = 7'(n);
      @(negedge clk); start = 0;
      c = 0;
      while (busy) begin
        checks++; if (ctrl !== img[c]) begin failures++; $display("FAIL word %0d", c); end
        c++;
        @(negedge clk);
      end
      checks++; if (c != n) begin failures++; $display("FAIL length %0d vs %0d", c, n); end
      checks++; if (!done) begin failures++; $display("FAIL done"); end
      checks++; if (ctrl !== '0) begin failures++; $display("FAIL idle after run"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
