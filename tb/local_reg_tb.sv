// local_reg_tb: random single-bit writes against a reference copy; checks
// reset, that only the addressed bit changes and that we=0 writes nothing.
module local_reg_tb;
  timeunit 1ns; timeprecision 1ps;
  logic clk = 0, rst_n = 0, we, wd; logic [3:0] wa; logic [15:0] rbus, refv;
  int checks = 0, failures = 0;
  local_reg dut (.clk, .rst_n, .we, .wa, .wd, .rbus);
  always #5 clk = ~clk;
  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    we = 0; wa = 0; wd = 0;
    #12 rst_n = 1; refv = '0;
    checks++; if (rbus !== 16'h0) failures++;
    for (int i = 0; i < 500; i++) begin
      @(negedge clk); we = 1'($urandom); wa = 4'($urandom); wd = 1'($urandom);
      @(posedge clk); #1;
      if (we) refv[wa] = wd;
      checks++; if (rbus !== refv) begin failures++; $display("FAIL %h vs %h", rbus, refv); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
