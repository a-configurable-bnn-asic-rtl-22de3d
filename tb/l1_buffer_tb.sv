// l1_buffer_tb: random window-position writes against a reference window,
// plus the reset value.
module l1_buffer_tb;
  import tulip_pkg::*;
  timeunit 1ns; timeprecision 1ps;
  logic clk = 0, rst_n = 0, we = 0; logic [5:0] wpos;
  logic [NIFM-1:0][PIX_W-1:0] wdata;
  logic [KMAX*KMAX-1:0][NIFM-1:0][PIX_W-1:0] win, refw;
  int checks = 0, failures = 0;
  l1_buffer dut (.clk, .rst_n, .we, .wpos, .wdata, .win);
  always #5 clk = ~clk;
  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    wpos = 0; wdata = '0;
    #12 rst_n = 1; refw = '0;
    checks++; if (win !== refw) failures++;
    for (int t = 0; t < 300; t++) begin
      @(negedge clk); we = 1'($urandom); wpos = 6'($urandom % (KMAX*KMAX));
      for (int i = 0; i < NIFM; i++) wdata[i] = PIX_W'($urandom);
      @(posedge clk); #1; if (we) refw[wpos] = wdata;
      checks++; if (win !== refw) begin failures++; $display("FAIL t=%0d", t); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
