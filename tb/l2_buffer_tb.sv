// l2_buffer_tb: fills a small L2 pixel by pixel with random values and reads
// every position back (one-cycle latency), all feature maps at once.
module l2_buffer_tb;
  import tulip_pkg::*;
  timeunit 1ns; timeprecision 1ps;
  localparam int R = 4, C = 8;
  logic clk = 0, we = 0; logic [4:0] waddr, raddr; logic [4:0] wifm; logic [PIX_W-1:0] wdata;
  logic [NIFM-1:0][PIX_W-1:0] rdata;
  logic [PIX_W-1:0] refm [R*C][NIFM];
  int checks = 0, failures = 0;
  l2_buffer #(.ROWS(R), .COLS(C)) dut (.clk, .we, .waddr, .wifm, .wdata, .raddr, .rdata);
  always #5 clk = ~clk;
  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    raddr = 0;
    for (int a = 0; a < R*C; a++)
      for (int i = 0; i < NIFM; i++) begin
        @(negedge clk); we = 1; waddr = 5'(a); wifm = 5'(i); wdata = PIX_W'($urandom); refm[a][i] = wdata;
      end
    @(negedge clk); we = 0;
    for (int a = R*C-1; a >= 0; a--) begin
      raddr = 5'(a); @(posedge clk); #1;
      for (int i = 0; i < NIFM; i++) begin
        checks++; if (rdata[i] !== refm[a][i]) begin failures++; $display("FAIL a=%0d i=%0d", a, i); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
