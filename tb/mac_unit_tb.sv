// mac_unit_tb: random 12-bit windows and +-1 weights for k = 3, 5 and 7;
// checks the signed window sum, the thresholded bit and the k*k-cycle latency.
module mac_unit_tb;
  import tulip_pkg::*;
  timeunit 1ns; timeprecision 1ps;
  logic clk = 0, rst_n = 0, start = 0, busy, done, bit_o;
  logic [3:0] k;
  logic [KMAX*KMAX-1:0][NIFM-1:0][PIX_W-1:0] win;
  logic [KMAX*KMAX-1:0][NIFM-1:0] w;
  logic signed [ACC_W-1:0] thr, acc;
  int checks = 0, failures = 0;
  mac_unit dut (.clk, .rst_n, .start, .k, .win, .w, .thr, .busy, .done, .acc, .bit_o);
  always #5 clk = ~clk;
  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    int e, lat;
    k = 7; thr = 0;
    @(negedge clk); rst_n = 1;
    for (int trial = 0; trial < 30; trial++) begin
      k = (trial % 3 == 0) ? 4'd3 : (trial % 3 == 1) ? 4'd5 : 4'd7;
      for (int p = 0; p < KMAX*KMAX; p++)
        for (int i = 0; i < NIFM; i++) begin
          win[p][i] = PIX_W'($urandom); w[p][i] = 1'($urandom);
        end
      e = 0;
      for (int r = 0; r < k; r++)
        for (int c = 0; c < k; c++)
          for (int i = 0; i < NIFM; i++)
            e += w[r*KMAX+c][i] ? int'(win[r*KMAX+c][i]) : -int'(win[r*KMAX+c][i]);
      thr = ACC_W'(e + int'($urandom % 3) - 1);
      @(negedge clk); start = 1;
      @(negedge clk); start = 0; lat = 1;
      while (!done) begin @(negedge clk); lat++; end
      checks++; if (int'(acc) != e) begin failures++; $display("FAIL acc %0d vs %0d", acc, e); end
      checks++; if (bit_o != (e >= int'(thr))) begin failures++; $display("FAIL bit"); end
      checks++; if (lat != int'(k)*int'(k) + 1) begin failures++; $display("FAIL latency %0d k=%0d", lat, k); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
