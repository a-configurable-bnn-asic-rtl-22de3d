// tl_neuron_tb: exhaustive test of the binary neuron: every input pattern,
// inversion mask and threshold 0..6 against (2a+b+c+d >= T); checks the
// one-cycle latency and that a disabled neuron holds its output.
module tl_neuron_tb;
  timeunit 1ns; timeprecision 1ps;
  logic clk = 0, rst_n = 0, en;
  logic [3:0] x, inv;
  logic [2:0] thr;
  logic f, y;
  int checks = 0, failures = 0;

  tl_neuron dut (.clk, .rst_n, .en, .x, .inv, .thr, .f, .y);
  always #5 clk = ~clk;
  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  function automatic logic ref_f(logic [3:0] xx, logic [3:0] ii, int t);
    logic [3:0] e = xx ^ ii;
    return (2*e[0] + e[1] + e[2] + e[3]) >= t;
  endfunction

  initial begin
    logic held;
    en = 0; x = 0; inv = 0; thr = 0;
    @(negedge clk); rst_n = 1;
    for (int t = 0; t <= 6; t++)
      for (int m = 0; m < 16; m++)
        for (int v = 0; v < 16; v++) begin
          @(negedge clk);
          x = 4'(v); inv = 4'(m); thr = 3'(t); en = 1;
          #1 checks++; if (f !== ref_f(x, inv, t)) begin failures++; $display("FAIL f x=%b inv=%b T=%0d", x, inv, t); end
          @(posedge clk); #1;
          checks++; if (y !== ref_f(x, inv, t)) begin failures++; $display("FAIL y x=%b inv=%b T=%0d", x, inv, t); end
        end
    // hold when disabled
    for (int i = 0; i < 20; i++) begin
      @(negedge clk); held = y; en = 0; x = 4'($urandom); thr = 3'($urandom % 7);
      @(posedge clk); #1; checks++; if (y !== held) begin failures++; $display("FAIL hold"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
