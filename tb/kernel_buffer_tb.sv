// kernel_buffer_tb: shifts a full load of random words into a small kernel
// buffer and checks every bit position and that shift=0 holds the contents.
module kernel_buffer_tb;
  timeunit 1ns; timeprecision 1ps;
  localparam int BITS = 256, KW = 32;
  logic clk = 0, shift = 0; logic [KW-1:0] din; logic [BITS-1:0] q, q0;
  logic [KW-1:0] words [BITS/KW];
  int checks = 0, failures = 0;
  kernel_buffer #(.BITS(BITS), .KW(KW)) dut (.clk, .shift, .din, .q);
  always #5 clk = ~clk;
  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    for (int rep = 0; rep < 5; rep++) begin
      for (int i = 0; i < BITS/KW; i++) begin
        words[i] = $urandom;
        @(negedge clk); shift = 1; din = words[i];
      end
      @(negedge clk); shift = 0; din = $urandom;
      for (int i = 0; i < BITS/KW; i++) begin
        checks++; if (q[i*KW +: KW] !== words[i]) begin failures++; $display("FAIL word %0d", i); end
      end
      q0 = q; repeat (3) @(negedge clk);
      checks++; if (q !== q0) begin failures++; $display("FAIL hold"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
