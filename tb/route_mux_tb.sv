// route_mux_tb: drives random source values and checks that every one of the
// 32 select codes returns the source the code map of tulip_pkg names.
module route_mux_tb;
  import tulip_pkg::*;
  timeunit 1ns; timeprecision 1ps;
  logic [3:0] inp; logic [8:0] nbr; logic fb; logic [15:0] rbus; logic [4:0] sel; logic o;
  int checks = 0, failures = 0;
  route_mux dut (.inp, .nbr, .fb, .rbus, .sel, .o);
  initial begin
    #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    logic e;
    for (int trial = 0; trial < 50; trial++) begin
      inp = 4'($urandom); nbr = 9'($urandom); fb = 1'($urandom); rbus = 16'($urandom);
      for (int s = 0; s < 32; s++) begin
        sel = 5'(s); #1;
        if (s < 4) e = inp[s];
        else if (s < 7)  e = nbr[s - 4];
        else if (s < 10) e = nbr[3 + s - 7];
        else if (s < 13) e = nbr[6 + s - 10];
        else if (s == int'(SEL_FB)) e = fb;
        else if (s == int'(SEL_ZERO)) e = 1'b0;
        else if (s == int'(SEL_ONE)) e = 1'b1;
        else e = rbus[s - 16];
        checks++;
        if (o !== e) begin failures++; $display("FAIL sel=%0d", s); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
