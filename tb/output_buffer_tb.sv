// output_buffer_tb: random capture/clear strobes against a reference model.
module output_buffer_tb;
  import tulip_pkg::*;
  timeunit 1ns; timeprecision 1ps;
  localparam int NP = 4;
  logic clk = 0, rst_n = 0, clear, pe_cap, mac_cap, ofm_valid, mac_valid;
  logic [NP*PE_PER_PU-1:0] pe_in, ofm_bits, r_bits; logic [NP-1:0] mac_bit_in, mac_bits, r_mb;
  logic [NP-1:0][ACC_W-1:0] mac_acc_in, mac_accs, r_acc; logic r_ov, r_mv;
  int checks = 0, failures = 0;
  output_buffer #(.NP(NP)) dut (.clk, .rst_n, .clear, .pe_cap, .pe_in, .mac_cap, .mac_bit_in, .mac_acc_in,
                                .ofm_bits, .ofm_valid, .mac_bits, .mac_accs, .mac_valid);
  always #5 clk = ~clk;
  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    clear = 0; pe_cap = 0; mac_cap = 0; pe_in = 0; mac_bit_in = 0; mac_acc_in = 0;
    #12 rst_n = 1; r_bits = 0; r_mb = 0; r_acc = 0; r_ov = 0; r_mv = 0;
    for (int t = 0; t < 300; t++) begin
      @(negedge clk);
      clear = ($urandom % 5) == 0; pe_cap = 1'($urandom); mac_cap = 1'($urandom);
      pe_in = 32'($urandom); mac_bit_in = 4'($urandom);
      for (int i = 0; i < NP; i++) mac_acc_in[i] = ACC_W'($urandom);
      @(posedge clk); #1;
      if (clear) begin r_ov = 0; r_mv = 0; end
      if (pe_cap) begin r_bits = pe_in; r_ov = 1; end
      if (mac_cap) begin r_mb = mac_bit_in; r_acc = mac_acc_in; r_mv = 1; end
      checks++;
      if (ofm_bits !== r_bits || ofm_valid !== r_ov || mac_bits !== r_mb || mac_accs !== r_acc || mac_valid !== r_mv) begin
        failures++; $display("FAIL t=%0d", t);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
