// output_buffer: collects the results of all processing units before they
// are sent back to memory. On `pe_cap` it samples the result bit of every
// TULIP-PE (one binary output-feature-map pixel each); on `mac_cap` it
// samples every MAC's accumulated sum and its thresholded bit. The `*_valid`
// flags stay set until `clear`. The paper names the output buffers only; the
// capture strobes and the flat layout are this design's choices.
module output_buffer
  import tulip_pkg::*;
#(
  parameter int unsigned NP = NPU
)(
  input  logic                                clk,
  input  logic                                rst_n,
  input  logic                                clear,
  input  logic                                pe_cap,
  input  logic [NP*PE_PER_PU-1:0]             pe_in,
  input  logic                                mac_cap,
  input  logic [NP-1:0]                       mac_bit_in,
  input  logic [NP-1:0][ACC_W-1:0]            mac_acc_in,
  output logic [NP*PE_PER_PU-1:0]             ofm_bits,
  output logic                                ofm_valid,
  output logic [NP-1:0]                       mac_bits,
  output logic [NP-1:0][ACC_W-1:0]            mac_accs,
  output logic                                mac_valid
);
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      ofm_bits <= '0; ofm_valid <= 1'b0; mac_bits <= '0; mac_accs <= '0; mac_valid <= 1'b0;
    end else begin
      if (clear) begin ofm_valid <= 1'b0; mac_valid <= 1'b0; end
      if (pe_cap)  begin ofm_bits <= pe_in; ofm_valid <= 1'b1; end
      if (mac_cap) begin mac_bits <= mac_bit_in; mac_accs <= mac_acc_in; mac_valid <= 1'b1; end
    end
endmodule
