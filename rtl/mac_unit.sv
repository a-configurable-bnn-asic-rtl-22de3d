// mac_unit: the simplified multiply-accumulate unit of a processing unit,
// used for integer layers (integer inputs, binary weights).
//
// A weight bit of 1 stands for +1 and 0 for -1, so each product is +pixel or
// -pixel. The unit walks the k x k kernel window held in the L1 buffer one
// window position per cycle; at each position it adds the signed products of
// all NIFM input feature maps at once. Its controller is a plain counter, as
// the paper describes. After k*k cycles `done` pulses and `acc` holds the
// window sum; `bit_o` = (acc >= thr) is the binarised activation (the
// paper's comparison of the accumulated sum with T).
//
// The paper fixes the kernel sizes (5x5 and 7x7) and that the MAC is not
// reconfigurable; processing all NIFM maps of one window position per cycle,
// the accumulator width and the signed +-1 weight coding are this design's
// choices. `k` may be 1..KMAX.
//
// Timing: start (one cycle) -> busy for k*k cycles -> done one cycle later,
// acc and bit_o valid from done on until the next start.
module mac_unit
  import tulip_pkg::*;
#(
  parameter int unsigned NI = NIFM,
  parameter int unsigned KM = KMAX,
  parameter int unsigned PW_ = PIX_W,
  parameter int unsigned AW = ACC_W
)(
  input  logic                              clk,
  input  logic                              rst_n,
  input  logic                              start,
  input  logic [3:0]                        k,
  input  logic [KM*KM-1:0][NI-1:0][PW_-1:0] win,   // [r*KM+c][ifm]
  input  logic [KM*KM-1:0][NI-1:0]          w,     // same order
  input  logic signed [AW-1:0]              thr,
  output logic                              busy,
  output logic                              done,
  output logic signed [AW-1:0]              acc,
  output logic                              bit_o
);
  logic [3:0] r, c;
  logic signed [AW-1:0] psum;
  int unsigned pos;

  always_comb begin
    pos  = int'(r) * KM + int'(c);
    psum = '0;
    for (int i = 0; i < NI; i++)
      if (w[pos][i]) psum += AW'(win[pos][i]);
      else           psum -= AW'(win[pos][i]);
  end

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      busy <= 1'b0; done <= 1'b0; acc <= '0; r <= '0; c <= '0;
    end else begin
      done <= 1'b0;
      if (start) begin
        busy <= 1'b1; acc <= '0; r <= '0; c <= '0;
      end else if (busy) begin
        acc <= acc + psum;
        if (c == k - 1) begin
          c <= '0;
          if (r == k - 1) begin
            busy <= 1'b0; done <= 1'b1;
          end else r <= r + 1'b1;
        end else c <= c + 1'b1;
      end
    end

  assign bit_o = (acc >= thr);

  property p_k_range; @(posedge clk) disable iff (!rst_n) start |-> (k != 0 && k <= KM); endproperty
  assert property (p_k_range);
endmodule
