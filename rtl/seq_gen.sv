// seq_gen: the reconfigurable sequence generator that drives the TULIP-PEs.
//
// The paper's controller follows the reverse-post-order (RPO) schedule of an
// adder tree and controls the local registers and multiplexers of all PEs,
// broadcasting the same control signals to every processing unit and
// producing the clock-gating signals. Here the schedule is held as a
// program of PE control words in a writable microcode store (DEPTH words of
// pe_ctrl_t), so any operation sequence - adder tree, accumulation,
// comparison, batch normalisation, RELU, max-pooling - is a program loaded
// by the host. On `start` it plays words 0..len-1, one per cycle, then
// pulses `done`. While idle it outputs the all-zero word, in which every
// neuron is disabled (clock-gated). Holding the schedule in a writable store
// rather than in fixed logic is this design's reading of "reconfigurable".
//
// Timing: the word at address i is on `ctrl` in the i-th cycle after the
// start cycle; `done` is high in the cycle after the last word.
module seq_gen
  import tulip_pkg::*;
#(
  parameter int unsigned DEPTH = 1024,
  parameter int unsigned AW    = $clog2(DEPTH)
)(
  input  logic          clk,
  input  logic          rst_n,
  input  logic          uc_we,
  input  logic [AW-1:0] uc_addr,
  input  pe_ctrl_t      uc_wdata,
  input  logic          start,
  input  logic [AW:0]   len,
  output pe_ctrl_t      ctrl,
  output logic          busy,
  output logic          done
);
  pe_ctrl_t   mem [DEPTH];
  logic [AW:0] pc, last;

  always_ff @(posedge clk)
    if (uc_we) mem[uc_addr] <= uc_wdata;

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      busy <= 1'b0; done <= 1'b0; pc <= '0; last <= '0;
    end else begin
      done <= 1'b0;
      if (start && !busy && len != 0) begin
        busy <= 1'b1; pc <= '0; last <= len - 1'b1;
      end else if (busy) begin
        if (pc == last) begin busy <= 1'b0; done <= 1'b1; end
        pc <= pc + 1'b1;
      end
    end

  assign ctrl = busy ? mem[pc[AW-1:0]] : '0;

  property p_len; @(posedge clk) disable iff (!rst_n) start |-> (int'(len) <= DEPTH); endproperty
  assert property (p_len);
  property p_no_write_while_busy; @(posedge clk) disable iff (!rst_n) busy |-> !uc_we; endproperty
  assert property (p_no_write_while_busy);
endmodule
