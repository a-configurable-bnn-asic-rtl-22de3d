// mem_ctrl: the memory controller. It moves data between the chip's inputs
// and its buffers, under commands from the host.
//
//  CMD_KERNEL : accept KDEPTH kernel words (kvalid/kready); each accepted word
//               shifts the kernel buffer once.
//  CMD_IMAGE  : accept ROWS*COLS*NIFM pixels (pvalid/pready) and write them
//               into L2 in the order map fastest, then column, then row.
//  CMD_FETCH  : copy the k x k window whose top-left corner is (row,col) from
//               L2 into L1, one window position per cycle (L2 read latency
//               is one cycle, so the L1 write trails the read by a cycle).
//
// `done` pulses for one cycle when a command completes; `busy` is high from
// the accepted command to done. Commands are accepted only when idle. The
// paper names this block and its three control paths; the command set,
// handshakes and orderings are this design's choices.
module mem_ctrl
  import tulip_pkg::*;
#(
  parameter int unsigned ROWS   = 8,
  parameter int unsigned COLS   = 32,
  parameter int unsigned KDEPTH = NPU*PU_SLOT/32,
  parameter int unsigned AW     = $clog2(ROWS*COLS)
)(
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic                         cmd_valid,
  input  mem_cmd_e                     cmd,
  input  logic [$clog2(ROWS)-1:0]      cmd_row,
  input  logic [$clog2(COLS)-1:0]      cmd_col,
  input  logic [3:0]                   cmd_k,
  output logic                         busy,
  output logic                         done,
  // kernel stream
  input  logic                         kvalid,
  output logic                         kready,
  output logic                         kshift,
  // pixel stream
  input  logic                         pvalid,
  output logic                         pready,
  output logic                         l2_we,
  output logic [AW-1:0]                l2_waddr,
  output logic [$clog2(NIFM)-1:0]      l2_wifm,
  // window fetch
  output logic [AW-1:0]                l2_raddr,
  output logic                         l1_we,
  output logic [$clog2(KMAX*KMAX)-1:0] l1_wpos
);
  typedef enum logic [1:0] {S_IDLE, S_KERNEL, S_IMAGE, S_FETCH} state_e;
  state_e state;

  logic [$clog2(KDEPTH+1)-1:0] kcnt;
  logic [$clog2(NIFM)-1:0]     pifm;
  logic [$clog2(ROWS)-1:0]     prow;
  logic [$clog2(COLS)-1:0]     pcol;
  logic [3:0]                  fr, fc, k;
  logic [$clog2(ROWS)-1:0]     row0;
  logic [$clog2(COLS)-1:0]     col0;
  logic                        rd_v, rd_last;
  logic [$clog2(KMAX*KMAX)-1:0] rd_pos;

  assign busy   = (state != S_IDLE);
  assign kready = (state == S_KERNEL);
  assign kshift = kready & kvalid;
  assign pready = (state == S_IMAGE);
  assign l2_we  = pready & pvalid;
  assign l2_waddr = AW'(int'(prow) * COLS + int'(pcol));
  assign l2_wifm  = pifm;
  assign l1_we    = rd_v;      // L2 data of the read issued last cycle
  assign l1_wpos  = rd_pos;
  assign l2_raddr = AW'((int'(row0) + int'(fr)) * COLS + int'(col0) + int'(fc));

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      state <= S_IDLE; done <= 1'b0; kcnt <= '0; pifm <= '0; prow <= '0; pcol <= '0;
      fr <= '0; fc <= '0; k <= '0; row0 <= '0; col0 <= '0;
      rd_v <= 1'b0; rd_last <= 1'b0; rd_pos <= '0;
    end else begin
      done  <= 1'b0;
      rd_v  <= 1'b0;
      if (rd_v && rd_last) begin done <= 1'b1; rd_last <= 1'b0; end
      case (state)
        S_IDLE: if (cmd_valid) begin
          kcnt <= '0; pifm <= '0; prow <= '0; pcol <= '0; fr <= '0; fc <= '0;
          row0 <= cmd_row; col0 <= cmd_col; k <= cmd_k;
          unique case (cmd)
            CMD_KERNEL: state <= S_KERNEL;
            CMD_IMAGE:  state <= S_IMAGE;
            CMD_FETCH:  state <= S_FETCH;
          endcase
        end
        S_KERNEL: if (kvalid) begin
          if (int'(kcnt) == KDEPTH - 1) begin state <= S_IDLE; done <= 1'b1; end
          kcnt <= kcnt + 1'b1;
        end
        S_IMAGE: if (pvalid) begin
          if (int'(pifm) == NIFM - 1) begin
            pifm <= '0;
            if (int'(pcol) == COLS - 1) begin
              pcol <= '0;
              if (int'(prow) == ROWS - 1) begin state <= S_IDLE; done <= 1'b1; end
              else prow <= prow + 1'b1;
            end else pcol <= pcol + 1'b1;
          end else pifm <= pifm + 1'b1;
        end
        S_FETCH: begin
          rd_v   <= 1'b1;
          rd_pos <= $bits(rd_pos)'(int'(fr) * KMAX + int'(fc));
          if (fc == k - 1) begin
            fc <= '0;
            if (fr == k - 1) begin state <= S_IDLE; rd_last <= 1'b1; end
            else fr <= fr + 1'b1;
          end else fc <= fc + 1'b1;
        end
        default: state <= S_IDLE;
      endcase
    end

  property p_fetch_in_tile;
    @(posedge clk) disable iff (!rst_n)
      (state == S_IDLE && cmd_valid && cmd == CMD_FETCH) |->
        (int'(cmd_row) + int'(cmd_k) <= ROWS && int'(cmd_col) + int'(cmd_k) <= COLS
         && cmd_k != 0 && cmd_k <= KMAX);
  endproperty
  assert property (p_fetch_in_tile);
endmodule
