// dc_pcm_seq: PCM command sequencer for one access.
//
// Serves one PCM access as the three-command sequence ACTIVATE, READ or
// WRITE, PRECHARGE, spaced by the PCM timing parameters:
//   read:  ACT, READ after tRCD, PRE after tRAS (from ACT), next ACT tRP later;
//   write: ACT, WRITE after tRCD, PRE after tRCD + tBURST + tWR, next ACT tRP
//          later.
// The write recovery tWR depends on what the write overwrites: the long
// baseline value for unknown content, the SET value when the target holds
// all-0s (only SET pulses needed) and the RESET value when it holds all-1s
// (only RESET pulses needed). A re-initialisation to all-0s RESETs every cell
// and uses the RESET timing; one to all-1s SETs every cell and uses the SET
// timing (the paper does not give re-initialisation timings; this pairing is
// this design's choice). The command order, the parameter names and their
// values come from the paper's PCM timing figure and table; the defaults are
// in memory-clock cycles (see dc_pkg).
//
// Interface: start_i with op_i/addr_i is taken while ready_o is high. In the
// cycle after, cmd_valid_o carries CMD_ACT; the later commands follow on
// their cycles. done_o is high in the last cycle of the access (tRC after the
// ACT, counting the ACT cycle as the first); ready_o is high in that cycle as
// well, so back-to-back accesses keep ACT-to-ACT equal to tRC.
// op_o and addr_o hold the current access while busy_o is high.
module dc_pcm_seq
  import dc_pkg::*;
#(
  parameter int unsigned ADDR_W     = dc_pkg::DEF_LADDR_W,
  parameter int unsigned T_RCD      = dc_pkg::DEF_T_RCD,
  parameter int unsigned T_RAS      = dc_pkg::DEF_T_RAS,
  parameter int unsigned T_RP       = dc_pkg::DEF_T_RP,
  parameter int unsigned T_BURST    = dc_pkg::DEF_T_BURST,
  parameter int unsigned T_WR_UNK   = dc_pkg::DEF_T_WR_UNK,
  parameter int unsigned T_WR_SET   = dc_pkg::DEF_T_WR_SET,
  parameter int unsigned T_WR_RESET = dc_pkg::DEF_T_WR_RESET
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start_i,
  input  pcm_op_e           op_i,
  input  logic [ADDR_W-1:0] addr_i,
  output logic              ready_o,
  output logic              busy_o,
  output logic              done_o,
  output pcm_op_e           op_o,
  output logic [ADDR_W-1:0] addr_o,
  output logic              cmd_valid_o,
  output pcm_cmd_e          cmd_o
);

  localparam int unsigned CNT_W = 10;

  logic              busy;
  logic [CNT_W-1:0]  cnt;      // cycles since ACT
  pcm_op_e           op_q;
  logic [ADDR_W-1:0] addr_q;

  // Cycle (counted from ACT) at which PRE is issued.
  function automatic logic [CNT_W-1:0] pre_at(input pcm_op_e op);
    unique case (op)
      OP_READ:                return CNT_W'(T_RAS);
      OP_WR_SET, OP_INIT1:    return CNT_W'(T_RCD + T_BURST + T_WR_SET);
      OP_WR_RESET, OP_INIT0:  return CNT_W'(T_RCD + T_BURST + T_WR_RESET);
      default:                return CNT_W'(T_RCD + T_BURST + T_WR_UNK);
    endcase
  endfunction

  logic [CNT_W-1:0] t_pre, t_last;
  assign t_pre  = pre_at(op_q);
  assign t_last = t_pre + CNT_W'(T_RP) - 1'b1;

  assign done_o  = busy && (cnt == t_last);
  assign ready_o = !busy || done_o;
  assign busy_o  = busy;
  assign op_o    = op_q;
  assign addr_o  = addr_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy   <= 1'b0;
      cnt    <= '0;
      op_q   <= OP_READ;
      addr_q <= '0;
    end else if (start_i && ready_o) begin
      busy   <= 1'b1;
      cnt    <= '0;
      op_q   <= op_i;
      addr_q <= addr_i;
    end else if (done_o) begin
      busy <= 1'b0;
    end else if (busy) begin
      cnt <= cnt + 1'b1;
    end
  end

  always_comb begin
    cmd_valid_o = 1'b0;
    cmd_o       = CMD_ACT;
    if (busy) begin
      if (cnt == '0) begin
        cmd_valid_o = 1'b1;
        cmd_o       = CMD_ACT;
      end else if (cnt == CNT_W'(T_RCD)) begin
        cmd_valid_o = 1'b1;
        cmd_o       = (op_q == OP_READ) ? CMD_RD : CMD_WR;
      end else if (cnt == t_pre) begin
        cmd_valid_o = 1'b1;
        cmd_o       = CMD_PRE;
      end
    end
  end

endmodule
