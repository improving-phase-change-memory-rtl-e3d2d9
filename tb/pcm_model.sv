// pcm_model: behavioural model of a PCM rank for the controller testbenches
// (not synthesizable). It stores whole lines by physical line address; a line
// never written holds an address-dependent pseudo-random pattern, standing in
// for unknown content. It watches the two command ports of the controller:
//   - main port: ACT, READ/WRITE, PRE. A READ returns the line two cycles
//     later. A WRITE programs the line according to its kind, the way the
//     write drivers would: SET-only (kind OP_WR_SET) can only turn 0s into 1s
//     and is an error unless the line holds all-0s; RESET-only (OP_WR_RESET)
//     can only turn 1s into 0s and is an error unless the line holds all-1s;
//     OP_WR_UNK does compare/SET/compare/RESET and always succeeds.
//   - init port: ACT, WRITE, PRE that fill a line with all-0s or all-1s.
// On both ports the command spacing must equal the PCM timing table (in
// cycles): ACT->RD/WR tRCD, ACT->PRE tRAS for reads and tRCD+tBURST+tWR for
// writes with tWR of the write kind. The two ports must never have a row
// open in the same partition (top PART_W address bits) at once.
// Every violation increments errors.
module pcm_model
  import dc_pkg::*;
#(
  parameter int unsigned LINE_BITS = 64,
  parameter int unsigned ADDR_W    = 10,
  parameter int unsigned PART_W    = 3
) (
  input  logic                 clk,
  input  logic                 m_valid,
  input  pcm_cmd_e             m_cmd,
  input  logic [ADDR_W-1:0]    m_addr,
  input  pcm_op_e              m_op,
  input  logic [LINE_BITS-1:0] m_wdata,
  output logic                 m_rvalid,
  output logic [LINE_BITS-1:0] m_rdata,
  input  logic                 i_valid,
  input  pcm_cmd_e             i_cmd,
  input  logic [ADDR_W-1:0]    i_addr,
  input  logic                 i_ones
);
  logic [LINE_BITS-1:0] mem [logic [ADDR_W-1:0]];
  int errors = 0;
  int n_wr[8];           // writes per pcm_op_e value
  int n_set_pulses = 0, n_reset_pulses = 0;
  longint cyc = 0;
  longint m_act = -1, i_act = -1, m_pre = -1000, i_pre = -1000;
  bit m_open = 0, i_open = 0;
  pcm_op_e m_kind;
  logic [PART_W-1:0] m_part, i_part;
  logic [LINE_BITS-1:0] rd_pipe [2];
  bit rd_v [2];

  function automatic logic [LINE_BITS-1:0] unknown_pattern(input logic [ADDR_W-1:0] a);
    logic [LINE_BITS-1:0] v;
    logic [31:0] x = 32'h9e37_79b9 ^ (32'(a) * 32'h85eb_ca6b);
    for (int i = 0; i < LINE_BITS; i += 32) begin
      x = x ^ (x << 13); x = x ^ (x >> 17); x = x ^ (x << 5);
      for (int b = 0; b < 32 && i + b < LINE_BITS; b++) v[i + b] = x[b];
    end
    return v;
  endfunction

  function automatic logic [LINE_BITS-1:0] peek(input logic [ADDR_W-1:0] a);
    return mem.exists(a) ? mem[a] : unknown_pattern(a);
  endfunction

  function automatic int twr(input pcm_op_e k);
    case (k)
      OP_WR_SET, OP_INIT1:   return DEF_T_WR_SET;
      OP_WR_RESET, OP_INIT0: return DEF_T_WR_RESET;
      default:               return DEF_T_WR_UNK;
    endcase
  endfunction

  function automatic int popc(input logic [LINE_BITS-1:0] v);
    int n = 0;
    for (int i = 0; i < LINE_BITS; i++) n += v[i];
    return n;
  endfunction

  task automatic err(input string s);
    errors++;
    $display("PCM MODEL ERROR @%0d: %s", cyc, s);
  endtask

  always @(posedge clk) begin
    cyc <= cyc + 1;
    m_rvalid <= rd_v[1];
    m_rdata  <= rd_pipe[1];
    rd_v[1] = rd_v[0]; rd_pipe[1] = rd_pipe[0];
    rd_v[0] = 0;
    // main port
    if (m_valid) begin
      case (m_cmd)
        CMD_ACT: begin
          if (m_open) err("main ACT while row open");
          if (cyc - m_pre < DEF_T_RP) err("main tRP");
          m_open = 1; m_act = cyc; m_kind = m_op; m_part = m_addr[ADDR_W-1 -: PART_W];
          if (i_open && i_part == m_part) err("partition conflict (main ACT)");
        end
        CMD_RD: begin
          if (!m_open || cyc - m_act != DEF_T_RCD) err("main read tRCD");
          rd_v[0] = 1; rd_pipe[0] = peek(m_addr);
        end
        CMD_WR: begin
          logic [LINE_BITS-1:0] old;
          old = peek(m_addr);
          if (!m_open || cyc - m_act != DEF_T_RCD) err("main write tRCD");
          case (m_op)
            OP_WR_SET:   if (old != '0) err($sformatf("SET-only write over non-zero line %h", m_addr));
            OP_WR_RESET: if (old != '1) err($sformatf("RESET-only write over non-one line %h", m_addr));
            OP_WR_UNK: ;
            default: err("bad write kind");
          endcase
          n_set_pulses   += popc(m_wdata & ~old);
          n_reset_pulses += popc(~m_wdata & old);
          n_wr[m_op]++;
          mem[m_addr] = m_wdata;
        end
        CMD_PRE: begin
          longint exp;
          exp = (m_kind == OP_READ) ? DEF_T_RAS : DEF_T_RCD + DEF_T_BURST + twr(m_kind);
          if (!m_open || cyc - m_act != exp)
            err($sformatf("main ACT->PRE %0d expected %0d (kind %s)", cyc - m_act, exp, m_kind.name()));
          m_open = 0; m_pre = cyc;
        end
        default: ;
      endcase
    end
    // init port
    if (i_valid) begin
      case (i_cmd)
        CMD_ACT: begin
          if (i_open) err("init ACT while row open");
          i_open = 1; i_act = cyc; i_part = i_addr[ADDR_W-1 -: PART_W];
          if (m_open && m_part == i_part) err("partition conflict (init ACT)");
        end
        CMD_WR: begin
          if (!i_open || cyc - i_act != DEF_T_RCD) err("init tRCD");
          mem[i_addr] = i_ones ? '1 : '0;
          n_wr[i_ones ? OP_INIT1 : OP_INIT0]++;
        end
        CMD_PRE: begin
          longint exp;
          exp = DEF_T_RCD + DEF_T_BURST + twr(i_ones ? OP_INIT1 : OP_INIT0);
          if (!i_open || cyc - i_act != exp) err($sformatf("init ACT->PRE %0d", cyc - i_act));
          i_open = 0; i_pre = cyc;
        end
        default: err("init port read");
      endcase
    end
  end
endmodule
