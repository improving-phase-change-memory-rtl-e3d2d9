// dc_lut: cached address translation table (LUT).
//
// The full logical-to-physical translation table (AT) holds one entry per
// 1 KB line and lives in PCM, outside the controller. The LUT keeps the
// entries of a few recently used partitions of the logical address space
// inside the controller: SLOTS partitions (2 by default, the paper's default
// configuration) of SEG_ENTRIES entries each. A logical line address splits
// into a partition tag (upper bits) and an entry index (lower
// log2(SEG_ENTRIES) bits).
//
// On a hit the entry is read or updated directly. On a miss the least
// recently used slot is evicted: if it was updated since it was loaded
// (dirty) its entries are first written back to the AT, then all entries of
// the requested partition are read from the AT into the slot, and the request
// is served. Lookup on hit, LRU eviction, the dirty write-back and the 32 KB
// total size are the paper's. Caching whole partitions, the entry layout and
// the per-entry AT port are this design's choices: with 32-bit entries, 32 KB
// for two partitions gives 4096 entries per partition. (The paper's rank of
// 8 partitions per bank would hold far more lines per partition than that;
// the LUT partition is therefore a unit of the logical address space, not a
// physical PCM partition.)
//
// Interface: req_valid_i/req_ready_o handshake takes a lookup (req_write_i
// low) or an update (req_write_i high, new entry on req_wentry_i). Exactly
// one rsp_valid_o pulse answers each request, carrying the entry before the
// update; rsp_hit_o tells whether the partition was resident.
// AT port: at_req_valid_o/at_req_ready_i handshake, one entry per request;
// read data returns on at_rsp_valid_i in request order.
// Timing: a hit answers 2 cycles after the request is taken; a miss adds the
// write-back (2 cycles per entry at full AT speed) and the fill (one request
// per cycle plus the AT read latency).
// Lint note: Verilator reports rst_n as used both asynchronously and
// synchronously. Every flop here resets asynchronously; the synchronous
// use is only the 'disable iff (!rst_n)' of the assertions, which are not
// logic.
module dc_lut
  import dc_pkg::*;
#(
  parameter int unsigned LADDR_W     = dc_pkg::DEF_LADDR_W,
  parameter int unsigned ENTRY_W     = dc_pkg::DEF_ENTRY_W,
  parameter int unsigned SLOTS       = 2,
  parameter int unsigned SEG_ENTRIES = 4096,
  localparam int unsigned OFF_W  = $clog2(SEG_ENTRIES),
  localparam int unsigned TAG_W  = LADDR_W - OFF_W,
  localparam int unsigned SLOT_W = (SLOTS > 1) ? $clog2(SLOTS) : 1
) (
  input  logic               clk,
  input  logic               rst_n,
  // requests
  input  logic               req_valid_i,
  output logic               req_ready_o,
  input  logic               req_write_i,
  input  logic [LADDR_W-1:0] req_laddr_i,
  input  logic [ENTRY_W-1:0] req_wentry_i,
  output logic               rsp_valid_o,
  output logic [ENTRY_W-1:0] rsp_entry_o,
  output logic               rsp_hit_o,
  // AT in PCM
  output logic               at_req_valid_o,
  input  logic               at_req_ready_i,
  output logic               at_req_write_o,
  output logic [LADDR_W-1:0] at_req_idx_o,
  output logic [ENTRY_W-1:0] at_req_wdata_o,
  input  logic               at_rsp_valid_i,
  input  logic [ENTRY_W-1:0] at_rsp_rdata_i,
  // events
  output logic               miss_o,
  output logic               writeback_o
);

  typedef enum logic [2:0] {
    S_IDLE, S_ACCESS, S_RESP, S_WB_RD, S_WB_REQ, S_FILL
  } state_e;

  state_e            state;
  logic [ENTRY_W-1:0] mem [SLOTS * SEG_ENTRIES];

  logic [TAG_W-1:0]  tag   [SLOTS];
  logic              valid [SLOTS];
  logic              dirty [SLOTS];
  logic [SLOT_W-1:0] age   [SLOTS];   // 0 = most recently used

  logic               write_q, hit_q;
  logic [LADDR_W-1:0] laddr_q;
  logic [ENTRY_W-1:0] wentry_q, rdata_q, wbdata_q;
  logic [SLOT_W-1:0]  slot_q;
  logic [OFF_W:0]     req_cnt, rsp_cnt;

  logic [TAG_W-1:0] req_tag;
  assign req_tag = req_laddr_i[LADDR_W-1 -: TAG_W];

  // Hit detection and victim choice for the incoming request.
  logic              hit;
  logic [SLOT_W-1:0] hit_slot, victim;
  always_comb begin
    hit      = 1'b0;
    hit_slot = '0;
    for (int s = 0; s < SLOTS; s++) begin
      if (valid[s] && tag[s] == req_tag) begin
        hit      = 1'b1;
        hit_slot = SLOT_W'(s);
      end
    end
    victim = '0;
    for (int s = 0; s < SLOTS; s++) begin
      if (age[s] == SLOT_W'(SLOTS - 1)) victim = SLOT_W'(s);
    end
    for (int s = SLOTS - 1; s >= 0; s--) begin
      if (!valid[s]) victim = SLOT_W'(s);
    end
  end

  function automatic logic [SLOT_W+OFF_W-1:0] maddr(input logic [SLOT_W-1:0] s,
                                                    input logic [OFF_W-1:0] o);
    return (SLOTS > 1) ? {s, o} : (SLOT_W + OFF_W)'(o);
  endfunction

  logic [OFF_W-1:0] off_q;
  assign off_q = laddr_q[OFF_W-1:0];

  assign req_ready_o = (state == S_IDLE);

  // Memory port: one access per cycle.
  always_ff @(posedge clk) begin
    unique case (state)
      S_ACCESS: begin
        rdata_q <= mem[maddr(slot_q, off_q)];
        if (write_q) mem[maddr(slot_q, off_q)] <= wentry_q;
      end
      S_WB_RD: wbdata_q <= mem[maddr(slot_q, req_cnt[OFF_W-1:0])];
      S_FILL:  if (at_rsp_valid_i) mem[maddr(slot_q, rsp_cnt[OFF_W-1:0])] <= at_rsp_rdata_i;
      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= S_IDLE;
      write_q  <= 1'b0;
      hit_q    <= 1'b0;
      laddr_q  <= '0;
      wentry_q <= '0;
      slot_q   <= '0;
      req_cnt  <= '0;
      rsp_cnt  <= '0;
      for (int s = 0; s < SLOTS; s++) begin
        tag[s]   <= '0;
        valid[s] <= 1'b0;
        dirty[s] <= 1'b0;
        age[s]   <= SLOT_W'(s);
      end
    end else begin
      unique case (state)
        S_IDLE: if (req_valid_i) begin
          write_q  <= req_write_i;
          laddr_q  <= req_laddr_i;
          wentry_q <= req_wentry_i;
          hit_q    <= hit;
          req_cnt  <= '0;
          rsp_cnt  <= '0;
          if (hit) begin
            slot_q <= hit_slot;
            state  <= S_ACCESS;
          end else begin
            slot_q <= victim;
            state  <= (valid[victim] && dirty[victim]) ? S_WB_RD : S_FILL;
            valid[victim] <= 1'b0;
          end
        end
        S_WB_RD: state <= S_WB_REQ;
        S_WB_REQ: if (at_req_ready_i) begin
          req_cnt <= req_cnt + 1'b1;
          if (req_cnt == (OFF_W + 1)'(SEG_ENTRIES - 1)) begin
            req_cnt <= '0;
            state   <= S_FILL;
          end else begin
            state <= S_WB_RD;
          end
        end
        S_FILL: begin
          if (at_req_valid_o && at_req_ready_i) req_cnt <= req_cnt + 1'b1;
          if (at_rsp_valid_i) begin
            rsp_cnt <= rsp_cnt + 1'b1;
            if (rsp_cnt == (OFF_W + 1)'(SEG_ENTRIES - 1)) begin
              tag[slot_q]   <= laddr_q[LADDR_W-1 -: TAG_W];
              valid[slot_q] <= 1'b1;
              dirty[slot_q] <= 1'b0;
              state         <= S_ACCESS;
            end
          end
        end
        S_ACCESS: begin
          if (write_q) dirty[slot_q] <= 1'b1;
          for (int s = 0; s < SLOTS; s++) begin
            if (SLOT_W'(s) == slot_q)       age[s] <= '0;
            else if (age[s] < age[slot_q])  age[s] <= age[s] + 1'b1;
          end
          state <= S_RESP;
        end
        S_RESP: state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end

  // The slot being written back keeps its old tag until the fill completes.
  logic [LADDR_W-1:0] wb_base;
  assign wb_base = LADDR_W'({tag[slot_q], {OFF_W{1'b0}}});

  always_comb begin
    at_req_valid_o = 1'b0;
    at_req_write_o = 1'b0;
    at_req_idx_o   = '0;
    at_req_wdata_o = wbdata_q;
    if (state == S_WB_REQ) begin
      at_req_valid_o = 1'b1;
      at_req_write_o = 1'b1;
      at_req_idx_o   = wb_base | LADDR_W'(req_cnt[OFF_W-1:0]);
    end else if (state == S_FILL && req_cnt != (OFF_W + 1)'(SEG_ENTRIES)) begin
      at_req_valid_o = 1'b1;
      at_req_idx_o   = {laddr_q[LADDR_W-1 -: TAG_W], req_cnt[OFF_W-1:0]};
    end
  end

  assign rsp_valid_o = (state == S_RESP);
  assign rsp_entry_o = rdata_q;
  assign rsp_hit_o   = hit_q;
  assign miss_o      = (state == S_IDLE) && req_valid_i && !hit;
  assign writeback_o = (state == S_IDLE) && req_valid_i && !hit &&
                       valid[victim] && dirty[victim];

  a_rsp_only_in_fill: assert property (@(posedge clk) disable iff (!rst_n)
    at_rsp_valid_i |-> state == S_FILL);

endmodule
