// datacon_mc: PCM memory-controller front end with data-content-aware writes.
//
// A PCM write is faster and cheaper when the line it overwrites is known to
// hold all-0s (only SET pulses are needed) or all-1s (only RESET pulses are
// needed) than when the old content is unknown (compare, SET, compare, RESET).
// This controller therefore redirects every write it can to a physical line
// with known content, records the new logical-to-physical translation, and
// re-initialises the lines that fall out of use in the background.
//
// Blocks and flow (one request in service at a time):
//   read queue / write queue (dc_fifo, 16 entries each) hold the 1 KB line
//     requests coming from the eDRAM cache (read misses and evictions);
//   dc_lut translates the logical line address; a miss fetches the entries of
//     the whole partition from the translation table (AT) kept in PCM;
//   dc_ocs picks all-0s, all-1s or unknown content for a write from the
//     number of SET bits in its data and from what dc_status_unit holds;
//   dc_status_unit (ResetQ and SetQ, 32 entries each) supplies the new line;
//     the line the logical address used before goes to InitQ;
//   dc_reinit_sched (InitQ, 8 entries) re-initialises freed lines when
//     ResetQ or SetQ runs below th_init, off the critical path;
//   dc_pcm_seq issues ACT / READ or WRITE / PRE with the timing of the
//     chosen write kind (SET-only, RESET-only or baseline).
// Reads are served before writes unless the write queue is full (this
// design's choice; the paper does not give its read/write arbitration).
// A write falls back to overwriting unknown content in place when no known
// line is available or when InitQ has no room for the line it would free.
//
// Address map (this design's choice): physical line addresses are LADDR_W
// bits; the top SPARE_LINES physical lines are not part of the logical space
// and are handed to InitQ after reset, so the controller starts with a pool
// of free lines; a translation entry with its top bit clear means the
// logical line still sits at the physical line of the same number. The
// memory partition of a line is its top PART_W address bits.
//
// Interfaces: rd_req_* / wr_req_* valid/ready from the eDRAM side; rd_rsp_*
// returns read data in request order. pcm_* is the command port for reads and
// writes (data on pcm_wdata_o with the WRITE command, read data expected on
// pcm_rvalid_i/pcm_rdata_i before the access ends); init_* is the command
// port of the re-initialisation engine; at_* is the port to the AT partition.
// policy_i: 0 content-aware (default), 1 all-1s only, 2 all-0s only.
// Read-after-write ordering between the two queues is not enforced: the
// eDRAM cache is expected not to miss on a line whose eviction is still
// queued (the paper does not discuss it).
// Lint note: Verilator reports rst_n as used both asynchronously and
// synchronously. Every flop here resets asynchronously; the synchronous
// use is only the 'disable iff (!rst_n)' of the assertions, which are not
// logic.
module datacon_mc
  import dc_pkg::*;
#(
  parameter int unsigned LINE_BITS       = dc_pkg::DEF_LINE_BITS,
  parameter int unsigned LADDR_W         = dc_pkg::DEF_LADDR_W,
  parameter int unsigned PART_W          = dc_pkg::DEF_PART_W,
  parameter int unsigned ENTRY_W         = dc_pkg::DEF_ENTRY_W,
  parameter int unsigned RQ_DEPTH        = 16,
  parameter int unsigned WQ_DEPTH        = 16,
  parameter int unsigned SU_DEPTH        = 32,
  parameter int unsigned INITQ_DEPTH     = 8,
  parameter int unsigned TH_INIT         = 16,
  parameter int unsigned THRESH_PCT      = 60,
  parameter int unsigned LUT_SLOTS       = 2,
  parameter int unsigned LUT_SEG_ENTRIES = 4096,
  parameter int unsigned SPARE_LINES     = 64,
  parameter int unsigned T_RCD           = dc_pkg::DEF_T_RCD,
  parameter int unsigned T_RAS           = dc_pkg::DEF_T_RAS,
  parameter int unsigned T_RP            = dc_pkg::DEF_T_RP,
  parameter int unsigned T_BURST         = dc_pkg::DEF_T_BURST,
  parameter int unsigned T_WR_UNK        = dc_pkg::DEF_T_WR_UNK,
  parameter int unsigned T_WR_SET        = dc_pkg::DEF_T_WR_SET,
  parameter int unsigned T_WR_RESET      = dc_pkg::DEF_T_WR_RESET
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic [1:0]           policy_i,
  // read requests from the eDRAM side
  input  logic                 rd_req_valid_i,
  output logic                 rd_req_ready_o,
  input  logic [LADDR_W-1:0]   rd_req_addr_i,
  output logic                 rd_rsp_valid_o,
  output logic [LADDR_W-1:0]   rd_rsp_addr_o,
  output logic [LINE_BITS-1:0] rd_rsp_data_o,
  // write requests (evictions) from the eDRAM side
  input  logic                 wr_req_valid_i,
  output logic                 wr_req_ready_o,
  input  logic [LADDR_W-1:0]   wr_req_addr_i,
  input  logic [LINE_BITS-1:0] wr_req_data_i,
  // PCM command port for reads and writes
  output logic                 pcm_cmd_valid_o,
  output pcm_cmd_e             pcm_cmd_o,
  output logic [LADDR_W-1:0]   pcm_addr_o,
  output pcm_op_e              pcm_op_o,
  output logic [LINE_BITS-1:0] pcm_wdata_o,
  input  logic                 pcm_rvalid_i,
  input  logic [LINE_BITS-1:0] pcm_rdata_i,
  // PCM command port of the re-initialisation engine
  output logic                 init_cmd_valid_o,
  output pcm_cmd_e             init_cmd_o,
  output logic [LADDR_W-1:0]   init_addr_o,
  output logic                 init_ones_o,
  // address translation table in PCM
  output logic                 at_req_valid_o,
  input  logic                 at_req_ready_i,
  output logic                 at_req_write_o,
  output logic [LADDR_W-1:0]   at_req_idx_o,
  output logic [ENTRY_W-1:0]   at_req_wdata_o,
  input  logic                 at_rsp_valid_i,
  input  logic [ENTRY_W-1:0]   at_rsp_rdata_i,
  // observation
  output dc_stats_t            stats_o,
  output logic                 idle_o
);

  localparam int unsigned SU_CNT_W = $clog2(SU_DEPTH + 1);
  localparam int unsigned IQ_CNT_W = $clog2(INITQ_DEPTH + 1);
  localparam int unsigned SET_CNT_W = $clog2(LINE_BITS + 1);

  // ---------------------------------------------------------------- queues
  logic               rq_empty, rq_full, rq_pop;
  logic [LADDR_W-1:0] rq_head;
  logic               wq_empty, wq_full, wq_pop;
  logic [LADDR_W+LINE_BITS-1:0] wq_head;
  logic [$clog2(RQ_DEPTH+1)-1:0] rq_count;
  logic [$clog2(WQ_DEPTH+1)-1:0] wq_count;

  dc_fifo #(.WIDTH(LADDR_W), .DEPTH(RQ_DEPTH)) u_read_queue (
    .clk, .rst_n,
    .push_i (rd_req_valid_i && !rq_full),
    .data_i (rd_req_addr_i),
    .pop_i  (rq_pop),
    .head_o (rq_head),
    .empty_o(rq_empty),
    .full_o (rq_full),
    .count_o(rq_count)
  );

  dc_fifo #(.WIDTH(LADDR_W + LINE_BITS), .DEPTH(WQ_DEPTH)) u_write_queue (
    .clk, .rst_n,
    .push_i (wr_req_valid_i && !wq_full),
    .data_i ({wr_req_addr_i, wr_req_data_i}),
    .pop_i  (wq_pop),
    .head_o (wq_head),
    .empty_o(wq_empty),
    .full_o (wq_full),
    .count_o(wq_count)
  );

  assign rd_req_ready_o = !rq_full;
  assign wr_req_ready_o = !wq_full;

  // -------------------------------------------------------- request state
  typedef enum logic [2:0] {
    M_IDLE, M_LOOKUP, M_LWAIT, M_DECIDE, M_UPDATE, M_UWAIT, M_ISSUE, M_WAIT
  } mstate_e;

  mstate_e             mstate;
  logic                cur_write;
  logic [LADDR_W-1:0]  cur_laddr, cur_paddr;
  logic [LINE_BITS-1:0] cur_data, rdata_q;
  pcm_op_e             cur_op;

  // -------------------------------------------------------------- LUT
  logic               lut_req_valid, lut_req_ready, lut_req_write;
  logic [ENTRY_W-1:0] lut_wentry, lut_rsp_entry;
  logic               lut_rsp_valid, lut_rsp_hit, lut_miss, lut_wb;

  dc_lut #(
    .LADDR_W(LADDR_W), .ENTRY_W(ENTRY_W), .SLOTS(LUT_SLOTS),
    .SEG_ENTRIES(LUT_SEG_ENTRIES)
  ) u_lut (
    .clk, .rst_n,
    .req_valid_i   (lut_req_valid),
    .req_ready_o   (lut_req_ready),
    .req_write_i   (lut_req_write),
    .req_laddr_i   (cur_laddr),
    .req_wentry_i  (lut_wentry),
    .rsp_valid_o   (lut_rsp_valid),
    .rsp_entry_o   (lut_rsp_entry),
    .rsp_hit_o     (lut_rsp_hit),
    .at_req_valid_o(at_req_valid_o),
    .at_req_ready_i(at_req_ready_i),
    .at_req_write_o(at_req_write_o),
    .at_req_idx_o  (at_req_idx_o),
    .at_req_wdata_o(at_req_wdata_o),
    .at_rsp_valid_i(at_rsp_valid_i),
    .at_rsp_rdata_i(at_rsp_rdata_i),
    .miss_o        (lut_miss),
    .writeback_o   (lut_wb)
  );

  // -------------------------------------------- content selection and SU
  ow_kind_e            kind;
  logic                many_set;
  logic [SET_CNT_W-1:0] set_count;
  logic                zeros_avail, ones_avail, zeros_full, ones_full, need_init;
  logic [LADDR_W-1:0]  zeros_head, ones_head;
  logic [SU_CNT_W-1:0] zeros_count, ones_count;
  logic                su_alloc;
  logic                fill, fill_ones;
  logic [LADDR_W-1:0]  fill_addr;

  dc_ocs #(.LINE_BITS(LINE_BITS), .THRESH_PCT(THRESH_PCT)) u_ocs (
    .wdata_i      (cur_data),
    .zeros_avail_i(zeros_avail),
    .ones_avail_i (ones_avail),
    .policy_i     (policy_i),
    .kind_o       (kind),
    .many_set_o   (many_set),
    .set_count_o  (set_count)
  );

  dc_status_unit #(.ADDR_W(LADDR_W), .DEPTH(SU_DEPTH), .TH_INIT(TH_INIT)) u_su (
    .clk, .rst_n,
    .alloc_i      (su_alloc),
    .alloc_kind_i (kind),
    .zeros_head_o (zeros_head),
    .ones_head_o  (ones_head),
    .zeros_avail_o(zeros_avail),
    .ones_avail_o (ones_avail),
    .fill_i       (fill),
    .fill_ones_i  (fill_ones),
    .fill_addr_i  (fill_addr),
    .zeros_count_o(zeros_count),
    .ones_count_o (ones_count),
    .zeros_full_o (zeros_full),
    .ones_full_o  (ones_full),
    .need_init_o  (need_init)
  );

  // ----------------------------------------- InitQ and re-initialisation
  logic                free_push, remap_free, seed_push;
  logic [LADDR_W-1:0]  free_addr, seed_addr;
  logic                initq_full;
  logic [IQ_CNT_W-1:0] initq_count;
  logic                init_busy, init_issue, init_flip;
  logic [PART_W-1:0]   init_part;
  logic                rd_busy, wr_busy;
  logic [PART_W-1:0]   rd_part;

  // Seeding of the spare lines after reset.
  localparam int unsigned SEED_W = $clog2(SPARE_LINES + 1);
  logic [SEED_W-1:0] seed_cnt;
  assign seed_addr = LADDR_W'((64'd1 << LADDR_W) - 64'(SPARE_LINES) + 64'(seed_cnt));
  assign seed_push = (seed_cnt != SEED_W'(SPARE_LINES)) && !initq_full && !remap_free;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) seed_cnt <= '0;
    else if (seed_push) seed_cnt <= seed_cnt + 1'b1;
  end

  assign free_push = remap_free || seed_push;
  assign free_addr = remap_free ? cur_paddr : seed_addr;

  dc_reinit_sched #(
    .ADDR_W(LADDR_W), .PART_W(PART_W), .DEPTH(INITQ_DEPTH),
    .T_RCD(T_RCD), .T_RAS(T_RAS), .T_RP(T_RP), .T_BURST(T_BURST),
    .T_WR_UNK(T_WR_UNK), .T_WR_SET(T_WR_SET), .T_WR_RESET(T_WR_RESET)
  ) u_reinit (
    .clk, .rst_n,
    .free_i       (free_push),
    .free_addr_i  (free_addr),
    .initq_full_o (initq_full),
    .initq_count_o(initq_count),
    .need_init_i  (need_init),
    .zeros_count_i(8'(zeros_count)),
    .ones_count_i (8'(ones_count)),
    .zeros_full_i (zeros_full),
    .ones_full_i  (ones_full),
    .fill_o       (fill),
    .fill_ones_o  (fill_ones),
    .fill_addr_o  (fill_addr),
    .rq_empty_i   (rq_empty),
    .wq_empty_i   (wq_empty),
    .wr_busy_i    (wr_busy),
    .rd_busy_i    (rd_busy),
    .rd_part_i    (rd_part),
    .busy_o       (init_busy),
    .part_o       (init_part),
    .issue_o      (init_issue),
    .cmd_valid_o  (init_cmd_valid_o),
    .cmd_o        (init_cmd_o),
    .cmd_addr_o   (init_addr_o),
    .cmd_ones_o   (init_ones_o),
    .flip_o       (init_flip)
  );

  // ------------------------------------------------- PCM access sequencer
  logic    seq_start, seq_ready, seq_busy, seq_done;
  pcm_op_e seq_op;

  dc_pcm_seq #(
    .ADDR_W(LADDR_W), .T_RCD(T_RCD), .T_RAS(T_RAS), .T_RP(T_RP),
    .T_BURST(T_BURST), .T_WR_UNK(T_WR_UNK), .T_WR_SET(T_WR_SET),
    .T_WR_RESET(T_WR_RESET)
  ) u_seq (
    .clk, .rst_n,
    .start_i    (seq_start),
    .op_i       (cur_op),
    .addr_i     (cur_paddr),
    .ready_o    (seq_ready),
    .busy_o     (seq_busy),
    .done_o     (seq_done),
    .op_o       (seq_op),
    .addr_o     (pcm_addr_o),
    .cmd_valid_o(pcm_cmd_valid_o),
    .cmd_o      (pcm_cmd_o)
  );

  assign pcm_op_o    = seq_op;
  assign pcm_wdata_o = cur_data;
  assign rd_busy     = seq_busy && (seq_op == OP_READ);
  assign wr_busy     = (seq_busy && (seq_op != OP_READ)) ||
                       (mstate != M_IDLE && cur_write);
  assign rd_part     = pcm_addr_o[LADDR_W-1 -: PART_W];

  // ------------------------------------------------------ control FSM
  logic pick_write;
  assign pick_write = !wq_empty && (wq_full || rq_empty);

  logic [PART_W-1:0] cur_part;
  assign cur_part = cur_paddr[LADDR_W-1 -: PART_W];

  // Redirect only when a known line exists and InitQ can take the old line.
  logic remap_ok;
  assign remap_ok = (kind != OW_UNKNOWN) && !initq_full;

  assign rq_pop        = (mstate == M_IDLE) && !pick_write && !rq_empty;
  assign wq_pop        = (mstate == M_IDLE) && pick_write;
  assign lut_req_valid = (mstate == M_LOOKUP) || (mstate == M_UPDATE);
  assign lut_req_write = (mstate == M_UPDATE);
  assign su_alloc      = (mstate == M_DECIDE) && remap_ok;
  assign remap_free    = su_alloc;
  assign seq_start     = (mstate == M_ISSUE) && seq_ready &&
                         !(init_busy && init_part == cur_part);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      mstate     <= M_IDLE;
      cur_write  <= 1'b0;
      cur_laddr  <= '0;
      cur_paddr  <= '0;
      cur_data   <= '0;
      cur_op     <= OP_READ;
      lut_wentry <= '0;
    end else begin
      unique case (mstate)
        M_IDLE: begin
          if (pick_write) begin
            cur_write <= 1'b1;
            cur_laddr <= wq_head[LADDR_W+LINE_BITS-1 -: LADDR_W];
            cur_data  <= wq_head[LINE_BITS-1:0];
            mstate    <= M_LOOKUP;
          end else if (!rq_empty) begin
            cur_write <= 1'b0;
            cur_laddr <= rq_head;
            mstate    <= M_LOOKUP;
          end
        end
        M_LOOKUP: if (lut_req_ready) mstate <= M_LWAIT;
        M_LWAIT: if (lut_rsp_valid) begin
          cur_paddr <= lut_rsp_entry[ENTRY_MAPPED_BIT] ?
                       lut_rsp_entry[LADDR_W-1:0] : cur_laddr;
          if (cur_write) begin
            mstate <= M_DECIDE;
          end else begin
            cur_op <= OP_READ;
            mstate <= M_ISSUE;
          end
        end
        M_DECIDE: begin
          if (remap_ok) begin
            cur_paddr  <= (kind == OW_ZEROS) ? zeros_head : ones_head;
            lut_wentry <= ENTRY_W'(1) << ENTRY_MAPPED_BIT |
                          ENTRY_W'((kind == OW_ZEROS) ? zeros_head : ones_head);
            cur_op     <= (kind == OW_ZEROS) ? OP_WR_SET : OP_WR_RESET;
            mstate     <= M_UPDATE;
          end else begin
            cur_op <= OP_WR_UNK;
            mstate <= M_ISSUE;
          end
        end
        M_UPDATE: if (lut_req_ready) mstate <= M_UWAIT;
        M_UWAIT:  if (lut_rsp_valid) mstate <= M_ISSUE;
        M_ISSUE:  if (seq_start) mstate <= M_WAIT;
        M_WAIT:   if (seq_done) mstate <= M_IDLE;
        default:  mstate <= M_IDLE;
      endcase
    end
  end

  // Read data capture and response.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) rdata_q <= '0;
    else if (pcm_rvalid_i && rd_busy) rdata_q <= pcm_rdata_i;
  end

  assign rd_rsp_valid_o = (mstate == M_WAIT) && seq_done && !cur_write;
  assign rd_rsp_addr_o  = cur_laddr;
  assign rd_rsp_data_o  = (pcm_rvalid_i && rd_busy) ? pcm_rdata_i : rdata_q;

  // ------------------------------------------------------------ counters
  dc_stats_t stats;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      stats <= '0;
    end else begin
      if (rd_rsp_valid_o) stats.reads <= stats.reads + 1;
      if (mstate == M_DECIDE) begin
        if (remap_ok && kind == OW_ZEROS) stats.writes_zeros <= stats.writes_zeros + 1;
        if (remap_ok && kind == OW_ONES)  stats.writes_ones  <= stats.writes_ones + 1;
        if (!remap_ok) stats.writes_unknown <= stats.writes_unknown + 1;
        if (kind != OW_UNKNOWN && initq_full)
          stats.no_initq_room <= stats.no_initq_room + 1;
        if (many_set) stats.writes_dense <= stats.writes_dense + 1;
        stats.set_bits <= stats.set_bits + 32'(set_count);
      end
      if (lut_rsp_valid && lut_rsp_hit) stats.lut_hits <= stats.lut_hits + 1;
      stats.rq_occ_sum    <= stats.rq_occ_sum + 32'(rq_count);
      stats.wq_occ_sum    <= stats.wq_occ_sum + 32'(wq_count);
      stats.initq_occ_sum <= stats.initq_occ_sum + 32'(initq_count);
      if (lut_miss && lut_req_ready) stats.lut_misses     <= stats.lut_misses + 1;
      if (lut_wb && lut_req_ready)   stats.lut_writebacks <= stats.lut_writebacks + 1;
      if (init_issue) stats.reinits <= stats.reinits + 1;
      if (init_issue && rd_busy) stats.reinits_in_read <= stats.reinits_in_read + 1;
      if (init_flip) stats.init_flips <= stats.init_flips + 1;
    end
  end
  assign stats_o = stats;

  assign idle_o = (mstate == M_IDLE) && rq_empty && wq_empty && !init_busy &&
                  !seq_busy;

endmodule
