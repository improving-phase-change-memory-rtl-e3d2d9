// dc_reinit_sched: initialisation queue (InitQ) and re-initialisation
// scheduler.
//
// Every write that is redirected to a known-content line frees the physical
// line the logical address used before; that line is recorded in InitQ
// (8 entries, as in the paper) with one bit naming the pattern to write back
// into it (0 = all-0s, 1 = all-1s). The scheduler takes the head of InitQ and
// re-initialises it when
//   - the address status unit reports that ResetQ or SetQ holds fewer lines
//     than the threshold th_init (need_init_i), or InitQ is full, and
//   - the access stays off the critical path, following the paper's two
//     cases: (a) the read and write queues are both empty, or (b) the write
//     queue is empty and a read is being served in a different memory
//     partition than the line to re-initialise.
// In both cases this design also requires that no write is in service and
// that a read in service is in a different partition, so the two accesses
// never meet in one partition (the paper does not say what happens then).
// The trigger on a full InitQ is this design's addition: without it InitQ can
// fill up while both status queues sit at or above th_init, and from then on
// no write could be redirected (a redirected write must put its old line in
// InitQ). When the re-initialisation finishes, the line is handed to the
// status unit.
// The bit is chosen when the line enters InitQ: the pattern whose queue would
// hold fewer lines once every line waiting in InitQ has been re-initialised
// (ties go to all-0s). If the queue the stored bit names is full at issue time, the
// other pattern is used instead, so that no line is lost. Both rules are this
// design's choices; the paper only says the entry holds the bit.
//
// The re-initialisation is carried out by its own PCM command sequencer, so
// it can overlap a read in another partition (partition-level parallelism).
// The memory partition of a line is its top PART_W physical address bits
// (this design's choice of address map).
//
// Timing: the InitQ head is issued in the cycle the conditions hold; its ACT
// command appears one cycle later and fill_o pulses in the sequencer's last
// cycle.
// Lint note: Verilator reports rst_n as used both asynchronously and
// synchronously. Every flop here resets asynchronously; the synchronous
// use is only the 'disable iff (!rst_n)' of the assertions, which are not
// logic.
module dc_reinit_sched
  import dc_pkg::*;
#(
  parameter int unsigned ADDR_W     = dc_pkg::DEF_LADDR_W,
  parameter int unsigned PART_W     = dc_pkg::DEF_PART_W,
  parameter int unsigned DEPTH      = 8,
  parameter int unsigned T_RCD      = dc_pkg::DEF_T_RCD,
  parameter int unsigned T_RAS      = dc_pkg::DEF_T_RAS,
  parameter int unsigned T_RP       = dc_pkg::DEF_T_RP,
  parameter int unsigned T_BURST    = dc_pkg::DEF_T_BURST,
  parameter int unsigned T_WR_UNK   = dc_pkg::DEF_T_WR_UNK,
  parameter int unsigned T_WR_SET   = dc_pkg::DEF_T_WR_SET,
  parameter int unsigned T_WR_RESET = dc_pkg::DEF_T_WR_RESET,
  localparam int unsigned CNT_W = $clog2(DEPTH + 1)
) (
  input  logic              clk,
  input  logic              rst_n,
  // freed lines
  input  logic              free_i,
  input  logic [ADDR_W-1:0] free_addr_i,
  output logic              initq_full_o,
  output logic [CNT_W-1:0]  initq_count_o,
  // status unit
  input  logic              need_init_i,
  input  logic [7:0]        zeros_count_i,
  input  logic [7:0]        ones_count_i,
  input  logic              zeros_full_i,
  input  logic              ones_full_i,
  output logic              fill_o,
  output logic              fill_ones_o,
  output logic [ADDR_W-1:0] fill_addr_o,
  // state of the regular accesses
  input  logic              rq_empty_i,
  input  logic              wq_empty_i,
  input  logic              wr_busy_i,
  input  logic              rd_busy_i,
  input  logic [PART_W-1:0] rd_part_i,
  // re-initialisation access in flight
  output logic              busy_o,
  output logic [PART_W-1:0] part_o,
  output logic              issue_o,     // pulses when a re-init starts
  output logic              cmd_valid_o,
  output pcm_cmd_e          cmd_o,
  output logic [ADDR_W-1:0] cmd_addr_o,
  output logic              cmd_ones_o,  // pattern being written
  output logic              flip_o       // pulses when the stored bit was overridden
);

  logic [ADDR_W:0] head;
  logic            empty;
  logic            issue;
  logic            hint_ones;
  logic [7:0]      pend0, pend1;   // lines waiting for each pattern

  dc_fifo #(.WIDTH(ADDR_W + 1), .DEPTH(DEPTH)) u_initq (
    .clk, .rst_n,
    .push_i (free_i),
    .data_i ({hint_ones, free_addr_i}),
    .pop_i  (issue),
    .head_o (head),
    .empty_o(empty),
    .full_o (initq_full_o),
    .count_o(initq_count_o)
  );

  logic [ADDR_W-1:0] head_addr;
  logic [PART_W-1:0] head_part;
  logic              head_ones, use_ones;
  assign head_addr = head[ADDR_W-1:0];
  assign head_ones = head[ADDR_W];
  assign head_part = head_addr[ADDR_W-1 -: PART_W];
  always_comb begin
    use_ones = head_ones;
    if (head_ones && ones_full_i)        use_ones = 1'b0;
    else if (!head_ones && zeros_full_i) use_ones = 1'b1;
  end

  logic off_path, seq_busy, seq_done, seq_ready;
  pcm_op_e seq_op;
  assign off_path = wq_empty_i && !wr_busy_i &&
                    ((rq_empty_i && !(rd_busy_i && rd_part_i == head_part)) ||
                     (rd_busy_i && rd_part_i != head_part));

  // One re-initialisation in flight at a time.
  assign issue = !empty && (need_init_i || initq_full_o) && off_path && !seq_busy &&
                 !(zeros_full_i && ones_full_i);

  dc_pcm_seq #(
    .ADDR_W(ADDR_W), .T_RCD(T_RCD), .T_RAS(T_RAS), .T_RP(T_RP),
    .T_BURST(T_BURST), .T_WR_UNK(T_WR_UNK), .T_WR_SET(T_WR_SET),
    .T_WR_RESET(T_WR_RESET)
  ) u_seq (
    .clk, .rst_n,
    .start_i    (issue),
    .op_i       (use_ones ? OP_INIT1 : OP_INIT0),
    .addr_i     (head_addr),
    .ready_o    (seq_ready),
    .busy_o     (seq_busy),
    .done_o     (seq_done),
    .op_o       (seq_op),
    .addr_o     (cmd_addr_o),
    .cmd_valid_o(cmd_valid_o),
    .cmd_o      (cmd_o)
  );

  // Pattern hint for a line entering InitQ.
  assign hint_ones = (ones_count_i + pend1) < (zeros_count_i + pend0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pend0 <= '0;
      pend1 <= '0;
    end else begin
      pend0 <= pend0 + 8'(free_i && !hint_ones) - 8'(issue && !head_ones);
      pend1 <= pend1 + 8'(free_i &&  hint_ones) - 8'(issue && head_ones);
    end
  end

  assign flip_o      = issue && (use_ones != head_ones);
  assign busy_o      = seq_busy;
  assign part_o      = cmd_addr_o[ADDR_W-1 -: PART_W];
  assign issue_o     = issue;
  assign cmd_ones_o  = (seq_op == OP_INIT1);
  assign fill_o      = seq_done;
  assign fill_ones_o = (seq_op == OP_INIT1);
  assign fill_addr_o = cmd_addr_o;

  a_issue_when_ready: assert property (@(posedge clk) disable iff (!rst_n)
    issue |-> seq_ready);

  a_no_free_when_full: assert property (@(posedge clk) disable iff (!rst_n)
    free_i |-> !initq_full_o);

endmodule
