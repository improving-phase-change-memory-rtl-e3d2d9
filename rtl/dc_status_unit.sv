// dc_status_unit: address status unit (SU).
//
// Holds the physical lines that are ready to be overwritten with known
// content. It contains two queues: ResetQ with lines initialised to all-0s
// and SetQ with lines initialised to all-1s, 32 entries each as in the paper.
// A write that has chosen OW_ZEROS takes the head of ResetQ, one that has
// chosen OW_ONES takes the head of SetQ. A line whose re-initialisation has
// finished is pushed into the queue matching its new content.
//
// The unit also compares both occupancies with the initialisation threshold
// th_init (16 in the paper): need_init_o rises whenever either queue holds
// fewer lines than that. The paper gives the two queues, their depth and the
// threshold.
//
// Interface: alloc_i with alloc_kind_i pops one line in the same cycle; the
// address to use is zeros_head_o / ones_head_o, valid while the matching
// *_avail_o is high. fill_i with fill_ones_i and fill_addr_i pushes one line.
// Timing: a pushed line becomes available in the next cycle.
// Lint note: Verilator reports rst_n as used both asynchronously and
// synchronously. Every flop here resets asynchronously; the synchronous
// use is only the 'disable iff (!rst_n)' of the assertions, which are not
// logic.
module dc_status_unit
  import dc_pkg::*;
#(
  parameter int unsigned ADDR_W  = dc_pkg::DEF_LADDR_W,
  parameter int unsigned DEPTH   = 32,
  parameter int unsigned TH_INIT = 16,
  localparam int unsigned CNT_W = $clog2(DEPTH + 1)
) (
  input  logic              clk,
  input  logic              rst_n,
  // allocation by a write
  input  logic              alloc_i,
  input  ow_kind_e          alloc_kind_i,
  output logic [ADDR_W-1:0] zeros_head_o,
  output logic [ADDR_W-1:0] ones_head_o,
  output logic              zeros_avail_o,
  output logic              ones_avail_o,
  // refill from a finished re-initialisation
  input  logic              fill_i,
  input  logic              fill_ones_i,
  input  logic [ADDR_W-1:0] fill_addr_i,
  // occupancy and threshold status
  output logic [CNT_W-1:0]  zeros_count_o,
  output logic [CNT_W-1:0]  ones_count_o,
  output logic              zeros_full_o,
  output logic              ones_full_o,
  output logic              need_init_o
);

  logic z_empty, o_empty;

  dc_fifo #(.WIDTH(ADDR_W), .DEPTH(DEPTH)) u_resetq (
    .clk, .rst_n,
    .push_i (fill_i && !fill_ones_i),
    .data_i (fill_addr_i),
    .pop_i  (alloc_i && alloc_kind_i == OW_ZEROS),
    .head_o (zeros_head_o),
    .empty_o(z_empty),
    .full_o (zeros_full_o),
    .count_o(zeros_count_o)
  );

  dc_fifo #(.WIDTH(ADDR_W), .DEPTH(DEPTH)) u_setq (
    .clk, .rst_n,
    .push_i (fill_i && fill_ones_i),
    .data_i (fill_addr_i),
    .pop_i  (alloc_i && alloc_kind_i == OW_ONES),
    .head_o (ones_head_o),
    .empty_o(o_empty),
    .full_o (ones_full_o),
    .count_o(ones_count_o)
  );

  assign zeros_avail_o = !z_empty;
  assign ones_avail_o  = !o_empty;

  assign need_init_o = (zeros_count_o < CNT_W'(TH_INIT)) ||
                       (ones_count_o  < CNT_W'(TH_INIT));

  a_alloc_avail: assert property (@(posedge clk) disable iff (!rst_n)
    alloc_i |-> ((alloc_kind_i == OW_ZEROS && !z_empty) ||
                 (alloc_kind_i == OW_ONES  && !o_empty)));

endmodule
