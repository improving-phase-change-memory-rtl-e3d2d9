// dc_fifo: synchronous first-in first-out queue with an occupancy count.
//
// Used for the controller's read queue and write queue (16 entries each by
// default, as in the evaluated memory controller) and inside the address
// status unit and the re-initialisation queue. Entries live in a circular
// array addressed by a read and a write pointer; the count is kept in a
// register so that the status unit can compare it against its threshold.
//
// Interface: push when push_i && !full_o; pop when pop_i && !empty_o. The head
// entry is visible on head_o whenever empty_o is low (first-word fall-through).
// Pushing and popping in the same cycle is allowed, also when full.
// Timing: an entry pushed in cycle n is at the head from cycle n+1 if the
// queue was empty. Reset empties the queue; the array itself is not cleared.
// Depth, width and the fall-through behaviour are this design's choices.
// Lint note: Verilator reports rst_n as used both asynchronously and
// synchronously. Every flop here resets asynchronously; the synchronous
// use is only the 'disable iff (!rst_n)' of the assertions, which are not
// logic.
module dc_fifo #(
  parameter int unsigned WIDTH = 32,
  parameter int unsigned DEPTH = 16,
  localparam int unsigned PTR_W = (DEPTH > 1) ? $clog2(DEPTH) : 1,
  localparam int unsigned CNT_W = $clog2(DEPTH + 1)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             push_i,
  input  logic [WIDTH-1:0] data_i,
  input  logic             pop_i,
  output logic [WIDTH-1:0] head_o,
  output logic             empty_o,
  output logic             full_o,
  output logic [CNT_W-1:0] count_o
);

  logic [WIDTH-1:0] mem [DEPTH];
  logic [PTR_W-1:0] rd_ptr, wr_ptr;
  logic [CNT_W-1:0] count;

  logic do_push, do_pop;
  assign do_pop  = pop_i && (count != '0);
  assign do_push = push_i && ((count != CNT_W'(DEPTH)) || do_pop);

  function automatic logic [PTR_W-1:0] next_ptr(input logic [PTR_W-1:0] p);
    return (p == PTR_W'(DEPTH - 1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk) begin
    if (do_push) mem[wr_ptr] <= data_i;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_ptr <= '0;
      wr_ptr <= '0;
      count  <= '0;
    end else begin
      if (do_push) wr_ptr <= next_ptr(wr_ptr);
      if (do_pop)  rd_ptr <= next_ptr(rd_ptr);
      case ({do_push, do_pop})
        2'b10:   count <= count + 1'b1;
        2'b01:   count <= count - 1'b1;
        default: count <= count;
      endcase
    end
  end

  assign head_o  = mem[rd_ptr];
  assign empty_o = (count == '0);
  assign full_o  = (count == CNT_W'(DEPTH));
  assign count_o = count;

  // A push into a full queue without a simultaneous pop is lost.
  a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n)
    push_i |-> (!full_o || pop_i));

endmodule
