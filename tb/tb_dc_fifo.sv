// tb_dc_fifo: self-checking test of dc_fifo at the read/write queue size
// (16 entries). Random pushes and pops are compared with a queue model:
// head value, count, empty and full are checked every cycle, including
// simultaneous push and pop on a full queue. At each falling edge the
// outputs are compared with the model and the next inputs applied. The depth
// is the controller's read and write queue size; the handshake rules checked
// here are this design's own.
module tb_dc_fifo;
  localparam int W = 32, D = 16;
  logic clk = 0, rst_n = 0;
  logic push, pop, empty, full;
  logic [W-1:0] din, head;
  logic [$clog2(D+1)-1:0] count;
  int checks = 0, failures = 0;
  logic [W-1:0] model[$];

  dc_fifo #(.WIDTH(W), .DEPTH(D)) dut (.clk, .rst_n, .push_i(push), .data_i(din),
    .pop_i(pop), .head_o(head), .empty_o(empty), .full_o(full), .count_o(count));

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    push = 0; pop = 0; din = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int cyc = 0; cyc < 4000; cyc++) begin
      @(negedge clk);
      check(count == model.size(), $sformatf("count %0d vs %0d", count, model.size()));
      check(empty == (model.size() == 0), "empty");
      check(full == (model.size() == D), "full");
      if (model.size() != 0) check(head == model[0], $sformatf("head %h vs %h", head, model[0]));
      // phases: fill-biased, drain-biased, mixed
      push = ($urandom_range(0, 99) < ((cyc / 500) % 2 == 0 ? 70 : 30));
      pop  = ($urandom_range(0, 99) < ((cyc / 500) % 2 == 0 ? 30 : 70));
      if (full && !pop) push = 0;
      din = $urandom;
      @(posedge clk);
      if (pop && model.size() != 0) void'(model.pop_front());
      if (push) model.push_back(din);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
