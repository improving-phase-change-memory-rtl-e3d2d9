// tb_dc_pcm_seq: self-checking test of the PCM command sequencer with its
// default timings. For each kind of access it records the cycle of every
// command and checks the spacing against the PCM timing table converted to
// 1066 MHz cycles: tRCD = 4, tRAS = 59, tRP = 1 (read tRC 60), and write
// tRC of 224 (unknown), 181 (SET, all-0s), 64 (RESET, all-1s). Accesses are
// also started back to back to check that ACT-to-ACT equals tRC.
module tb_dc_pcm_seq;
  import dc_pkg::*;
  logic clk = 0, rst_n = 0;
  logic start, ready, busy, done, cv;
  pcm_op_e op, op_o;
  pcm_cmd_e cmd;
  logic [22:0] addr, addr_o;
  int checks = 0, failures = 0;
  int cyc = 0;
  int t_act[$], t_cas[$], t_pre[$];
  pcm_cmd_e cas_kind[$];

  dc_pcm_seq dut (.clk, .rst_n, .start_i(start), .op_i(op), .addr_i(addr),
    .ready_o(ready), .busy_o(busy), .done_o(done), .op_o(op_o), .addr_o(addr_o),
    .cmd_valid_o(cv), .cmd_o(cmd));

  always #5 clk = ~clk;
  always @(posedge clk) begin
    cyc++;
    if (cv) begin
      if (cmd == CMD_ACT) t_act.push_back(cyc);
      if (cmd == CMD_RD || cmd == CMD_WR) begin t_cas.push_back(cyc); cas_kind.push_back(cmd); end
      if (cmd == CMD_PRE) t_pre.push_back(cyc);
    end
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  pcm_op_e ops[6] = '{OP_READ, OP_WR_UNK, OP_WR_SET, OP_WR_RESET, OP_INIT0, OP_INIT1};
  int pre_exp[6]  = '{59, 4+16+203, 4+16+160, 4+16+43, 4+16+43, 4+16+160};
  int rc_exp[6]   = '{60, 224, 181, 64, 64, 181};

  initial begin
    start = 0; op = OP_READ; addr = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // two passes: isolated accesses, then back-to-back ones
    for (int pass = 0; pass < 2; pass++) begin
      for (int k = 0; k < 6; k++) begin
        @(negedge clk);
        while (!ready) @(negedge clk);
        start = 1; op = ops[k]; addr = 23'(k * 1000 + 7);
        @(negedge clk);
        start = 0;
        check(busy && op_o == ops[k] && addr_o == 23'(k * 1000 + 7), "latched access");
        if (pass == 0) begin
          while (busy) @(negedge clk);
          repeat (3) @(negedge clk);
        end
      end
      while (busy) @(negedge clk);
    end
    repeat (5) @(negedge clk);
    check(t_act.size() == 12 && t_cas.size() == 12 && t_pre.size() == 12, "command counts");
    for (int i = 0; i < 12 && i < t_act.size(); i++) begin
      automatic int k = i % 6;
      check(t_cas[i] - t_act[i] == 4, $sformatf("tRCD op %0d: %0d", k, t_cas[i] - t_act[i]));
      check(cas_kind[i] == (ops[k] == OP_READ ? CMD_RD : CMD_WR), "RD/WR kind");
      check(t_pre[i] - t_act[i] == pre_exp[k],
            $sformatf("ACT->PRE op %0d: %0d vs %0d", k, t_pre[i] - t_act[i], pre_exp[k]));
      if (i >= 6 && i < 11)
        check(t_act[i+1] - t_act[i] == rc_exp[k],
              $sformatf("tRC op %0d: %0d vs %0d", k, t_act[i+1] - t_act[i], rc_exp[k]));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
