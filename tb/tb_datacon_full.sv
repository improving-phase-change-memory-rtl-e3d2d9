// tb_datacon_full: the controller with every parameter at its default
// (1 KB lines, 2^23 physical lines, 16-entry read and write queues, 32-entry
// ResetQ/SetQ, 8-entry InitQ, th_init 16, 2 LUT partitions of 4096 entries,
// 64 spare lines) taken through complete operations against the behavioural
// PCM rank and translation table. After the spare lines have been
// initialised, it writes a sparse line (10 % SET bits, expected to go to an
// all-0s line with SET-only timing) and a dense line (90 % SET bits, expected
// to go to an all-1s line with RESET-only timing) into one LUT partition,
// reads both back, then touches two more partitions so that the first is
// evicted with a write-back of its 4096 entries, and reads everything again.
// The PCM model checks command timing and that SET-only / RESET-only writes
// only land on all-0s / all-1s lines.
module tb_datacon_full;
  import dc_pkg::*;
  localparam int LB = DEF_LINE_BITS, AW = DEF_LADDR_W;
  logic clk = 0, rst_n = 0;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [1:0] policy;
  logic rqv, rqr, rsv, wqv, wqr;
  logic [AW-1:0] rqa, rsa, wqa;
  logic [LB-1:0] rsd, wqd;
  logic pcv, prv, icv, ione, atv, atr, atw, atrv, idle;
  pcm_cmd_e pc, ic;
  logic [AW-1:0] pa, ia, ati;
  pcm_op_e pop_k;
  logic [LB-1:0] pwd, prd;
  logic [31:0] atwd, atrd;
  dc_stats_t st;

  datacon_mc dut (
    .clk, .rst_n, .policy_i(policy),
    .rd_req_valid_i(rqv), .rd_req_ready_o(rqr), .rd_req_addr_i(rqa),
    .rd_rsp_valid_o(rsv), .rd_rsp_addr_o(rsa), .rd_rsp_data_o(rsd),
    .wr_req_valid_i(wqv), .wr_req_ready_o(wqr), .wr_req_addr_i(wqa), .wr_req_data_i(wqd),
    .pcm_cmd_valid_o(pcv), .pcm_cmd_o(pc), .pcm_addr_o(pa), .pcm_op_o(pop_k),
    .pcm_wdata_o(pwd), .pcm_rvalid_i(prv), .pcm_rdata_i(prd),
    .init_cmd_valid_o(icv), .init_cmd_o(ic), .init_addr_o(ia), .init_ones_o(ione),
    .at_req_valid_o(atv), .at_req_ready_i(atr), .at_req_write_o(atw),
    .at_req_idx_o(ati), .at_req_wdata_o(atwd), .at_rsp_valid_i(atrv),
    .at_rsp_rdata_i(atrd), .stats_o(st), .idle_o(idle));

  pcm_model #(.LINE_BITS(LB), .ADDR_W(AW)) u_pcm (.clk,
    .m_valid(pcv), .m_cmd(pc), .m_addr(pa), .m_op(pop_k), .m_wdata(pwd),
    .m_rvalid(prv), .m_rdata(prd), .i_valid(icv), .i_cmd(ic), .i_addr(ia), .i_ones(ione));

  at_model #(.LADDR_W(AW), .ENTRY_W(32), .LAT(4), .READY_PCT(100)) u_at (.clk, .rst_n,
    .req_valid(atv), .req_ready(atr), .req_write(atw), .req_idx(ati), .req_wdata(atwd),
    .rsp_valid(atrv), .rsp_rdata(atrd));

  logic [LB-1:0] ref_mem [int];
  longint exp_set_bits = 0;
  int last_wr_kind = -1;
  longint wr_act = 0, wr_pre = 0;
  always @(posedge clk) if (pcv) begin
    if (pc == CMD_ACT) wr_act = $time / 10;
    if (pc == CMD_WR) last_wr_kind = pop_k;
    if (pc == CMD_PRE) wr_pre = $time / 10;
  end

  function automatic logic [LB-1:0] make_data(int pct);
    logic [LB-1:0] d;
    for (int i = 0; i < LB; i++) d[i] = ($urandom_range(0, 99) < pct);
    return d;
  endfunction

  task automatic do_write(int a, logic [LB-1:0] d);
    @(negedge clk);
    wqv = 1; wqa = AW'(a); wqd = d;
    @(posedge clk);
    while (!wqr) @(posedge clk);
    @(negedge clk);
    wqv = 0;
    ref_mem[a] = d;
    exp_set_bits += $countones(d);
    do @(negedge clk); while (!idle);
  endtask

  task automatic do_read(int a);
    logic [LB-1:0] exp = ref_mem.exists(a) ? ref_mem[a] : u_pcm.unknown_pattern(AW'(a));
    @(negedge clk);
    rqv = 1; rqa = AW'(a);
    @(posedge clk);
    while (!rqr) @(posedge clk);
    @(negedge clk);
    rqv = 0;
    while (!rsv) @(negedge clk);
    check(rsa == AW'(a) && rsd == exp, $sformatf("read back line %0d", a));
    do @(negedge clk); while (!idle);
  endtask

  initial begin
    policy = 0; rqv = 0; wqv = 0; rqa = 0; wqa = 0; wqd = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (12000) @(negedge clk);
    check(dut.zeros_count >= 16 && dut.ones_count >= 16, "status queues filled after reset");

    do_write(100, make_data(10));
    check(last_wr_kind == OP_WR_SET, "sparse line written SET-only over all-0s");
    check(wr_pre - wr_act == DEF_T_RCD + DEF_T_BURST + DEF_T_WR_SET, "SET-only write timing");
    do_write(101, make_data(90));
    check(last_wr_kind == OP_WR_RESET, "dense line written RESET-only over all-1s");
    check(wr_pre - wr_act == DEF_T_RCD + DEF_T_BURST + DEF_T_WR_RESET, "RESET-only write timing");
    do_read(100);
    do_read(101);
    do_read(102);                         // never written: original content
    do_read(2 * 4096 + 5);                // second partition
    do_write(2 * 4096 + 6, make_data(50));
    do_read(5 * 4096 + 1);                // third partition: evicts the first
    do_read(100);                         // refetched; evicts partition 2 (LRU)
    do_read(101);
    do_read(2 * 4096 + 6);
    check(st.lut_misses == 5, $sformatf("LUT misses %0d", st.lut_misses));
    check(st.lut_writebacks >= 1, "dirty partition written back");
    check(u_at.n_writes >= 4096, "write-back covered a whole partition");
    check(u_pcm.errors == 0, "PCM model errors");
    check(st.writes_dense == 1, "one write above 60 % SET bits");
    check(st.set_bits == 32'(exp_set_bits), "SET bits counted");
    check(st.lut_hits >= 4, "LUT hits counted");
    check(st.wq_occ_sum > 0 && st.rq_occ_sum > 0 && st.initq_occ_sum > 0, "queue occupancy integrated");
    $display("w_zeros=%0d w_ones=%0d w_unknown=%0d reinits=%0d lut_misses=%0d wb=%0d",
             st.writes_zeros, st.writes_ones, st.writes_unknown, st.reinits,
             st.lut_misses, st.lut_writebacks);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
