// tb_datacon_mc: end-to-end test of the data-content-aware PCM controller at
// reduced size (64-bit lines, 1024 physical lines, 16-entry LUT partitions,
// queue sizes, threshold and timings at their defaults). The controller is
// connected to a behavioural PCM rank and a behavioural translation table.
//
// A host process sends reads and writes with line data of varied SET-bit
// density, mostly inside a few LUT partitions and sometimes anywhere, in
// phases: mixed traffic with idle gaps, write bursts, read-heavy traffic,
// and the all-1s-only and all-0s-only policies. Checks:
//   - every read returns the last data written to that logical line (or its
//     original content), in request order;
//   - the PCM model finds no SET-only write over a line that is not all-0s,
//     no RESET-only write over a line that is not all-1s, no command spacing
//     different from the timing table, and no partition conflict between
//     the re-initialisation engine and regular accesses;
//   - in the all-1s-only phase no write is sent to an all-0s line and vice
//     versa;
//   - no free line is lost: at the end ResetQ + SetQ + InitQ hold all spare
//     lines;
//   - each mechanism happened at least once: writes over all-0s, all-1s and
//     unknown content, fallback for a full InitQ, LUT miss and dirty
//     write-back, re-initialisation both with empty queues and overlapping a
//     read in another partition, full write queue back-pressure. (The pattern
//     switch on a full status queue is reported; it is covered by the
//     scheduler's own test.)
module tb_datacon_mc;
  import dc_pkg::*;
  localparam int LB = 64, AW = 10, SEG = 16, SPARE = 64;
  localparam int NLOG = (1 << AW) - SPARE;
  logic clk = 0, rst_n = 0;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (3000000) @(posedge clk);
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

  datacon_mc #(.LINE_BITS(LB), .LADDR_W(AW), .LUT_SEG_ENTRIES(SEG),
               .SPARE_LINES(SPARE)) dut (
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

  at_model #(.LADDR_W(AW), .ENTRY_W(32), .LAT(4)) u_at (.clk, .rst_n,
    .req_valid(atv), .req_ready(atr), .req_write(atw), .req_idx(ati), .req_wdata(atwd),
    .rsp_valid(atrv), .rsp_rdata(atrd));

  // Every PCM command (either port) is one check: it fails when the PCM
  // model found a rule broken in that cycle (wrong write kind for the line's
  // content, command spacing, partition conflict).
  int seen_errors = 0;
  logic cmd_at_edge = 1'b0;
  always @(posedge clk) cmd_at_edge <= pcv || icv;
  always @(negedge clk) begin
    if (cmd_at_edge) begin
      checks++;
      if (u_pcm.errors != seen_errors) failures++;
    end
    seen_errors = u_pcm.errors;
  end

  // ------------------------------------------------------ reference state
  logic [LB-1:0] ref_mem [int];
  int wpend[$];                      // logical addresses of queued writes
  typedef struct { int a; logic [LB-1:0] d; } rexp_t;
  rexp_t rpend[$];
  int n_decided = 0, wq_full_seen = 0, n_reads_ok = 0;

  function automatic logic [LB-1:0] ref_read(int a);
    return ref_mem.exists(a) ? ref_mem[a] : u_pcm.unknown_pattern(AW'(a));
  endfunction

  // retire writes once the controller has decided them (in order)
  always @(posedge clk) begin
    automatic int dec = st.writes_zeros + st.writes_ones + st.writes_unknown;
    while (n_decided < dec) begin
      void'(wpend.pop_front());
      n_decided++;
    end
    if (rst_n && !wqr) wq_full_seen++;
    if (rsv) begin
      if (rpend.size() == 0) check(0, "unexpected read response");
      else begin
        check(rsa == AW'(rpend[0].a) && rsd == rpend[0].d,
              $sformatf("read %0d: got %h expected %h", rpend[0].a, rsd, rpend[0].d));
        void'(rpend.pop_front());
        n_reads_ok++;
      end
    end
  end

  function automatic bit in_wpend(int a);
    foreach (wpend[i]) if (wpend[i] == a) return 1;
    return 0;
  endfunction
  function automatic bit in_rpend(int a);
    foreach (rpend[i]) if (rpend[i].a == a) return 1;
    return 0;
  endfunction

  function automatic int pick_addr(int hot_pct);
    if ($urandom_range(0, 99) < hot_pct)
      return $urandom_range(0, 2) * SEG + $urandom_range(0, SEG - 1);
    return $urandom_range(0, NLOG - 1);
  endfunction

  function automatic logic [LB-1:0] make_data();
    int dens[5] = '{5, 30, 50, 75, 95};
    int p = dens[$urandom_range(0, 4)];
    logic [LB-1:0] d;
    for (int i = 0; i < LB; i++) d[i] = ($urandom_range(0, 99) < p);
    return d;
  endfunction

  task automatic send_write(int a);
    logic [LB-1:0] d = make_data();
    @(negedge clk);
    wqv = 1; wqa = AW'(a); wqd = d;
    @(posedge clk);
    while (!wqr) @(posedge clk);
    ref_mem[a] = d;
    wpend.push_back(a);
    @(negedge clk);
    wqv = 0;
  endtask

  task automatic send_read(int a);
    rexp_t e;
    @(negedge clk);
    rqv = 1; rqa = AW'(a);
    @(posedge clk);
    while (!rqr) @(posedge clk);
    e.a = a; e.d = ref_read(a);
    rpend.push_back(e);
    @(negedge clk);
    rqv = 0;
  endtask

  // one random request; write_pct in percent, gap up to max_gap idle cycles
  task automatic one_req(int write_pct, int hot_pct, int max_gap);
    int a;
    if ($urandom_range(0, 99) < write_pct) begin
      do a = pick_addr(hot_pct); while (in_rpend(a));
      send_write(a);
    end else begin
      do a = pick_addr(hot_pct); while (in_wpend(a));
      send_read(a);
    end
    if (max_gap > 0) repeat ($urandom_range(0, max_gap)) @(negedge clk);
  endtask

  task automatic wait_idle();
    do @(negedge clk); while (!(idle && rpend.size() == 0 && wpend.size() == 0));
    repeat (2) @(negedge clk);
  endtask

  dc_stats_t s0;
  initial begin
    policy = 0; rqv = 0; wqv = 0; rqa = 0; wqa = 0; wqd = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // let the spare lines be initialised
    repeat (20000) @(negedge clk);
    check(dut.zeros_count + dut.ones_count + dut.initq_count == SPARE &&
          dut.zeros_count >= 16 && dut.ones_count >= 16, "spare lines initialised");

    // phase A: mixed traffic with idle gaps
    for (int n = 0; n < 1200; n++) one_req(50, 95, (n % 200 < 150) ? 500 : 30);
    // phase B: write bursts
    for (int r = 0; r < 3; r++) begin
      for (int n = 0; n < 80; n++) one_req(100, 60, 0);
      wait_idle();
      repeat (30000) @(negedge clk);
    end
    // phase C: read-heavy traffic
    for (int n = 0; n < 600; n++) one_req(10, 70, 20);
    wait_idle();
    repeat (20000) @(negedge clk);

    // phase D: all-1s-only policy
    s0 = st;
    policy = 1;
    for (int n = 0; n < 150; n++) one_req(70, 80, 100);
    wait_idle();
    check(st.writes_zeros == s0.writes_zeros, "all-1s policy used an all-0s line");
    check(st.writes_ones > s0.writes_ones, "all-1s policy wrote all-1s lines");
    repeat (20000) @(negedge clk);
    // phase E: all-0s-only policy
    s0 = st;
    policy = 2;
    for (int n = 0; n < 150; n++) one_req(70, 80, 100);
    wait_idle();
    check(st.writes_ones == s0.writes_ones, "all-0s policy used an all-1s line");
    check(st.writes_zeros > s0.writes_zeros, "all-0s policy wrote all-0s lines");
    policy = 0;
    repeat (20000) @(negedge clk);

    // read back everything written
    foreach (ref_mem[a]) send_read(a);
    wait_idle();
    repeat (2000) @(negedge clk);
    check(dut.zeros_count + dut.ones_count + dut.initq_count == SPARE,
          $sformatf("free lines conserved: %0d + %0d + %0d", dut.zeros_count, dut.ones_count, dut.initq_count));
    check(u_pcm.errors == 0, $sformatf("PCM model errors: %0d", u_pcm.errors));
    check(rpend.size() == 0, "all reads answered");

    $display("reads=%0d w_zeros=%0d w_ones=%0d w_unknown=%0d no_initq_room=%0d",
             st.reads, st.writes_zeros, st.writes_ones, st.writes_unknown, st.no_initq_room);
    $display("lut_misses=%0d lut_writebacks=%0d reinits=%0d reinits_in_read=%0d flips=%0d wq_full_cycles=%0d",
             st.lut_misses, st.lut_writebacks, st.reinits, st.reinits_in_read, st.init_flips, wq_full_seen);
    $display("SET pulses=%0d RESET pulses=%0d", u_pcm.n_set_pulses, u_pcm.n_reset_pulses);
    check(st.writes_zeros > 0, "mechanism: write over all-0s");
    check(st.writes_ones > 0, "mechanism: write over all-1s");
    check(st.writes_unknown > 0, "mechanism: write over unknown content");
    check(st.no_initq_room > 0, "mechanism: InitQ full fallback");
    check(st.lut_misses > 0, "mechanism: LUT miss");
    check(st.lut_writebacks > 0, "mechanism: LUT dirty write-back");
    check(st.reinits - st.reinits_in_read > 0, "mechanism: re-init with queues empty");
    check(st.reinits_in_read > 0, "mechanism: re-init overlapping a read");
    check(wq_full_seen > 0, "mechanism: write queue full");
    check(n_reads_ok == st.reads, "read count");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
