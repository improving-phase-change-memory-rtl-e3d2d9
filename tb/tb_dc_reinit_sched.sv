// tb_dc_reinit_sched: self-checking test of InitQ and the re-initialisation
// scheduler (8-entry InitQ, default timings). The state of the regular
// accesses (queues empty or not, a read or write in service and its
// partition) and the status-unit counts are driven at random. A model of
// InitQ predicts, cycle by cycle, whether a re-initialisation must start
// (threshold reached or InitQ full, and one of the two off-critical-path cases), which line
// and pattern it uses (stored bit, switched when that queue is full), and
// the pattern bit chosen when a line enters. The time from start to the
// hand-back to the status unit must be the write tRC of the pattern:
// 64 cycles for all-0s (RESET timing), 181 for all-1s (SET timing).
module tb_dc_reinit_sched;
  import dc_pkg::*;
  localparam int AW = 23, PW = 3, D = 8;
  logic clk = 0, rst_n = 0;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  logic free, ifull, need, zf, of, fill, fones, rqe, wqe, wrb, rdb, busy, issue, cv, cones, flip;
  logic [AW-1:0] faddr, filladdr, caddr;
  logic [3:0] icount;
  logic [7:0] zc, oc;
  logic [PW-1:0] rdp, part;
  pcm_cmd_e cmd;

  dc_reinit_sched dut (.clk, .rst_n, .free_i(free), .free_addr_i(faddr),
    .initq_full_o(ifull), .initq_count_o(icount), .need_init_i(need),
    .zeros_count_i(zc), .ones_count_i(oc), .zeros_full_i(zf), .ones_full_i(of),
    .fill_o(fill), .fill_ones_o(fones), .fill_addr_o(filladdr),
    .rq_empty_i(rqe), .wq_empty_i(wqe), .wr_busy_i(wrb), .rd_busy_i(rdb),
    .rd_part_i(rdp), .busy_o(busy), .part_o(part), .issue_o(issue),
    .cmd_valid_o(cv), .cmd_o(cmd), .cmd_addr_o(caddr), .cmd_ones_o(cones),
    .flip_o(flip));

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (300000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  typedef struct { logic [AW-1:0] a; bit ones; } ent_t;
  ent_t q[$];
  bit m_busy = 0;
  int issue_cyc, cyc = 0;
  ent_t inflight;
  int n_issue = 0, n_case_a = 0, n_case_b = 0, n_flip = 0, n_fill = 0;

  initial begin
    free = 0; faddr = 0; need = 0; zc = 0; oc = 0; zf = 0; of = 0;
    rqe = 1; wqe = 1; wrb = 0; rdb = 0; rdp = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (cyc = 0; cyc < 40000; cyc++) begin
      @(negedge clk);
      // random environment
      zc = 8'($urandom_range(0, 32)); oc = 8'($urandom_range(0, 32));
      if ($urandom_range(0, 9) == 0) zc = 32;
      if ($urandom_range(0, 9) == 0) oc = 32;
      zf = (zc == 32); of = (oc == 32);
      need = (zc < 16) || (oc < 16);
      rqe = $urandom_range(0, 1); wqe = $urandom_range(0, 3) != 0;
      wrb = $urandom_range(0, 4) == 0; rdb = $urandom_range(0, 1); rdp = PW'($urandom);
      free = (q.size() < D) && $urandom_range(0, 3) == 0;
      faddr = AW'($urandom);
      #1;
      begin
        automatic int p0 = 0, p1 = 0;
        automatic bit hint;
        automatic bit exp_issue, off;
        automatic logic [PW-1:0] hp;
        foreach (q[i]) if (q[i].ones) p1++; else p0++;
        hint = (oc + p1) < (zc + p0);
        check(ifull == (q.size() == D) && icount == q.size(), "InitQ occupancy");
        if (q.size() != 0) begin
          hp = q[0].a[AW-1 -: PW];
          off = wqe && !wrb && ((rqe && !(rdb && rdp == hp)) || (rdb && rdp != hp));
          exp_issue = (need || q.size() == D) && off && !m_busy && !(zf && of);
        end else exp_issue = 0;
        check(issue == exp_issue, $sformatf("issue %0b vs %0b", issue, exp_issue));
        if (issue && exp_issue) begin
          automatic bit use1 = q[0].ones;
          if (use1 && of) use1 = 0; else if (!use1 && zf) use1 = 1;
          check(flip == (use1 != q[0].ones), "flip");
          if (flip) n_flip++;
          if (rqe && !rdb) n_case_a++;
          if (rdb) n_case_b++;
          inflight = q[0]; inflight.ones = use1;
          void'(q.pop_front());
          m_busy = 1; issue_cyc = cyc; n_issue++;
        end
        if (free) begin
          automatic ent_t e;
          e.a = faddr; e.ones = hint;
          q.push_back(e);
        end
      end
      if (fill) begin
        n_fill++;
        check(m_busy, "fill without re-init");
        check(filladdr == inflight.a && fones == inflight.ones, "fill line and pattern");
        check(cyc - issue_cyc == (inflight.ones ? 181 : 64),
              $sformatf("re-init time %0d", cyc - issue_cyc));
        m_busy = 0;
      end
    end
    check(n_case_a > 10 && n_case_b > 10 && n_flip > 0 && n_fill > 20,
          $sformatf("coverage a=%0d b=%0d flip=%0d fill=%0d", n_case_a, n_case_b, n_flip, n_fill));
    $display("issued=%0d caseA=%0d caseB=%0d flips=%0d fills=%0d", n_issue, n_case_a, n_case_b, n_flip, n_fill);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
