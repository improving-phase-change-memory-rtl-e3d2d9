// tb_dc_lut: self-checking test of the cached translation table. The LUT and
// a behavioural AT together must act as one translation memory: every lookup
// must return the last entry written for that logical line, whether it was
// resident or had to be fetched (and possibly written back earlier). A model
// of the LRU residency predicts the hit flag, the number of misses and the
// number of dirty write-backs; a hit must answer 2 cycles after it is taken.
// Reduced size: 64 entries per partition, 12-bit logical addresses, with the
// default 2 slots.
module tb_dc_lut;
  localparam int AW = 12, EW = 32, SEG = 64;
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
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ------------------------------------------------------------ DUT
  logic rv, rr, rw, sv, sh, av, ar, aw, asv, miss, wb;
  logic [AW-1:0] ra, at_idx;
  logic [EW-1:0] re, se, ad, asd;
  dc_lut #(.LADDR_W(AW), .ENTRY_W(EW), .SLOTS(2), .SEG_ENTRIES(SEG)) dut (
    .clk, .rst_n, .req_valid_i(rv), .req_ready_o(rr), .req_write_i(rw),
    .req_laddr_i(ra), .req_wentry_i(re), .rsp_valid_o(sv), .rsp_entry_o(se),
    .rsp_hit_o(sh), .at_req_valid_o(av), .at_req_ready_i(ar), .at_req_write_o(aw),
    .at_req_idx_o(at_idx), .at_req_wdata_o(ad), .at_rsp_valid_i(asv),
    .at_rsp_rdata_i(asd), .miss_o(miss), .writeback_o(wb));
  at_model #(.LADDR_W(AW), .ENTRY_W(EW), .LAT(3)) u_at (.clk, .rst_n,
    .req_valid(av), .req_ready(ar), .req_write(aw), .req_idx(at_idx), .req_wdata(ad),
    .rsp_valid(asv), .rsp_rdata(asd));

  // ---------------------------------------------------------- model
  logic [EW-1:0] ref_tab [int];
  int lru[$];          // resident partition tags, most recent first
  bit dirty_m [int];
  int exp_miss = 0, exp_wb = 0, n_miss = 0, n_wb = 0;

  always @(posedge clk) if (rst_n && rv && rr) begin
    if (miss) n_miss++;
    if (wb) n_wb++;
  end

  task automatic do_req(input bit write, input int addr, input logic [EW-1:0] val);
    int tag = addr / SEG;
    int pos = -1;
    bit exp_hit;
    int t0, t1;
    logic [EW-1:0] exp_old = ref_tab.exists(addr) ? ref_tab[addr] : '0;
    foreach (lru[i]) if (lru[i] == tag) pos = i;
    exp_hit = (pos >= 0);
    if (exp_hit) lru.delete(pos);
    else begin
      exp_miss++;
      if (lru.size() == 2) begin
        automatic int v = lru.pop_back();
        if (dirty_m[v]) exp_wb++;
      end
      dirty_m[tag] = 0;
    end
    lru.push_front(tag);
    if (write) begin dirty_m[tag] = 1; ref_tab[addr] = val; end

    @(negedge clk);
    rv = 1; rw = write; ra = AW'(addr); re = val;
    @(posedge clk);
    while (!rr) @(posedge clk);
    t0 = $time;
    @(negedge clk);
    rv = 0;
    while (!sv) @(negedge clk);
    t1 = $time;
    check(se == exp_old, $sformatf("entry %0d: %h vs %h", addr, se, exp_old));
    check(sh == exp_hit, $sformatf("hit flag addr %0d", addr));
    if (exp_hit) check((t1 - t0 + 5) / 10 == 2, $sformatf("hit latency %0d", (t1 - t0 + 5) / 10));
  endtask

  initial begin
    rv = 0; rw = 0; ra = 0; re = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 3000; n++) begin
      // mostly within three partitions, sometimes anywhere
      automatic int part = ($urandom_range(0, 9) < 8) ? $urandom_range(0, 2) : $urandom_range(0, (1 << AW) / SEG - 1);
      automatic int addr = part * SEG + $urandom_range(0, SEG - 1);
      automatic bit w = $urandom_range(0, 1);
      do_req(w, addr, {1'b1, 31'($urandom)});
    end
    // every write ever made must be readable again, from LUT or AT
    foreach (ref_tab[a]) do_req(0, a, '0);
    check(n_miss == exp_miss, $sformatf("misses %0d vs %0d", n_miss, exp_miss));
    check(n_wb == exp_wb, $sformatf("writebacks %0d vs %0d", n_wb, exp_wb));
    check(exp_wb > 10 && exp_miss > 20, "misses and write-backs exercised");
    $display("misses=%0d writebacks=%0d", n_miss, n_wb);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
