// tb_dc_status_unit: self-checking test of the address status unit at its
// default size (ResetQ and SetQ of 32, th_init 16). Lines are filled into
// both queues and allocated again in random order; the test checks that
// each queue returns its own lines in order, that availability and counts
// follow, and that need_init is high exactly while a queue holds fewer than
// 16 lines.
module tb_dc_status_unit;
  import dc_pkg::*;
  localparam int AW = 23, D = 32, TH = 16;
  logic clk = 0, rst_n = 0;
  logic alloc, fill, fill_ones;
  ow_kind_e akind;
  logic [AW-1:0] fill_addr, zh, oh;
  logic za, oa, zf, of, need;
  logic [5:0] zc, oc;
  int checks = 0, failures = 0;
  logic [AW-1:0] mz[$], mo[$];

  dc_status_unit #(.ADDR_W(AW), .DEPTH(D), .TH_INIT(TH)) dut (.clk, .rst_n,
    .alloc_i(alloc), .alloc_kind_i(akind), .zeros_head_o(zh), .ones_head_o(oh),
    .zeros_avail_o(za), .ones_avail_o(oa), .fill_i(fill), .fill_ones_i(fill_ones),
    .fill_addr_i(fill_addr), .zeros_count_o(zc), .ones_count_o(oc),
    .zeros_full_o(zf), .ones_full_o(of), .need_init_o(need));

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    alloc = 0; fill = 0; fill_ones = 0; fill_addr = 0; akind = OW_ZEROS;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int cyc = 0; cyc < 3000; cyc++) begin
      @(negedge clk);
      check(zc == mz.size() && oc == mo.size(), "counts");
      check(za == (mz.size() != 0) && oa == (mo.size() != 0), "avail");
      check(zf == (mz.size() == D) && of == (mo.size() == D), "full");
      check(need == (mz.size() < TH || mo.size() < TH),
            $sformatf("need_init z=%0d o=%0d need=%0b", mz.size(), mo.size(), need));
      if (mz.size() != 0) check(zh == mz[0], "ResetQ head");
      if (mo.size() != 0) check(oh == mo[0], "SetQ head");
      fill = $urandom_range(0, 99) < ((cyc / 400) % 2 == 0 ? 60 : 35);
      fill_ones = $urandom_range(0, 1);
      fill_addr = AW'($urandom);
      if (fill && fill_ones && mo.size() == D) fill = 0;
      if (fill && !fill_ones && mz.size() == D) fill = 0;
      akind = $urandom_range(0, 1) ? OW_ONES : OW_ZEROS;
      alloc = $urandom_range(0, 99) < 45 &&
              ((akind == OW_ONES) ? mo.size() != 0 : mz.size() != 0);
      @(posedge clk);
      if (alloc) begin
        if (akind == OW_ONES) void'(mo.pop_front()); else void'(mz.pop_front());
      end
      if (fill) begin
        if (fill_ones) mo.push_back(fill_addr); else mz.push_back(fill_addr);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
