// tb_dc_ocs: self-checking test of the overwritten content selection at the
// full 8192-bit line. Lines with a chosen number of SET bits (around the 60 %
// crossover of 4915.2 bits, plus random counts) are applied with every
// combination of queue availability and policy; the expected choice is
// worked out from the selection flowchart written out separately here.
// The unit is combinational, so each case is checked 1 time unit after it
// is applied. The 60 % crossover and the preference order come from the
// design's flowchart; the fixed policies are its all-0s / all-1s modes.
module tb_dc_ocs;
  import dc_pkg::*;
  localparam int N = 8192;
  logic [N-1:0] wdata;
  logic za, oa;
  logic [1:0] pol;
  ow_kind_e kind;
  logic many;
  logic [13:0] cnt;
  int checks = 0, failures = 0;

  dc_ocs #(.LINE_BITS(N)) dut (.wdata_i(wdata), .zeros_avail_i(za), .ones_avail_i(oa),
    .policy_i(pol), .kind_o(kind), .many_set_o(many), .set_count_o(cnt));

  function automatic ow_kind_e expect_kind(int ones, bit z, bit o, int p);
    bit gt = (ones * 10 > N * 6);
    if (p == 1) return o ? OW_ONES : OW_UNKNOWN;
    if (p == 2) return z ? OW_ZEROS : OW_UNKNOWN;
    if (gt) return o ? OW_ONES : (z ? OW_ZEROS : OW_UNKNOWN);
    return z ? OW_ZEROS : (o ? OW_ONES : OW_UNKNOWN);
  endfunction

  task automatic make_line(int ones);
    int idx[$];
    wdata = '0;
    for (int i = 0; i < N; i++) idx.push_back(i);
    idx.shuffle();
    for (int i = 0; i < ones; i++) wdata[idx[i]] = 1'b1;
  endtask

  initial begin
    automatic int counts[$] = '{0, 1, 4915, 4916, 4917, 8191, 8192, 3000, 6000};
    for (int r = 0; r < 20; r++) counts.push_back($urandom_range(0, N));
    foreach (counts[c]) begin
      make_line(counts[c]);
      for (int p = 0; p < 3; p++)
        for (int a = 0; a < 4; a++) begin
          za = a[0]; oa = a[1]; pol = 2'(p);
          #1;
          checks++;
          if (kind != expect_kind(counts[c], za, oa, p) || cnt != 14'(counts[c]) ||
              many != (counts[c] * 10 > N * 6)) begin
            failures++;
            $display("FAIL ones=%0d z=%0b o=%0b pol=%0d kind=%s cnt=%0d",
                     counts[c], za, oa, p, kind.name(), cnt);
          end
        end
    end
    // the 8-bit example of the paper scaled: 1 of 8 bits SET -> all-0s
    wdata = '0;
    for (int i = 0; i < N; i += 8) wdata[i+5] = 1'b1;
    za = 1; oa = 1; pol = 0; #1;
    checks++;
    if (kind != OW_ZEROS) begin failures++; $display("FAIL sparse line"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
