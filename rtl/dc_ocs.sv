// dc_ocs: overwritten content selection.
//
// Decides which kind of content a PCM write should overwrite, from the write
// data alone (the old content is never read). It counts the SET bits ('1's)
// of the write line and follows the selection flowchart:
//   more than 60 % SET bits: all-1s location if one is available (RESET-only,
//     best for latency and energy), else all-0s (SET-only, still faster than
//     unknown), else unknown content;
//   60 % or fewer SET bits:  all-0s location if available (SET-only, best for
//     energy), else all-1s (RESET-only, best for latency), else unknown.
// The 60 % crossover, the two availability tests and their order are the
// paper's. A write with exactly 60 % SET bits takes the "not more than 60 %"
// branch, as the flowchart's "> 60 % SET bits?" test prints it.
//
// policy_i selects the operating mode: POL_AWARE is the content-aware policy
// above; POL_ONES always tries all-1s (the configuration proposed for data
// encrypted inside the memory, where the data gives no useful hint) and
// POL_ZEROS always tries all-0s; both fall back to unknown content.
//
// Interface and timing: purely combinational. zeros_avail_i / ones_avail_i
// say whether the address status unit holds an all-0s / all-1s line.
// The popcount is built as 64-bit chunk counts (one adder chain per chunk)
// summed by a second chain, which keeps each elaboration loop short; how it
// is built is this design's choice.
module dc_ocs
  import dc_pkg::*;
#(
  parameter int unsigned LINE_BITS  = dc_pkg::DEF_LINE_BITS,
  parameter int unsigned THRESH_PCT = 60,
  localparam int unsigned CNT_W = $clog2(LINE_BITS + 1)
) (
  input  logic [LINE_BITS-1:0] wdata_i,
  input  logic                 zeros_avail_i,
  input  logic                 ones_avail_i,
  input  logic [1:0]           policy_i,      // 0 aware, 1 all-1s, 2 all-0s
  output ow_kind_e             kind_o,
  output logic                 many_set_o,    // more than THRESH_PCT % SET bits
  output logic [CNT_W-1:0]     set_count_o
);

  localparam logic [1:0] POL_AWARE = 2'd0;
  localparam logic [1:0] POL_ONES  = 2'd1;
  localparam logic [1:0] POL_ZEROS = 2'd2;

  localparam int unsigned CHUNK  = 64;
  localparam int unsigned CHUNKS = (LINE_BITS + CHUNK - 1) / CHUNK;

  logic [CHUNKS*CHUNK-1:0] padded;
  logic [6:0]              chunk_cnt [CHUNKS];
  logic [CNT_W-1:0]        cnt;

  assign padded = (CHUNKS*CHUNK)'(wdata_i);

  for (genvar g = 0; g < CHUNKS; g++) begin : g_chunk
    always_comb begin
      chunk_cnt[g] = '0;
      for (int i = 0; i < CHUNK; i++)
        chunk_cnt[g] = chunk_cnt[g] + 7'(padded[g*CHUNK + i]);
    end
  end

  always_comb begin
    cnt = '0;
    for (int g = 0; g < CHUNKS; g++) cnt = cnt + CNT_W'(chunk_cnt[g]);
  end

  // cnt / LINE_BITS > THRESH_PCT / 100, in integers.
  localparam int unsigned PROD_W = CNT_W + 8;
  assign many_set_o = (PROD_W'(cnt) * PROD_W'(100)) >
                      (PROD_W'(LINE_BITS) * PROD_W'(THRESH_PCT));
  assign set_count_o = cnt;

  always_comb begin
    kind_o = OW_UNKNOWN;
    unique case (policy_i)
      POL_ONES:  kind_o = ones_avail_i  ? OW_ONES  : OW_UNKNOWN;
      POL_ZEROS: kind_o = zeros_avail_i ? OW_ZEROS : OW_UNKNOWN;
      POL_AWARE, 2'd3: begin
        if (many_set_o) begin
          if (ones_avail_i)       kind_o = OW_ONES;
          else if (zeros_avail_i) kind_o = OW_ZEROS;
        end else begin
          if (zeros_avail_i)      kind_o = OW_ZEROS;
          else if (ones_avail_i)  kind_o = OW_ONES;
        end
      end
    endcase
  end

endmodule
