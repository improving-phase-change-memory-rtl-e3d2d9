// dc_pkg: types and constants shared by the data-content-aware PCM write
// controller.
//
// The controller redirects each PCM write to a line that is known to hold
// all-0s or all-1s, so that only one programming direction (SET-only or
// RESET-only) is needed. This package defines the overwritten-content kinds,
// the PCM command encoding, the translation-entry layout and the PCM timing
// defaults in memory-clock cycles.
//
// Timing: every PCM timing below is the nanosecond value of the PCM timing
// table rounded to the nearest cycle of the 1066 MHz memory clock
// (0.938 ns per cycle). Read: tRCD 3.75 ns -> 4, tRAS 55.25 ns -> 59,
// tRP 1 ns -> 1 (tRC 56.25 ns -> 60). Write: tBURST 15 ns -> 16,
// tWR 150 ns (SET, all-0s target) -> 160, 40 ns (RESET, all-1s target) -> 43,
// 190 ns (unknown target) -> 203. The table prints tRCD = 75 ns for a write to
// unknown content, but also tRC = 209.75 ns = 3.75 + 15 + 190 + 1 for it, and
// the quoted 71.5 % / 19 % latency savings only hold for 209.75 ns; this design
// follows tRC and uses the 3.75 ns tRCD for every command.
// Lint note: a module that imports this package but uses only some of its
// constants gets an 'unused parameter' report for the others; they are the
// shared defaults of all modules.
package dc_pkg;

  // Kind of content a write overwrites (output of content selection).
  typedef enum logic [1:0] {
    OW_UNKNOWN = 2'd0,  // write in place, full compare/SET/compare/RESET
    OW_ZEROS   = 2'd1,  // target line holds all-0s: SET-only write
    OW_ONES    = 2'd2   // target line holds all-1s: RESET-only write
  } ow_kind_e;

  // Commands the controller issues to a PCM rank.
  typedef enum logic [1:0] {
    CMD_ACT = 2'd0,
    CMD_RD  = 2'd1,
    CMD_WR  = 2'd2,
    CMD_PRE = 2'd3
  } pcm_cmd_e;

  // Kind of operation a PCM command sequencer performs.
  typedef enum logic [2:0] {
    OP_READ     = 3'd0,
    OP_WR_UNK   = 3'd1,  // overwrite unknown content (baseline write timing)
    OP_WR_SET   = 3'd2,  // overwrite all-0s, SET pulses only
    OP_WR_RESET = 3'd3,  // overwrite all-1s, RESET pulses only
    OP_INIT0    = 3'd4,  // re-initialise a line to all-0s (RESET every cell)
    OP_INIT1    = 3'd5   // re-initialise a line to all-1s (SET every cell)
  } pcm_op_e;

  // Default sizes.
  localparam int unsigned DEF_LINE_BITS    = 8192;     // 1 KB eDRAM cache line
  localparam int unsigned DEF_LADDR_W      = 23;       // 8 GB rank / 1 KB = 2^23 lines
  localparam int unsigned DEF_ENTRY_W      = 32;       // one translation entry
  localparam int unsigned DEF_PART_W       = 3;        // 8 partitions per bank

  // Translation entry: bit 31 set = line has been remapped, bits [LADDR_W-1:0]
  // hold the physical line. A clear bit 31 means the identity mapping.
  localparam int unsigned ENTRY_MAPPED_BIT = 31;

  // Default PCM timings in 1066 MHz memory-clock cycles (see header).
  localparam int unsigned DEF_T_RCD        = 4;
  localparam int unsigned DEF_T_RAS        = 59;
  localparam int unsigned DEF_T_RP         = 1;
  localparam int unsigned DEF_T_BURST      = 16;
  localparam int unsigned DEF_T_WR_UNK     = 203;
  localparam int unsigned DEF_T_WR_SET     = 160;
  localparam int unsigned DEF_T_WR_RESET   = 43;

  // Event counters of the controller, for observation and test.
  typedef struct packed {
    logic [31:0] reads;          // PCM reads served
    logic [31:0] writes_zeros;   // writes redirected to an all-0s line
    logic [31:0] writes_ones;    // writes redirected to an all-1s line
    logic [31:0] writes_unknown; // writes that overwrote unknown content
    logic [31:0] no_initq_room;  // known content existed but InitQ was full
    logic [31:0] lut_misses;     // LUT misses (AT partition fetched)
    logic [31:0] lut_writebacks; // dirty LUT partitions written back to AT
    logic [31:0] reinits;        // re-initialisations started
    logic [31:0] reinits_in_read;// ... of which overlapped a read in another partition
    logic [31:0] init_flips;     // re-inits whose pattern was switched (queue full)
    logic [31:0] writes_dense;   // writes with more than 60 % SET bits
    logic [31:0] set_bits;       // SET bits summed over all written lines
    logic [31:0] lut_hits;       // translations answered from the LUT
    logic [31:0] rq_occ_sum;     // read-queue occupancy summed over cycles
    logic [31:0] wq_occ_sum;     // write-queue occupancy summed over cycles
    logic [31:0] initq_occ_sum;  // InitQ occupancy summed over cycles
  } dc_stats_t;

endpackage
