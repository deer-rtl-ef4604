// deer_pkg: types and constants shared by the DEER deep runahead unit.
//
// The deep runahead unit (DRU) prefetches instruction cachelines ahead of
// execution from a table of per-hyperblock metadata that software builds
// offline. This package holds what its blocks share:
//   * address geometry: 48-bit virtual addresses, 64-byte cachelines and
//     512-byte regions of 8 lines each;
//   * the retired-instruction record that the commit stage hands the DRU;
//   * the 128-bit SSRA metadata line, split into two 64-bit groups of three
//     regions each, with the bit positions of the paper's encoding figure:
//     [63:34] first-region base (30 bits), [33:26] bitmap, [25:21] delta,
//     [20:13] bitmap, [12:8] delta, [7:0] bitmap.
// The 48-bit address width follows from the paper's 6-byte RAS and
// prefetch-buffer entries; the 64-byte line follows from "512-byte regions
// (8 cache lines per region)". The ordering of the two groups in memory
// (group 1 in the low 8 bytes) is this design's choice.
package deer_pkg;

  // Address geometry.
  localparam int unsigned VA_W        = 48;  // virtual address bits (6-byte entries)
  localparam int unsigned LINE_OFF_W  = 6;   // 64-byte cachelines
  localparam int unsigned REGION_OFF_W = 9;  // 512-byte regions
  localparam int unsigned LINES_PER_REGION = 8;
  localparam int unsigned REGIONS_PER_GROUP = 3;
  localparam int unsigned GROUPS_PER_LINE   = 2;
  localparam int unsigned REGIONS_PER_LINE  = REGIONS_PER_GROUP * GROUPS_PER_LINE; // 6
  localparam int unsigned MAX_LINES_PER_ENTRY = REGIONS_PER_LINE * LINES_PER_REGION; // 48
  localparam int unsigned BASE_W      = 30;  // region base address field
  localparam int unsigned DELTA_W     = 5;   // region delta field, 512-byte units
  localparam int unsigned MD_LINE_W   = 128; // one metadata entry = 16 bytes
  localparam int unsigned MD_ENTRY_BYTES_LOG2 = 4;
  // HB PC bits above the 30-bit region base: [47:39].
  localparam int unsigned PC_HI_W     = VA_W - BASE_W - REGION_OFF_W; // 9
  localparam int unsigned LINE_ADDR_W = VA_W - LINE_OFF_W;            // 42

  typedef logic [VA_W-1:0]        va_t;
  typedef logic [LINE_ADDR_W-1:0] line_addr_t;
  typedef logic [PC_HI_W-1:0]     pc_hi_t;

  // Kind of a retired instruction as seen by the call/return filter.
  typedef enum logic [1:0] {
    BR_OTHER = 2'd0,
    BR_CALL  = 2'd1,
    BR_RET   = 2'd2
  } br_kind_e;

  // One retired instruction from the commit stage.
  typedef struct packed {
    va_t      pc;      // PC of the retired instruction
    va_t      target;  // architectural next PC (call/return target)
    br_kind_e kind;
  } retire_t;

  // One 64-bit metadata group (three regions), MSB first as in the figure.
  typedef struct packed {
    logic [BASE_W-1:0]  base1;   // [63:34]
    logic [7:0]         bitmap1; // [33:26]
    logic [DELTA_W-1:0] delta2;  // [25:21]
    logic [7:0]         bitmap2; // [20:13]
    logic [DELTA_W-1:0] delta3;  // [12:8]
    logic [7:0]         bitmap3; // [7:0]
  } md_group_t;

  // One 16-byte metadata line: group 2 in the upper 8 bytes.
  typedef struct packed {
    md_group_t grp2;
    md_group_t grp1;
  } md_line_t;

  // Event pulses reported by the DRU, one bit each, for performance counters.
  typedef struct packed {
    logic trig_call;      // trigger from a retired call
    logic trig_ret;       // trigger from a retired return
    logic ras_overflow;   // push onto a full RAS dropped the oldest entry
    logic ras_underflow;  // return retired with an empty RAS
    logic req_trigger;    // metadata request issued for a trigger PC
    logic req_ras_top;    // metadata request issued for the RAS-top PC
    logic req_superseded; // a newer trigger replaced requests not yet issued
    logic md_refill;      // a metadata line came back from memory
    logic pf_push;        // a cacheline address entered the prefetch buffer
    logic pf_drop;        // a cacheline address was dropped: buffer full
    logic pf_issue;       // a prefetch left the buffer
  } dru_events_t;

endpackage
