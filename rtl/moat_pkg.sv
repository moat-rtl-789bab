// moat_pkg: types and default sizes shared by the MOAT (Mitigating Rowhammer
// with Dual Thresholds) device-side Rowhammer logic.
//
// The defaults describe the configuration the design is built around: a DDR5
// device with 32 banks, 64K rows per bank, refresh groups of 8 rows (8K groups
// refreshed once per refresh window), 8-bit per-row activation counters,
// ALERT threshold ATH = 64 and eligibility threshold ETH = ATH/2 = 32, a blast
// radius of two victim rows on each side, one proactive mitigation per five
// REFs, and ABO mitigation level 1, which goes with a single tracked row per
// bank.
// The 8-bit counter width is derived from the 3-byte tracked-address register
// (16-bit row address plus one counter byte); everything else is taken
// directly from the figures quoted in the design documentation.
package moat_pkg;

  // Commands seen by the device-side logic. ACT and PRE address one bank;
  // REF and RFM are all-bank commands.
  typedef enum logic [2:0] {
    CMD_NOP = 3'd0,
    CMD_ACT = 3'd1,
    CMD_PRE = 3'd2,
    CMD_REF = 3'd3,
    CMD_RFM = 3'd4
  } cmd_e;

  // Operations of the per-row counter array.
  typedef enum logic [1:0] {
    ARR_INC       = 2'd0,  // read-modify-write +1 (saturating) of one row
    ARR_CLR_ROW   = 2'd1,  // reset one row's counter (end of a mitigation)
    ARR_CLR_GROUP = 2'd2   // reset all counters of a refresh group
  } arr_op_e;

  localparam int unsigned DEF_NUM_BANKS      = 32;
  localparam int unsigned DEF_ROWS           = 65536;
  localparam int unsigned DEF_ROWS_PER_GROUP = 8;
  localparam int unsigned DEF_CTR_W          = 8;
  localparam int unsigned DEF_ATH            = 64;
  localparam int unsigned DEF_ETH            = 32;
  localparam int unsigned DEF_BLAST_RADIUS   = 2;
  localparam int unsigned DEF_ABO_LEVEL      = 1;
  // REFs per proactive mitigation period (one aggressor row per 5 tREFI);
  // 0 disables proactive mitigation (ALERT only).
  localparam int unsigned DEF_MIT_PERIOD     = 5;
  // Tracked rows per bank: one per RFM of an ALERT, i.e. the ABO level.
  localparam int unsigned DEF_TRACK_ENTRIES  = DEF_ABO_LEVEL;

endpackage
