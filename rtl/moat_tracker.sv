// moat_tracker: the Current Tracked Addr (CTA) register(s) of one bank and
// the two MOAT thresholds.
//
// Every precharge reports the updated activation count of the row it closed
// (upd_valid, upd_row, upd_ctr). The tracker holds ENTRIES rows, each with a
// count (ENTRIES = 1 in the main configuration: a single CTA register):
//   - if the row is already tracked, its count is incremented (kept at least
//     as large as the reported count);
//   - otherwise, if the count exceeds ETH, the row is written into a free
//     entry or, when all entries are in use, replaces the entry with the
//     lowest count if its own count is higher.
// The tracker therefore holds the ENTRIES most-activated eligible rows seen
// since they were last handed over. The cta_* outputs show the entry with the
// highest count (the lowest index among equal counts); take (from the
// mitigation engine) removes that entry when its row is handed over for
// mitigation. alert_req is high while that count exceeds ATH: the bank needs
// a reactive mitigation through ALERT / RFM.
// Everything is registered; alert_req follows one cycle after the update.
//
// The single-entry comparisons (Row.Ctr > ETH, Row.Ctr > CTA.Ctr,
// Ctr > ATH) and the multi-entry rule (free entry first, else replace the
// minimum; mitigate the maximum) follow the design description, which uses
// one entry per RFM issued for an ALERT. Which entry is chosen among equal
// counts, and saturating the counts at their maximum, are this
// implementation's choices.
module moat_tracker
  import moat_pkg::*;
#(
  parameter int unsigned ROW_W   = $clog2(DEF_ROWS),
  parameter int unsigned CTR_W   = DEF_CTR_W,
  parameter int unsigned ATH     = DEF_ATH,
  parameter int unsigned ETH     = DEF_ETH,
  parameter int unsigned ENTRIES = DEF_TRACK_ENTRIES
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             upd_valid,
  input  logic [ROW_W-1:0] upd_row,
  input  logic [CTR_W-1:0] upd_ctr,
  input  logic             take,
  output logic             cta_valid,
  output logic [ROW_W-1:0] cta_row,
  output logic [CTR_W-1:0] cta_ctr,
  output logic             alert_req,
  output logic             inserted
);

  localparam logic [CTR_W-1:0] CTR_MAX = '1;
  localparam int unsigned      IDX_W   = (ENTRIES > 1) ? $clog2(ENTRIES) : 1;

  typedef struct packed {
    logic             valid;
    logic [ROW_W-1:0] row;
    logic [CTR_W-1:0] ctr;
  } entry_t;

  entry_t ent [ENTRIES];

  // Entry lookups: the entry holding upd_row, the highest-count entry and
  // the entry a new row would be written into.
  logic             hit;
  logic [IDX_W-1:0] hit_idx, top_idx, slot_idx;
  logic             have_free;
  logic [CTR_W-1:0] slot_ctr;

  always_comb begin
    hit       = 1'b0;
    hit_idx   = '0;
    top_idx   = '0;
    have_free = 1'b0;
    slot_idx  = '0;
    slot_ctr  = CTR_MAX;
    for (int i = 0; i < int'(ENTRIES); i++) begin
      if (ent[i].valid && ent[i].row == upd_row && !hit) begin
        hit     = 1'b1;
        hit_idx = IDX_W'(i);
      end
      if (ent[i].valid && (!ent[top_idx].valid || ent[i].ctr > ent[top_idx].ctr))
        top_idx = IDX_W'(i);
      if (!have_free) begin
        if (!ent[i].valid) begin
          have_free = 1'b1;
          slot_idx  = IDX_W'(i);
        end else if (i == 0 || ent[i].ctr < slot_ctr) begin
          slot_idx = IDX_W'(i);
          slot_ctr = ent[i].ctr;
        end
      end
    end
  end

  logic             eligible;
  logic [CTR_W-1:0] hit_inc;

  assign eligible  = (32'(upd_ctr) > ETH) && (have_free || (upd_ctr > slot_ctr));
  assign hit_inc   = (ent[hit_idx].ctr == CTR_MAX) ? CTR_MAX : ent[hit_idx].ctr + 1'b1;
  assign inserted  = upd_valid && !take && !hit && eligible;
  assign cta_valid = ent[top_idx].valid;
  assign cta_row   = ent[top_idx].row;
  assign cta_ctr   = ent[top_idx].ctr;
  assign alert_req = cta_valid && (32'(cta_ctr) > ATH);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < int'(ENTRIES); i++) ent[i] <= '0;
    end else if (take) begin
      ent[top_idx].valid <= 1'b0;
    end else if (upd_valid) begin
      if (hit) begin
        ent[hit_idx].ctr <= (upd_ctr > hit_inc) ? upd_ctr : hit_inc;
      end else if (eligible) begin
        ent[slot_idx] <= '{valid: 1'b1, row: upd_row, ctr: upd_ctr};
      end
    end
  end

  a_no_take_and_update: assert property (@(posedge clk) disable iff (!rst_n)
    !(take && upd_valid));
  a_ath_above_eth: assert property (@(posedge clk) ATH > ETH);
  a_entries: assert property (@(posedge clk) ENTRIES >= 1);

endmodule
