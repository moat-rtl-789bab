// moat_top: MOAT Rowhammer mitigation for all banks of one DDR5 device.
//
// The device receives a command stream (ACT / PRE to one bank, REF / RFM to
// all banks, as all-bank commands). Each bank has its own moat_bank: per-row
// activation counters, safe counter reset on refresh, a tracker (CTA) with
// thresholds ETH and ATH, and a one-entry mitigation register (CMA). The
// tracker has one entry per RFM of an ALERT, i.e. ABO_LEVEL entries: one in
// the main configuration (level 1); levels 2 and 4 give the generalised
// variants with 2 and 4 tracked rows per bank, where each RFM mitigates the
// tracked row with the highest count. MIT_PERIOD sets the proactive rate:
// one aggressor row per MIT_PERIOD REFs (5 by default, i.e. one row
// operation per REF; 0 = ALERT only). Reactive mitigation happens when a
// bank's CTA count exceeds ATH: the shared abo_controller raises ALERT, the
// memory controller answers with an RFM, and every bank mitigates its CTA
// row within that RFM.
//
// Interface:
//   cmd_valid/cmd/cmd_bank/cmd_row  one command per cycle, only while ready
//   ready        all banks idle (low for GROUPS cycles after reset while the
//                counter arrays clear themselves, and while a command runs)
//   alert_n      the ALERT_n pin (active low)
//   vref_*       per bank: refresh this victim row now (to the DRAM array)
//   grp_ref_*    per bank: this refresh group is being refreshed
// The counter arrays are part of this RTL; the DRAM cells, sense amplifiers
// and the row refresh itself are not, and are reached through vref_* and
// grp_ref_*. Bank count, rows per bank, group size, counter width and the
// thresholds default to the configuration the design is evaluated in; the
// clock-cycle timing is this implementation's own (see moat_bank).
module moat_top
  import moat_pkg::*;
#(
  parameter int unsigned NUM_BANKS      = DEF_NUM_BANKS,
  parameter int unsigned ROWS           = DEF_ROWS,
  parameter int unsigned ROWS_PER_GROUP = DEF_ROWS_PER_GROUP,
  parameter int unsigned CTR_W          = DEF_CTR_W,
  parameter int unsigned ATH            = DEF_ATH,
  parameter int unsigned ETH            = DEF_ETH,
  parameter int unsigned BLAST_RADIUS   = DEF_BLAST_RADIUS,
  parameter int unsigned ABO_LEVEL      = DEF_ABO_LEVEL,
  parameter int unsigned MIT_PERIOD     = DEF_MIT_PERIOD,
  localparam int unsigned ROW_W  = $clog2(ROWS),
  localparam int unsigned BANK_W = (NUM_BANKS > 1) ? $clog2(NUM_BANKS) : 1,
  localparam int unsigned GRP_W  = $clog2(ROWS / ROWS_PER_GROUP)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              cmd_valid,
  input  cmd_e              cmd,
  input  logic [BANK_W-1:0] cmd_bank,
  input  logic [ROW_W-1:0]  cmd_row,
  output logic              ready,
  output logic              alert_n,
  output logic              vref_valid    [NUM_BANKS],
  output logic [ROW_W-1:0]  vref_row      [NUM_BANKS],
  output logic              grp_ref_valid [NUM_BANKS],
  output logic [GRP_W-1:0]  grp_ref_grp   [NUM_BANKS]
);

  logic [NUM_BANKS-1:0] bank_ready;
  logic [NUM_BANKS-1:0] bank_alert_req;
  logic                 accept, alert, alert_start, held_off;

  assign ready  = &bank_ready;
  assign accept = cmd_valid && ready;

  for (genvar b = 0; b < NUM_BANKS; b++) begin : g_bank
    logic bank_cmd_valid;
    logic             upd_valid, mit_done, mit_reactive;
    logic [ROW_W-1:0] upd_row;
    logic [CTR_W-1:0] upd_ctr;

    // ACT / PRE go to the addressed bank, REF / RFM to all banks.
    assign bank_cmd_valid = accept &&
      (((cmd == CMD_ACT) || (cmd == CMD_PRE)) ? (cmd_bank == BANK_W'(b))
                                              : ((cmd == CMD_REF) || (cmd == CMD_RFM)));

    moat_bank #(
      .ROWS(ROWS), .ROWS_PER_GROUP(ROWS_PER_GROUP), .CTR_W(CTR_W),
      .ATH(ATH), .ETH(ETH), .BLAST_RADIUS(BLAST_RADIUS),
      .TRACK_ENTRIES(ABO_LEVEL), .MIT_PERIOD(MIT_PERIOD)
    ) u_bank (
      .clk, .rst_n,
      .cmd_valid    (bank_cmd_valid),
      .cmd          (cmd),
      .cmd_row      (cmd_row),
      .ready        (bank_ready[b]),
      .alert_req    (bank_alert_req[b]),
      .vref_valid   (vref_valid[b]),
      .vref_row     (vref_row[b]),
      .grp_ref_valid(grp_ref_valid[b]),
      .grp_ref_grp  (grp_ref_grp[b]),
      .upd_valid    (upd_valid),
      .upd_row      (upd_row),
      .upd_ctr      (upd_ctr),
      .mit_done     (mit_done),
      .mit_reactive (mit_reactive)
    );
  end

  abo_controller #(
    .NUM_BANKS(NUM_BANKS), .ABO_LEVEL(ABO_LEVEL)
  ) u_abo (
    .clk, .rst_n,
    .alert_req  (bank_alert_req),
    .act_seen   (accept && cmd == CMD_ACT),
    .rfm_seen   (accept && cmd == CMD_RFM),
    .banks_ready(ready),
    .alert      (alert),
    .alert_start(alert_start),
    .held_off   (held_off)
  );

  assign alert_n = !alert;

endmodule
