// moat_variant_env: end-to-end test environment for the evaluated variants
// of MOAT: ALERT level LEVEL (1, 2 or 4; LEVEL tracked rows per bank) and a
// proactive mitigation period of PERIOD REFs (1, 3, 5 or 10; 0 = none).
// moat_top runs at reduced size (4 banks of 256 rows), driven by a
// memory-controller model that answers each ALERT_n with up to three ACT/PRE
// pairs and then LEVEL RFMs. Each bank is followed by the reference model of
// moat_ref_model.svh with the same entries and period (each RFM mitigates
// the highest tracked count).
// Checked after every command: every reported count, every victim refresh
// and group refresh, and ALERT_n, modelled as: raised when some bank's top
// tracked count exceeds ATH and at least LEVEL ACTs have been issued since
// the previous ALERT ended, cleared when the LEVEL RFMs have finished.
// Mechanisms that must occur: ALERT, proactive mitigation (none at all for
// PERIOD = 0) and, for LEVEL > 1, an ALERT held off by the ACT minimum, an RFM
// after the first of an ALERT that still mitigates a row, and a replacement
// of the lowest tracked entry.
// Instantiated by tb_moat_variants; reports through done/checks/failures.
module moat_variant_env #(
  parameter int unsigned LEVEL  = 2,
  parameter int unsigned PERIOD = 5
) (
  output logic done,
  output int   checks,
  output int   failures
);
  import moat_pkg::*;
  localparam int unsigned NB = 4, ROWS = 256, RPG = 8, CTR_W = 8, ATH = 64, ETH = 32, BR = 2;
  localparam int unsigned ROW_W = $clog2(ROWS), BANK_W = $clog2(NB), GRP_W = $clog2(ROWS / RPG);

  `include "moat_ref_model.svh"

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic              cmd_valid = 1'b0;
  cmd_e              cmd = CMD_NOP;
  logic [BANK_W-1:0] cmd_bank = '0;
  logic [ROW_W-1:0]  cmd_row = '0;
  logic              ready, alert_n;
  logic              vref_valid [NB];
  logic [ROW_W-1:0]  vref_row [NB];
  logic              grp_ref_valid [NB];
  logic [GRP_W-1:0]  grp_ref_grp [NB];

  moat_top #(.NUM_BANKS(NB), .ROWS(ROWS), .ROWS_PER_GROUP(RPG), .CTR_W(CTR_W),
             .ATH(ATH), .ETH(ETH), .BLAST_RADIUS(BR), .ABO_LEVEL(LEVEL), .MIT_PERIOD(PERIOD)) dut (.*);

  initial begin checks = 0; failures = 0; done = 1'b0; end
  bank_model m [NB];
  int unsigned exp_upd_q [NB][$];
  int unsigned n_alert = 0, n_rfm = 0, n_wrap = 0, n_grp_ref = 0;

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", msg);
    end
  endtask

  for (genvar b = 0; b < NB; b++) begin : g_mon
    always @(posedge clk) if (rst_n) begin
      if (dut.g_bank[b].upd_valid) begin
        check(exp_upd_q[b].size() > 0, $sformatf("bank %0d: unexpected count", b));
        if (exp_upd_q[b].size() > 0) begin
          automatic int unsigned e = exp_upd_q[b].pop_front();
          check(dut.g_bank[b].upd_ctr == CTR_W'(e),
                $sformatf("bank %0d: count %0d exp %0d", b, dut.g_bank[b].upd_ctr, e));
        end
      end
      if (vref_valid[b]) begin
        check(m[b].vref_q.size() > 0, $sformatf("bank %0d: unexpected victim refresh", b));
        if (m[b].vref_q.size() > 0) begin
          automatic int e = m[b].vref_q.pop_front();
          check(vref_row[b] == ROW_W'(e), $sformatf("bank %0d: victim %0d exp %0d", b, vref_row[b], e));
        end
      end
    end
  end

  // ALERT model: raised when a bank requests and LEVEL ACTs have been seen
  // since the last ALERT ended; cleared after LEVEL RFMs.
  function automatic bit any_req();
    for (int b = 0; b < int'(NB); b++) if (m[b].alert_req()) return 1;
    return 0;
  endfunction

  bit exp_alert = 0;
  int unsigned acts_since = LEVEL, rfms_in_alert = 0;
  int unsigned n_held = 0, n_extra_mit = 0;

  task automatic issue(input cmd_e c, input int unsigned bank, input int unsigned row);
    while (!ready) @(negedge clk);
    cmd_valid = 1'b1; cmd = c; cmd_bank = BANK_W'(bank); cmd_row = ROW_W'(row);
    if (c == CMD_ACT && !exp_alert && acts_since < LEVEL) acts_since++;
    @(negedge clk);
    cmd_valid = 1'b0; cmd = CMD_NOP;
  endtask

  task automatic settle();
    while (!ready) @(negedge clk);
    repeat (2) @(negedge clk);
    if (any_req() && !exp_alert) begin
      if (acts_since >= LEVEL) exp_alert = 1;
      else n_held++;
    end
    check(alert_n == !exp_alert, $sformatf("ALERT_n %0b, expected %0b", alert_n, !exp_alert));
    for (int b = 0; b < int'(NB); b++)
      check(m[b].vref_q.size() == 0 && exp_upd_q[b].size() == 0, "bank events missing");
  endtask

  task automatic act_pre(input int unsigned bank, input int unsigned row);
    issue(CMD_ACT, bank, row);
    exp_upd_q[bank].push_back(m[bank].pre(row));
    issue(CMD_PRE, bank, row);
    settle();
  endtask

  task automatic do_ref();
    automatic int unsigned g = m[0].ptr;
    while (!ready) @(negedge clk);
    cmd_valid = 1'b1; cmd = CMD_REF;
    #1;
    for (int b = 0; b < int'(NB); b++) begin
      check(grp_ref_valid[b] && grp_ref_grp[b] == GRP_W'(m[b].ptr), "group refresh");
      m[b].refresh();
    end
    n_grp_ref++;
    if (g == ROWS / RPG - 1) n_wrap++;
    @(negedge clk); cmd_valid = 1'b0; cmd = CMD_NOP;
    settle();
  endtask

  task automatic do_rfm();
    automatic bit mitigated = 0;
    for (int b = 0; b < int'(NB); b++) begin
      automatic int unsigned r = m[b].n_rea;
      m[b].rfm();
      if (m[b].n_rea != r) mitigated = 1;
    end
    issue(CMD_RFM, 0, 0);
    n_rfm++;
    rfms_in_alert++;
    if (rfms_in_alert > 1 && mitigated) n_extra_mit++;
    if (rfms_in_alert == LEVEL) begin
      exp_alert = 0;
      acts_since = 0;
      rfms_in_alert = 0;
    end
    settle();
  endtask

  function automatic int unsigned pick_row(input int unsigned bank);
    automatic int unsigned k = $urandom_range(99);
    if (k < 45) return 16 * bank + 40 + $urandom_range(3);
    if (k < 55) return ($urandom_range(1) == 0) ? 0 : ROWS - 1;
    if (k < 75) return ((m[bank].ptr + ROWS / RPG - 1) % (ROWS / RPG)) * RPG + RPG - 2 + $urandom_range(1);
    return $urandom_range(ROWS - 1);
  endfunction

  initial begin
    automatic int unsigned tot_pro = 0, tot_rea = 0, tot_ovw = 0;
    for (int b = 0; b < int'(NB); b++) m[b] = new(ROWS, RPG, CTR_W, ATH, ETH, BR, LEVEL, PERIOD);
    repeat (2) @(posedge clk);
    #1 rst_n = 1'b1;
    @(negedge clk);
    settle();
    // Directed: LEVEL + 1 rows of bank 0 at count ATH; the tracker keeps
    // LEVEL of them. The ALERT of the first mitigates all LEVEL tracked rows;
    // the untracked one then crosses ATH right after the ALERT and must wait
    // for LEVEL ACTs.
    for (int r = 0; r <= int'(LEVEL); r++)
      repeat (ATH) act_pre(0, 60 + 12 * r);
    for (int i = 0; i < int'(LEVEL) + 2; i++) begin
      act_pre(0, (i == 0) ? 60 : 60 + 12 * LEVEL);
      if (!alert_n) begin
        n_alert++;
        repeat (LEVEL) do_rfm();
      end
    end
    check((n_held > 0) == (LEVEL > 1) && n_alert == 2, "directed hold-off sequence");
    for (int i = 0; i < 20000; i++) begin
      automatic int unsigned b = $urandom_range(NB - 1);
      act_pre(b, pick_row(b));
      if ($urandom_range(59) == 0) do_ref();
      if (!alert_n) begin
        n_alert++;
        repeat ($urandom_range(3)) begin
          automatic int unsigned b2 = $urandom_range(NB - 1);
          act_pre(b2, pick_row(b2));
        end
        repeat (LEVEL) do_rfm();
      end
    end
    for (int b = 0; b < int'(NB); b++) begin
      tot_pro += m[b].n_pro; tot_rea += m[b].n_rea; tot_ovw += m[b].n_overwrite;
    end
    $display("level %0d, period %0d: ALERTs %0d, RFMs %0d, held off %0d, later-RFM mitigations %0d, reactive %0d, proactive %0d, entry replacements %0d",
             LEVEL, PERIOD, n_alert, n_rfm, n_held, n_extra_mit, tot_rea, tot_pro, tot_ovw);
    check(n_alert > 0 && n_rfm == LEVEL * n_alert, "ALERTs answered by LEVEL RFMs");
    if (LEVEL > 1) begin
      check(n_held > 0, "ALERT held off by the ACT minimum");
      check(n_extra_mit > 0, "a later RFM of an ALERT mitigated another tracked row");
    end
    check(tot_ovw > 0, "tracked entry replaced");
    check((PERIOD != 0) ? tot_pro > 0 : tot_pro == 0, "proactive mitigation as configured");
    done = 1'b1;
  end
endmodule
