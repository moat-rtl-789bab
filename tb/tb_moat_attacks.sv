// tb_moat_attacks: the attack patterns used to evaluate MOAT, run on the
// device logic at its default size (32 banks x 64K rows, ATH = 64, ETH = 32,
// ABO level 1). The memory-controller model answers every ALERT with three
// more ACT/PRE pairs of the same pattern (the activity allowed in the 180 ns
// before the RFM), then one RFM; it issues a REF after every 67 ACTs (the
// most that fit in one tREFI).
//   1. Single-row attack: one row hammered without pause. The row alerts
//      after 65 activations, then again every 68 (65 to exceed ATH plus the
//      3 before the RFM, which the RFM clears). No count may exceed ATH + 4.
//   2. Five-row attack: rows A..E activated in turn. Each row is mitigated
//      by its own ALERT: 5 ALERTs per round of about 5 x 65 activations.
//   For both, the throughput is estimated in units of one ACT time, an ALERT
//   costing 11 units of which 4 can still be used for ACTs; it must be about
//   0.9 (a 10% loss).
//   3. Ratchet attack: NR = 4096 rows are primed to ATH activations, then
//      one is pushed over ATH and the activations allowed around each ALERT
//      are spread over the rows not yet mitigated. Rows that a proactive
//      mitigation resets while priming are dropped from the pool. The
//      highest count any row reaches must stay within the analytical bound
//      ATH + log_{M/3}(N) + M, with M = 3 + level = 4 and N the rows left
//      in the pool. The rows are 4 apart, above the rows the refresh
//      pointer reaches during the run, so only mitigations remove them.
// Every count reported by the attacked bank is recorded; the maxima and the
// ALERT counts are printed and checked.
module tb_moat_attacks;
  import moat_pkg::*;
  localparam int unsigned NB = 32, ROW_W = 16, BANK_W = 5, GRP_W = 13, ATH = 64, NR = 4096;

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

  moat_top dut (.*);

  int checks = 0, failures = 0;
  int unsigned max_cnt [NB];
  int unsigned acts = 0, alerts = 0, acts_since_ref = 0;
  int unsigned mit_q [NB][$];  // rows whose mitigation has completed

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", msg);
    end
  endtask

  for (genvar b = 0; b < NB; b++) begin : g_mon
    always @(posedge clk) if (rst_n) begin
      if (dut.g_bank[b].upd_valid && dut.g_bank[b].upd_ctr > max_cnt[b])
        max_cnt[b] = dut.g_bank[b].upd_ctr;
      if (dut.g_bank[b].mit_done) mit_q[b].push_back(dut.g_bank[b].u_bank.cma_row);
    end
  end

  task automatic issue(input cmd_e c, input int unsigned bank, input int unsigned row);
    while (!ready) @(negedge clk);
    cmd_valid = 1'b1; cmd = c; cmd_bank = BANK_W'(bank); cmd_row = ROW_W'(row);
    @(negedge clk);
    cmd_valid = 1'b0; cmd = CMD_NOP;
    while (!ready) @(negedge clk);
    repeat (2) @(negedge clk);
  endtask

  // One activation; refresh after every 67.
  task automatic act_pre(input int unsigned bank, input int unsigned row);
    issue(CMD_ACT, bank, row);
    issue(CMD_PRE, bank, row);
    acts++;
    if (++acts_since_ref == 67) begin
      issue(CMD_REF, 0, 0);
      acts_since_ref = 0;
    end
  endtask

  // Throughput in units of one ACT time: an ALERT costs 11 units, 4 of them
  // (the three ACTs before the RFM and one after it) usable for ACTs, so each
  // ALERT adds 7 units to the ACT count.
  function automatic real throughput(input int unsigned n_act, input int unsigned n_alert);
    return real'(n_act) / real'(n_act + 7 * n_alert);
  endfunction

  task automatic rfm();
    issue(CMD_RFM, 0, 0);
    check(alert_n, "ALERT_n released by the RFM");
  endtask

  initial begin : watchdog
    repeat (60000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    automatic real tp;
    foreach (max_cnt[b]) max_cnt[b] = 0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1'b1;
    while (!ready) @(negedge clk);

    // 1. single-row attack on bank 0, row 3000
    begin
      automatic int unsigned last = 0, gaps[$];
      acts = 0;
      while (gaps.size() < 10) begin
        act_pre(0, 3000);
        if (!alert_n) begin
          gaps.push_back(acts - last);
          last = acts;
          repeat (3) act_pre(0, 3000);
          rfm();
        end
      end
      check(gaps[0] == ATH + 1, $sformatf("first ALERT after %0d ACTs", gaps[0]));
      for (int i = 1; i < gaps.size(); i++)
        check(gaps[i] == ATH + 4, $sformatf("ALERT %0d after %0d ACTs, expected 68", i, gaps[i]));
      check(max_cnt[0] <= ATH + 4, $sformatf("single-row max count %0d", max_cnt[0]));
      tp = throughput(acts, gaps.size());
      check(tp > 0.88 && tp < 0.93, $sformatf("single-row throughput %0.3f", tp));
      $display("single-row: ALERT every %0d ACTs, max count %0d, throughput %0.3f", gaps[1], max_cnt[0], tp);
    end

    // 2. five-row circular attack on bank 1
    begin
      automatic int unsigned rows[5] = '{100, 200, 300, 400, 500};
      automatic int unsigned a0, n_al = 0, k = 0;
      acts = 0;
      while (acts < 5 * 65 * 4) begin
        act_pre(1, rows[k]); k = (k + 1) % 5;
        if (!alert_n) begin
          n_al++;
          repeat (3) begin act_pre(1, rows[k]); k = (k + 1) % 5; end
          rfm();
        end
      end
      a0 = acts;
      check(n_al >= 4 * 5 - 5 && n_al <= 4 * 5 + 1,
            $sformatf("five-row: %0d ALERTs in %0d ACTs (about 5 per 325 expected)", n_al, a0));
      check(max_cnt[1] <= ATH + 4, $sformatf("five-row max count %0d", max_cnt[1]));
      tp = throughput(a0, n_al);
      check(tp > 0.88 && tp < 0.93, $sformatf("five-row throughput %0.3f", tp));
      $display("five-row: %0d ALERTs in %0d ACTs, max count %0d, throughput %0.3f", n_al, a0, max_cnt[1], tp);
    end

    // 3. Ratchet attack on bank 2 with a pool of NR rows
    begin
      automatic int unsigned pool[$];
      automatic int unsigned k = 0, n_al = 0, n_pro = 0;
      automatic real bound;
      for (int i = 0; i < int'(NR); i++) pool.push_back(40000 + 4 * i);
      // prime every row to ATH (no ALERT: the count must exceed ATH)
      for (int c = 0; c < int'(ATH); c++)
        foreach (pool[i]) act_pre(2, pool[i]);
      check(alert_n, "priming to ATH raises no ALERT");
      // rows mitigated at a REF while priming no longer hold ATH: drop them
      while (mit_q[2].size() > 0) begin
        automatic int unsigned r = mit_q[2].pop_front();
        foreach (pool[i]) if (pool[i] == r) begin pool.delete(i); n_pro++; break; end
      end
      bound = real'(ATH) + $ln(real'(pool.size())) / $ln(4.0 / 3.0) + 4.0;
      $display("ratchet: %0d of %0d rows primed to ATH (%0d mitigated at a REF while priming)",
               pool.size(), NR, n_pro);
      // ratchet
      while (pool.size() > 0 && n_al < 4 * NR) begin
        act_pre(2, pool[k % pool.size()]); k++;
        if (!alert_n) begin
          n_al++;
          repeat (3) begin act_pre(2, pool[k % pool.size()]); k++; end
          rfm();
        end
        while (mit_q[2].size() > 0) begin
          automatic int unsigned r = mit_q[2].pop_front();
          foreach (pool[i]) if (pool[i] == r) begin pool.delete(i); break; end
        end
      end
      check(pool.size() == 0, "every pool row was mitigated");
      check(real'(max_cnt[2]) <= bound, $sformatf("ratchet max count %0d above bound %0.1f", max_cnt[2], bound));
      check(max_cnt[2] > ATH + 1, "ratchet pushed a row beyond ATH + 1");
      $display("ratchet: %0d ALERTs, max count %0d, analytical bound %0.1f", n_al, max_cnt[2], bound);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
