// tb_moat_top: end-to-end test of the MOAT device logic at reduced size
// (4 banks of 256 rows, groups of 8; ATH = 64, ETH = 32, blast radius 2,
// ABO level 1). A memory-controller model issues random ACT/PRE pairs to
// random banks (hot rows, bank edges and the shadowed rows get most of
// them), an all-bank REF every 60 pairs on average, and answers ALERT_n by
// issuing up to three more ACT/PRE pairs (the 180 ns window) and then an
// RFM. Every bank is followed by the reference model of moat_ref_model.svh.
// Checked: every count reported at a precharge, every victim refresh and
// group refresh of every bank, and ALERT_n after every command (low exactly
// when some bank's model holds a CTA above ATH, from the command after the
// request until the RFM has finished). Each mechanism must occur at least
// once: ALERT/RFM, reactive and proactive mitigation, CTA insert and
// overwrite, ETH rejection, shadow counter use, skipped edge victims,
// group pointer wrap and an RFM pre-empting a proactive mitigation.
module tb_moat_top;
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
             .ATH(ATH), .ETH(ETH), .BLAST_RADIUS(BR), .ABO_LEVEL(1)) dut (.*);

  int checks = 0, failures = 0;
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

  // ALERT model: raised when a bank requests (ACT minimum is met at level 1
  // whenever a request can arise), cleared by the RFM.
  function automatic bit any_req();
    for (int b = 0; b < int'(NB); b++) if (m[b].alert_req()) return 1;
    return 0;
  endfunction

  bit exp_alert = 0;

  task automatic issue(input cmd_e c, input int unsigned bank, input int unsigned row);
    while (!ready) @(negedge clk);
    cmd_valid = 1'b1; cmd = c; cmd_bank = BANK_W'(bank); cmd_row = ROW_W'(row);
    @(negedge clk);
    cmd_valid = 1'b0; cmd = CMD_NOP;
  endtask

  task automatic settle();
    while (!ready) @(negedge clk);
    repeat (2) @(negedge clk);
    if (any_req()) exp_alert = 1;
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
    for (int b = 0; b < int'(NB); b++) m[b].rfm();
    issue(CMD_RFM, 0, 0);
    n_rfm++;
    exp_alert = 0;
    settle();
  endtask

  function automatic int unsigned pick_row(input int unsigned bank);
    automatic int unsigned k = $urandom_range(99);
    if (k < 45) return 16 * bank + 40 + $urandom_range(3);
    if (k < 55) return ($urandom_range(1) == 0) ? 0 : ROWS - 1;
    if (k < 75) return ((m[bank].ptr + ROWS / RPG - 1) % (ROWS / RPG)) * RPG + RPG - 2 + $urandom_range(1);
    return $urandom_range(ROWS - 1);
  endfunction

  initial begin : watchdog
    repeat (3000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    automatic int unsigned tot_pro = 0, tot_rea = 0, tot_sh = 0, tot_ovw = 0, tot_eth = 0;
    automatic int unsigned tot_edge = 0, tot_pre = 0, tot_ins = 0;
    for (int b = 0; b < int'(NB); b++) m[b] = new(ROWS, RPG, CTR_W, ATH, ETH, BR);
    repeat (2) @(posedge clk);
    #1 rst_n = 1'b1;
    @(negedge clk);
    settle();
    for (int i = 0; i < 30000; i++) begin
      automatic int unsigned b = $urandom_range(NB - 1);
      act_pre(b, pick_row(b));
      if ($urandom_range(59) == 0) do_ref();
      if (!alert_n) begin
        n_alert++;
        repeat ($urandom_range(3)) begin
          automatic int unsigned b2 = $urandom_range(NB - 1);
          act_pre(b2, pick_row(b2));
        end
        do_rfm();
      end
    end
    for (int b = 0; b < int'(NB); b++) begin
      tot_pro += m[b].n_pro; tot_rea += m[b].n_rea; tot_sh += m[b].n_shadow;
      tot_ovw += m[b].n_overwrite; tot_eth += m[b].n_reject_eth; tot_edge += m[b].n_edge;
      tot_pre += m[b].n_preempt; tot_ins += m[b].n_insert;
    end
    $display("top: ALERTs %0d, RFMs %0d, reactive %0d, proactive %0d, CTA inserts %0d, overwrites %0d,",
             n_alert, n_rfm, tot_rea, tot_pro, tot_ins, tot_ovw);
    $display("top: ETH rejections %0d, shadow uses %0d, edge victims skipped %0d, pre-empted %0d, group refreshes %0d, wraps %0d",
             tot_eth, tot_sh, tot_edge, tot_pre, n_grp_ref, n_wrap);
    check(n_alert > 0, "ALERT occurred");
    check(n_rfm > 0 && tot_rea > 0, "reactive mitigation occurred");
    check(tot_pro > 0, "proactive mitigation occurred");
    check(tot_ins > 0 && tot_ovw > 0, "CTA insert and overwrite occurred");
    check(tot_eth > 0, "ETH rejection occurred");
    check(tot_sh > 0, "shadow counter used");
    check(tot_edge > 0, "edge victim skipped");
    check(tot_pre > 0, "RFM pre-empted a proactive mitigation");
    check(n_wrap > 0, "group pointer wrapped");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
