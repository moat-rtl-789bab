// tb_moat_bank: self-checking test of one MOAT bank (ROWS = 64, groups of 8,
// ATH = 64, ETH = 32, blast radius 2) against the command-level reference
// model in moat_ref_model.svh. Random ACT/PRE traffic concentrates on a few hot
// rows, the bank edges and the two rows shadowed after the last REF; a REF
// follows every 80 ACTs on average and an RFM is issued whenever the bank
// requests an ALERT (after up to three more ACT/PRE pairs). Checked: the
// count reported at each PRE, every victim refresh (row and order),
// alert_req after each command, the refreshed group, and the cycle counts of
// PRE (count reported 3 cycles after the command), REF (at most 9) and RFM
// (at most 10).
module tb_moat_bank;
  import moat_pkg::*;
  `include "moat_ref_model.svh"
  localparam int unsigned ROWS = 64, RPG = 8, CTR_W = 8, ATH = 64, ETH = 32, BR = 2;
  localparam int unsigned ROW_W = $clog2(ROWS), GRP_W = $clog2(ROWS / RPG);

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic             cmd_valid = 1'b0;
  cmd_e             cmd = CMD_NOP;
  logic [ROW_W-1:0] cmd_row = '0;
  logic             ready, alert_req, vref_valid, grp_ref_valid, upd_valid, mit_done, mit_reactive;
  logic [ROW_W-1:0] vref_row, upd_row;
  logic [GRP_W-1:0] grp_ref_grp;
  logic [CTR_W-1:0] upd_ctr;

  moat_bank #(.ROWS(ROWS), .ROWS_PER_GROUP(RPG), .CTR_W(CTR_W), .ATH(ATH), .ETH(ETH),
              .BLAST_RADIUS(BR)) dut (.*);

  int checks = 0, failures = 0;
  bank_model m;
  int unsigned exp_upd_q[$];
  int unsigned n_alert = 0, n_rfm = 0, max_rfm_cycles = 0, n_vref = 0;
  int unsigned cyc = 0, pre_cyc = 0;

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", msg);
    end
  endtask

  always @(posedge clk) cyc <= cyc + 1;

  // monitors
  always @(posedge clk) if (rst_n) begin
    if (upd_valid) begin
      check(exp_upd_q.size() > 0, "unexpected count update");
      if (exp_upd_q.size() > 0) begin
        automatic int unsigned e = exp_upd_q.pop_front();
        check(upd_ctr == CTR_W'(e), $sformatf("PRE count %0d exp %0d", upd_ctr, e));
      end
      check(cyc - pre_cyc == 3, $sformatf("PRE to count latency %0d", cyc - pre_cyc));
    end
    if (vref_valid) begin
      n_vref++;
      check(m.vref_q.size() > 0, "unexpected victim refresh");
      if (m.vref_q.size() > 0) begin
        automatic int e = m.vref_q.pop_front();
        check(vref_row == ROW_W'(e), $sformatf("victim refresh %0d exp %0d", vref_row, e));
      end
    end
  end

  task automatic issue(input cmd_e c, input int unsigned row);
    while (!ready) @(negedge clk);
    cmd_valid = 1'b1; cmd = c; cmd_row = ROW_W'(row);
    if (c == CMD_PRE) pre_cyc = cyc;
    @(negedge clk);
    cmd_valid = 1'b0; cmd = CMD_NOP;
  endtask

  task automatic settle();
    while (!ready) @(negedge clk);
    check(alert_req == m.alert_req(), $sformatf("alert_req %0b exp %0b", alert_req, m.alert_req()));
    check(m.vref_q.size() == 0, "victim refreshes missing");
  endtask

  task automatic act_pre(input int unsigned row);
    issue(CMD_ACT, row);
    exp_upd_q.push_back(m.pre(row));
    issue(CMD_PRE, row);
    settle();
  endtask

  task automatic do_ref();
    automatic int unsigned g = m.ptr;
    automatic int unsigned c0;
    while (!ready) @(negedge clk);
    c0 = cyc;
    cmd_valid = 1'b1; cmd = CMD_REF;
    #1 check(grp_ref_valid && grp_ref_grp == GRP_W'(g), $sformatf("refresh group %0d exp %0d", grp_ref_grp, g));
    m.refresh();
    @(negedge clk); cmd_valid = 1'b0; cmd = CMD_NOP;
    while (!ready) @(negedge clk);
    check(cyc - c0 <= 9, $sformatf("REF took %0d cycles", cyc - c0));
    settle();
  endtask

  task automatic do_rfm();
    automatic int unsigned c0 = cyc;
    m.rfm();
    issue(CMD_RFM, 0);
    while (!ready) @(negedge clk);
    if (cyc - c0 > max_rfm_cycles) max_rfm_cycles = cyc - c0;
    n_rfm++;
    settle();
  endtask

  function automatic int unsigned pick_row();
    automatic int unsigned k = $urandom_range(99);
    automatic int unsigned hot[4] = '{5, 9, 33, 34};
    if (k < 40) return hot[$urandom_range(3)];
    if (k < 50) return ($urandom_range(1) == 0) ? 0 : ROWS - 1;
    if (k < 75) return ((m.ptr + ROWS / RPG - 1) % (ROWS / RPG)) * RPG + RPG - 2 + $urandom_range(1);
    return $urandom_range(ROWS - 1);
  endfunction

  initial begin : watchdog
    repeat (2000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    m = new(ROWS, RPG, CTR_W, ATH, ETH, BR);
    repeat (2) @(posedge clk);
    #1 rst_n = 1'b1;
    @(negedge clk);
    settle();
    // directed: hammer row 20 to ALERT, reactive mitigation
    for (int i = 0; i < int'(ATH) + 1; i++) act_pre(20);
    check(alert_req, "65 activations raise alert_req");
    do_rfm();
    check(!alert_req && m.n_rea == 1, "RFM mitigates the hammered row");
    // random traffic
    for (int i = 0; i < 20000; i++) begin
      act_pre(pick_row());
      if ($urandom_range(79) == 0) do_ref();
      if (alert_req) begin
        n_alert++;
        repeat ($urandom_range(3)) act_pre(pick_row());
        do_rfm();
      end
    end
    check(max_rfm_cycles <= 2 * BR + 6, $sformatf("RFM takes %0d cycles", max_rfm_cycles));
    check(m.n_pro > 10 && m.n_rea > 10 && m.n_shadow > 100 && m.n_overwrite > 10 &&
          m.n_reject_eth > 10 && m.n_reject_lower > 10 && m.n_edge > 0,
          $sformatf("coverage pro %0d rea %0d shadow %0d ovw %0d eth %0d low %0d edge %0d",
                    m.n_pro, m.n_rea, m.n_shadow, m.n_overwrite, m.n_reject_eth, m.n_reject_lower, m.n_edge));
    $display("bank: alerts %0d, proactive %0d, reactive %0d, shadow hits %0d, victim refreshes %0d, RFM max %0d cycles",
             n_alert, m.n_pro, m.n_rea, m.n_shadow, n_vref, max_rfm_cycles);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
