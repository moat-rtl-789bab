// tb_moat_top_full: the MOAT device logic at its default size (32 banks of
// 64K rows, 8-row refresh groups, 8-bit counters, ATH = 64, ETH = 32, blast
// radius 2, ABO level 1), taken through one complete operation of each kind:
//   1. power-up clearing of all counter arrays (8K cycles);
//   2. reactive mitigation: row 1000 of bank 3 is activated 65 times, ALERT_n
//      must fall after the 65th precharge (and not before); three more
//      ACT/PRE pairs follow (the 180 ns window), then an RFM, during which
//      bank 3 refreshes rows 999, 1001, 998, 1002 and clears the counter;
//      ALERT_n rises again; the next activation of row 1000 counts 1;
//   3. safe counter reset: row 7 of bank 0 gets 20 activations, the first
//      REF refreshes group 0 (clearing the counter), then 45 more activations
//      must report 21..65 from the shadow counter and raise ALERT;
//   4. proactive mitigation: row 40000 of bank 7 gets 40 activations (above
//      ETH, below ATH); over the next five REFs bank 7 refreshes rows 39999,
//      40001, 39998, 40002 and then clears the row's counter.
// Counts, victims and groups are checked against expected values written
// out here.
module tb_moat_top_full;
  import moat_pkg::*;
  localparam int unsigned NB = 32, ROWS = 65536, ROW_W = 16, BANK_W = 5, GRP_W = 13;

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
  int unsigned vq [NB][$];        // observed victim refreshes per bank
  int unsigned last_cnt [NB];     // last count reported per bank
  int unsigned n_ref = 0;

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", msg);
    end
  endtask

  for (genvar b = 0; b < NB; b++) begin : g_mon
    always @(posedge clk) begin
      if (rst_n && vref_valid[b]) vq[b].push_back(vref_row[b]);
      if (rst_n && dut.g_bank[b].upd_valid) last_cnt[b] = dut.g_bank[b].upd_ctr;
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

  task automatic act_pre(input int unsigned bank, input int unsigned row);
    issue(CMD_ACT, bank, row);
    issue(CMD_PRE, bank, row);
  endtask

  task automatic do_ref();
    while (!ready) @(negedge clk);
    cmd_valid = 1'b1; cmd = CMD_REF;
    #1 check(grp_ref_valid[0] && grp_ref_grp[0] == GRP_W'(n_ref), "refreshed group");
    @(negedge clk); cmd_valid = 1'b0; cmd = CMD_NOP;
    while (!ready) @(negedge clk);
    n_ref++;
  endtask

  task automatic expect_victims(input int unsigned bank, input int unsigned row);
    automatic int unsigned exp[4] = '{row - 1, row + 1, row - 2, row + 2};
    check(vq[bank].size() == 4, $sformatf("bank %0d: %0d victim refreshes", bank, vq[bank].size()));
    for (int i = 0; i < 4 && i < vq[bank].size(); i++)
      check(vq[bank][i] == exp[i], $sformatf("bank %0d victim %0d: %0d exp %0d", bank, i, vq[bank][i], exp[i]));
    vq[bank].delete();
  endtask

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    automatic int unsigned t0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1'b1;
    t0 = $time;
    while (!ready) @(negedge clk);
    check(($time - t0) / 10 >= ROWS / 8, "power-up clear takes one cycle per group");
    // 2. reactive mitigation
    for (int i = 1; i <= 65; i++) begin
      act_pre(3, 1000);
      check(last_cnt[3] == i, $sformatf("row 1000 count %0d exp %0d", last_cnt[3], i));
      check(alert_n == (i <= 64), $sformatf("ALERT_n %0b after %0d activations", alert_n, i));
    end
    for (int i = 0; i < 3; i++) begin
      act_pre(12, 500 + i);
      check(!alert_n, "ALERT_n held during the normal window");
    end
    issue(CMD_RFM, 0, 0);
    check(alert_n, "ALERT_n released after the RFM");
    expect_victims(3, 1000);
    act_pre(3, 1000);
    check(last_cnt[3] == 1, "counter of the mitigated row was cleared");
    // 3. safe counter reset through the shadow counter
    for (int i = 0; i < 20; i++) act_pre(0, 7);
    check(last_cnt[0] == 20, "row 7 counted 20");
    do_ref();
    for (int i = 21; i <= 65; i++) begin
      act_pre(0, 7);
      check(last_cnt[0] == i, $sformatf("row 7 shadow count %0d exp %0d", last_cnt[0], i));
    end
    check(!alert_n, "shadow count above ATH raises ALERT");
    issue(CMD_RFM, 0, 0);
    expect_victims(0, 7);
    check(alert_n, "ALERT_n released");
    // 4. proactive mitigation over five REFs (phase returns to 0 first)
    while (n_ref % 5 != 0) do_ref();
    for (int i = 0; i < 40; i++) act_pre(7, 40000);
    check(alert_n, "40 activations do not alert");
    for (int i = 0; i < 5; i++) do_ref();
    expect_victims(7, 40000);
    act_pre(7, 40000);
    check(last_cnt[7] == 1, "proactive mitigation cleared the counter");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
