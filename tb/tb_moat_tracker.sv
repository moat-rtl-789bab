// tb_moat_tracker: self-checking test of the CTA register and the ETH / ATH
// thresholds (defaults ETH = 32, ATH = 64). Directed cases check the
// boundaries (count 32 not eligible, 33 eligible; 64 no alert, 65 alert) and
// the overwrite rule; a random phase compares CTA and alert_req with a model
// after every update or take. A second instance with four entries (the
// generalised tracker for ALERT level 4) gets random updates and takes
// against an array model: free entry first, else replace the lowest count
// (lowest index on ties) if the new count is higher; the outputs show the
// highest count (lowest index on ties), which take removes.
module tb_moat_tracker;
  import moat_pkg::*;
  localparam int unsigned ROW_W = 16, CTR_W = 8, ATH = 64, ETH = 32;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic             upd_valid = 1'b0, take = 1'b0;
  logic [ROW_W-1:0] upd_row = '0;
  logic [CTR_W-1:0] upd_ctr = '0;
  logic             cta_valid, alert_req, inserted;
  logic [ROW_W-1:0] cta_row;
  logic [CTR_W-1:0] cta_ctr;

  moat_tracker #(.ROW_W(ROW_W), .CTR_W(CTR_W), .ATH(ATH), .ETH(ETH)) dut (.*);

  // four-entry instance
  localparam int unsigned N4 = 4;
  logic             u4_valid = 1'b0, t4 = 1'b0;
  logic [ROW_W-1:0] u4_row = '0;
  logic [CTR_W-1:0] u4_ctr = '0;
  logic             c4_valid, a4_req, ins4;
  logic [ROW_W-1:0] c4_row;
  logic [CTR_W-1:0] c4_ctr;

  moat_tracker #(.ROW_W(ROW_W), .CTR_W(CTR_W), .ATH(ATH), .ETH(ETH), .ENTRIES(N4)) dut4 (
    .clk, .rst_n, .upd_valid(u4_valid), .upd_row(u4_row), .upd_ctr(u4_ctr), .take(t4),
    .cta_valid(c4_valid), .cta_row(c4_row), .cta_ctr(c4_ctr), .alert_req(a4_req), .inserted(ins4));

  bit          e_valid [N4];
  int unsigned e_row [N4], e_ctr [N4];
  int unsigned n4_replace = 0, n4_hit = 0, n4_take_multi = 0;

  function automatic int top4();
    automatic int t = -1;
    for (int i = 0; i < int'(N4); i++)
      if (e_valid[i] && (t < 0 || e_ctr[i] > e_ctr[t])) t = i;
    return t;
  endfunction

  int checks = 0, failures = 0;
  bit m_valid = 0;
  int unsigned m_row = 0, m_ctr = 0;
  int unsigned n_insert = 0, n_overwrite = 0, n_alert = 0, n_reject = 0;

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", msg);
    end
  endtask

  task automatic compare(input string what);
    check(cta_valid == m_valid, $sformatf("%s: valid %0b exp %0b", what, cta_valid, m_valid));
    if (m_valid) begin
      check(cta_row == ROW_W'(m_row) && cta_ctr == CTR_W'(m_ctr),
            $sformatf("%s: cta %0d:%0d exp %0d:%0d", what, cta_row, cta_ctr, m_row, m_ctr));
      check(alert_req == (m_ctr > ATH), $sformatf("%s: alert_req %0b ctr %0d", what, alert_req, m_ctr));
      if (m_ctr > ATH) n_alert++;
    end else
      check(!alert_req, $sformatf("%s: alert_req with empty CTA", what));
  endtask

  task automatic update(input int unsigned row, input int unsigned ctr);
    @(negedge clk);
    upd_valid = 1'b1; upd_row = ROW_W'(row); upd_ctr = CTR_W'(ctr);
    @(posedge clk); #1 upd_valid = 1'b0;
    if (m_valid && row == m_row) begin
      automatic int unsigned inc = (m_ctr == 255) ? 255 : m_ctr + 1;
      m_ctr = (ctr > inc) ? ctr : inc;
    end else if (ctr > ETH && (!m_valid || ctr > m_ctr)) begin
      if (m_valid) n_overwrite++;
      n_insert++;
      m_valid = 1; m_row = row; m_ctr = ctr;
    end else n_reject++;
    compare($sformatf("update %0d:%0d", row, ctr));
  endtask

  task automatic do_take();
    @(negedge clk);
    take = 1'b1;
    @(posedge clk); #1 take = 1'b0;
    m_valid = 0;
    compare("take");
  endtask

  task automatic compare4(input string what);
    automatic int t = top4();
    check(c4_valid == (t >= 0), $sformatf("4-entry %s: valid %0b", what, c4_valid));
    if (t >= 0)
      check(c4_row == ROW_W'(e_row[t]) && c4_ctr == CTR_W'(e_ctr[t]) && a4_req == (e_ctr[t] > ATH),
            $sformatf("4-entry %s: top %0d:%0d exp %0d:%0d", what, c4_row, c4_ctr, e_row[t], e_ctr[t]));
  endtask

  task automatic update4(input int unsigned row, input int unsigned ctr);
    automatic int hit = -1, slot = -1, lo = -1;
    @(negedge clk);
    u4_valid = 1'b1; u4_row = ROW_W'(row); u4_ctr = CTR_W'(ctr);
    for (int i = 0; i < int'(N4); i++) begin
      if (e_valid[i] && e_row[i] == row && hit < 0) hit = i;
      if (!e_valid[i] && slot < 0) slot = i;
      if (e_valid[i] && (lo < 0 || e_ctr[i] < e_ctr[lo])) lo = i;
    end
    #1 check(ins4 == (hit < 0 && ctr > ETH && (slot >= 0 || ctr > e_ctr[lo])), "4-entry inserted flag");
    @(posedge clk); #1 u4_valid = 1'b0;
    if (hit >= 0) begin
      automatic int unsigned inc = (e_ctr[hit] == 255) ? 255 : e_ctr[hit] + 1;
      e_ctr[hit] = (ctr > inc) ? ctr : inc;
      n4_hit++;
    end else if (ctr > ETH && (slot >= 0 || ctr > e_ctr[lo])) begin
      if (slot < 0) begin
        slot = lo;
        n4_replace++;
      end
      e_valid[slot] = 1; e_row[slot] = row; e_ctr[slot] = ctr;
    end
    compare4($sformatf("update %0d:%0d", row, ctr));
  endtask

  task automatic take4();
    automatic int t = top4(), n = 0;
    @(negedge clk);
    t4 = 1'b1;
    @(posedge clk); #1 t4 = 1'b0;
    for (int i = 0; i < int'(N4); i++) n += e_valid[i];
    if (n > 1) n4_take_multi++;
    if (t >= 0) e_valid[t] = 0;
    compare4("take");
  endtask

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    #1 rst_n = 1'b1;
    compare("reset");
    update(100, 32);  check(!cta_valid, "count 32 = ETH is not eligible");
    update(100, 33);  check(cta_valid && cta_row == 100, "count 33 > ETH inserted");
    update(200, 33);  check(cta_row == 100, "equal count does not overwrite");
    update(200, 40);  check(cta_row == 200, "higher count overwrites");
    for (int c = 41; c <= 64; c++) update(200, c);
    check(!alert_req, "count 64 = ATH does not alert");
    update(200, 65);  check(alert_req, "count 65 > ATH alerts");
    do_take();        check(!alert_req && !cta_valid, "take empties the CTA");
    for (int i = 0; i < 4000; i++) begin
      automatic int unsigned k = $urandom_range(99);
      if (k < 4) do_take();
      else if (k < 50 && m_valid) update(m_row, (m_ctr + 2 > 255) ? 255 : $urandom_range(m_ctr + 2));
      else update($urandom_range(15), $urandom_range(255));
    end
    check(n_overwrite > 10 && n_reject > 10 && n_alert > 10, "all cases exercised");
    compare4("reset");
    for (int i = 0; i < 6000; i++) begin
      automatic int unsigned k = $urandom_range(99);
      if (k < 8) take4();
      else update4($urandom_range(11), $urandom_range(20, 120));
    end
    $display("4-entry: hits %0d, replacements %0d, takes with several entries %0d",
             n4_hit, n4_replace, n4_take_multi);
    check(n4_hit > 10 && n4_replace > 10 && n4_take_multi > 10, "4-entry cases exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
