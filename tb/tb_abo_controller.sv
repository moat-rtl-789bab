// tb_abo_controller: self-checking test of the ALERT-Back-Off state machine,
// run at ABO level 1 and level 2 (two instances). A testbench memory
// controller answers each ALERT with the required number of RFMs after a
// delay, keeps the banks busy for a few cycles per RFM, and issues ACTs at
// random. Checked: alert rises one cycle after a request once the minimum
// number of ACTs since the previous ALERT has been seen, stays high until the
// last RFM has finished, falls then, and is held off (not raised) while
// fewer than ABO_LEVEL ACTs have followed the previous ALERT.
module tb_abo_controller;
  import moat_pkg::*;
  localparam int unsigned NB = 4;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", msg);
    end
  endtask

  // One test harness per ABO level.
  logic [NB-1:0] req [2];
  logic act [2], rfm [2], rdy [2], alert [2], astart [2], held [2];
  bit   fin [2];
  int   n_alerts [2], n_held [2];

  abo_controller #(.NUM_BANKS(NB), .ABO_LEVEL(1)) u_l1 (
    .clk, .rst_n, .alert_req(req[0]), .act_seen(act[0]), .rfm_seen(rfm[0]),
    .banks_ready(rdy[0]), .alert(alert[0]), .alert_start(astart[0]), .held_off(held[0]));
  abo_controller #(.NUM_BANKS(NB), .ABO_LEVEL(2)) u_l2 (
    .clk, .rst_n, .alert_req(req[1]), .act_seen(act[1]), .rfm_seen(rfm[1]),
    .banks_ready(rdy[1]), .alert(alert[1]), .alert_start(astart[1]), .held_off(held[1]));

  task automatic drive(input int h, input int unsigned level);
    automatic int unsigned acts_since = level;  // satisfied after reset
    req[h] = '0; act[h] = 0; rfm[h] = 0; rdy[h] = 1;
    @(posedge rst_n);
    for (int it = 0; it < 300; it++) begin
      // wait a little, then a bank requests
      repeat ($urandom_range(5)) @(negedge clk);
      req[h][$urandom_range(NB - 1)] = 1'b1;
      // ACTs needed before ALERT may rise
      while (acts_since < level) begin
        @(negedge clk);
        check(!alert[h], $sformatf("L%0d: alert held off before %0d ACTs", level, level));
        if (held[h]) n_held[h]++;
        act[h] = 1; @(negedge clk); act[h] = 0; acts_since++;
      end
      @(negedge clk);
      check(alert[h], $sformatf("L%0d: alert one cycle after request", level));
      n_alerts[h]++;
      // MC: up to a few more ACTs (not counted), then level RFMs
      repeat ($urandom_range(3)) begin act[h] = 1; @(negedge clk); act[h] = 0; end
      for (int r = 0; r < int'(level); r++) begin
        rfm[h] = 1; @(negedge clk); rfm[h] = 0; rdy[h] = 0;
        repeat ($urandom_range(1, 4)) begin
          @(negedge clk);
          check(alert[h], $sformatf("L%0d: alert stays high during RFM %0d", level, r));
        end
        if (r == int'(level) - 1) req[h] = '0;  // banks have mitigated
        rdy[h] = 1; @(negedge clk);
      end
      @(negedge clk);
      check(!alert[h], $sformatf("L%0d: alert falls after last RFM", level));
      acts_since = 0;
    end
    fin[h] = 1;
  endtask

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial fork
    drive(0, 1);
    drive(1, 2);
    begin
      repeat (3) @(posedge clk);
      #1 rst_n = 1'b1;
    end
  join_none

  initial begin
    wait (fin[0] && fin[1]);
    check(n_alerts[0] == 300 && n_alerts[1] == 300, "ALERT count");
    check(n_held[0] > 0 && n_held[1] > 0, "hold-off exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
