// mitigation_engine_env: self-checking test environment for the CMA register
// and the mitigation sequencer at a mitigation period of PERIOD REFs
// (ROWS = 64, blast radius 2: five steps). It plays the CTA (it offers a row
// and drops it on cta_take) and acknowledges every step after a random
// delay. A model predicts, for each REF slot and each RFM, which steps come
// out (victim rows -1, +1, -2, +2, then the counter reset, rows outside the
// bank flagged out of range; floor((k+1)*5/P) - floor(k*5/P) steps at the
// REF of phase k), when the CTA is taken, and when a mitigation completes.
// Directed cases cover a full proactive mitigation, the hand-over at phase
// 0, an RFM, an RFM that pre-empts a proactive mitigation and the bank
// edges. Instantiated by tb_mitigation_engine.
module mitigation_engine_env #(
  parameter int unsigned PERIOD = 5
) (
  output logic done_all,
  output int   checks,
  output int   failures
);
  import moat_pkg::*;
  localparam int unsigned ROWS = 64, BR = 2, STEPS = 2 * BR + 1;
  localparam int unsigned ROW_W = $clog2(ROWS), STEP_W = $clog2(STEPS + 1);
  localparam int unsigned PH_W = (PERIOD > 1) ? $clog2(PERIOD) : 1;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic              ref_slot = 1'b0, rfm_start = 1'b0, cta_valid = 1'b0;
  logic [ROW_W-1:0]  cta_row = '0;
  logic              cta_take, step_valid, step_is_reset, step_in_range, step_ack, done;
  logic              mit_done, mit_reactive, cma_valid;
  logic [ROW_W-1:0]  step_row, cma_row;
  logic [PH_W-1:0]   phase;

  mitigation_engine #(.ROWS(ROWS), .BLAST_RADIUS(BR), .MIT_PERIOD(PERIOD)) dut (.*);

  initial begin checks = 0; failures = 0; done_all = 1'b0; end
  // model
  int unsigned m_phase = 0, m_step = 0, m_row = 0;
  bit m_cma = 0;
  int unsigned n_pro = 0, n_rea = 0, n_edge = 0, n_preempt = 0;

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", msg);
    end
  endtask

  // random acknowledge delay
  int unsigned ack_wait = 0;
  assign step_ack = step_valid && (ack_wait == 0);
  always @(posedge clk) begin
    if (step_valid && ack_wait != 0) ack_wait <= ack_wait - 1;
    else ack_wait <= $urandom_range(2);
  end

  // Expected target of step s of row r.
  function automatic int step_target(input int unsigned r, input int unsigned s);
    if (s == STEPS - 1) return int'(r);
    return (s % 2 == 1) ? int'(r) + int'(s / 2 + 1) : int'(r) - int'(s / 2 + 1);
  endfunction

  // Run one REF slot (is_rfm = 0) or RFM (1) and check everything it does.
  task automatic run(input bit is_rfm);
    automatic int unsigned n_exp = 0, got = 0, cyc = 0;
    automatic bit exp_take, exp_mit_done = 0, saw_mit_done = 0, saw_take = 0;
    automatic int unsigned s0;
    // model: take and number of steps
    if (is_rfm) begin
      exp_take = cta_valid;
      if (exp_take && m_cma) n_preempt++;
      if (exp_take) begin m_cma = 1; m_row = cta_row; m_step = 0; end
      n_exp = m_cma ? STEPS - m_step : 0;
    end else begin
      automatic int unsigned q = (PERIOD == 0) ? 0
          : ((m_phase + 1) * STEPS) / PERIOD - (m_phase * STEPS) / PERIOD;
      exp_take = (PERIOD != 0) && (m_phase == 0) && cta_valid && !m_cma;
      if (exp_take) begin m_cma = 1; m_row = cta_row; m_step = 0; end
      n_exp = !m_cma ? 0 : (q < STEPS - m_step) ? q : STEPS - m_step;
      m_phase = (PERIOD == 0) ? 0 : (m_phase + 1) % PERIOD;
    end
    s0 = m_step;
    @(negedge clk);
    if (is_rfm) rfm_start = 1'b1; else ref_slot = 1'b1;
    #1 saw_take = cta_take;
    check(saw_take == exp_take, $sformatf("cta_take %0b exp %0b", saw_take, exp_take));
    @(posedge clk); #1 rfm_start = 1'b0; ref_slot = 1'b0;
    if (saw_take) cta_valid = 1'b0;
    while (!done && cyc < 100) begin
      if (step_valid && step_ack) begin
        automatic int t = step_target(m_row, s0 + got);
        automatic bit inr = (t >= 0) && (t < int'(ROWS));
        check(step_is_reset == (s0 + got == STEPS - 1), "reset flag");
        check(step_in_range == inr, $sformatf("in-range %0b for target %0d", step_in_range, t));
        if (inr) check(step_row == ROW_W'(t), $sformatf("step row %0d exp %0d", step_row, t));
        else n_edge++;
        got++;
      end
      if (mit_done) begin
        saw_mit_done = 1;
        check(mit_reactive == is_rfm, "mit_reactive");
      end
      @(posedge clk); #1 cyc++;
    end
    if (mit_done) begin saw_mit_done = 1; check(mit_reactive == is_rfm, "mit_reactive"); end
    check(got == n_exp, $sformatf("%s: %0d steps, expected %0d", is_rfm ? "RFM" : "REF", got, n_exp));
    m_step += got;
    if (m_cma && m_step == STEPS) begin
      exp_mit_done = 1; m_cma = 0; m_step = 0;
      if (is_rfm) n_rea++; else n_pro++;
    end
    check(saw_mit_done == exp_mit_done, "mit_done pulse");
    check(cma_valid == m_cma, "cma_valid");
    check(phase == PH_W'(m_phase), $sformatf("phase %0d exp %0d", phase, m_phase));
  endtask

  task automatic offer(input int unsigned row);
    cta_valid = 1'b1; cta_row = ROW_W'(row);
  endtask

  initial begin
    repeat (2) @(posedge clk);
    #1 rst_n = 1'b1;
    // proactive: one mitigation over one period of PERIOD REFs
    offer(20);
    for (int i = 0; i < int'(PERIOD); i++) run(0);
    check(n_pro == ((PERIOD != 0) ? 1 : 0), "proactive mitigation over one period");
    if (PERIOD > 1) begin
      // CTA offered mid-period waits for phase 0
      run(0); offer(30); run(0); check(cta_valid, "no take outside phase 0");
      while (m_phase != 0) run(0);
      run(0); check(!cta_valid && cma_valid, "taken at phase 0");
    end
    // RFM (pre-empting the proactive mitigation if one is running)
    offer(0); run(1);
    check(n_rea == 1 && n_preempt == ((PERIOD > 1) ? 1 : 0), "RFM mitigation / pre-emption");
    offer(ROWS - 1); run(1);
    // random
    for (int i = 0; i < 2000; i++) begin
      if (!cta_valid && $urandom_range(3) == 0) offer($urandom_range(ROWS - 1));
      run($urandom_range(9) == 0);
    end
    check(n_edge > 0 && n_rea > 10 && ((PERIOD != 0) ? n_pro > 10 : n_pro == 0), "all cases exercised");
    $display("period %0d: proactive %0d, reactive %0d, pre-empted %0d", PERIOD, n_pro, n_rea, n_preempt);
    done_all = 1'b1;
  end
endmodule
