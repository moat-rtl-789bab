// tb_safe_reset_shadow: self-checking test of the refresh pointer and the two
// shadow counters. A testbench model keeps the pointer, the shadowed group
// and both shadow counts; random REF completions, precharge increments
// (biased towards the two shadowed rows) and mitigation clears are applied
// and eff_count and grp_ptr are compared with the model every time.
module tb_safe_reset_shadow;
  import moat_pkg::*;
  localparam int unsigned ROWS = 64, RPG = 8, CTR_W = 8;
  localparam int unsigned ROW_W = $clog2(ROWS), GROUPS = ROWS / RPG, GRP_W = $clog2(GROUPS);

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic [GRP_W-1:0] grp_ptr;
  logic             ref_done = 1'b0, inc_valid = 1'b0, clr_valid = 1'b0;
  logic [CTR_W-1:0] ref_last2 [2];
  logic [ROW_W-1:0] inc_row = '0, clr_row = '0;
  logic [CTR_W-1:0] inc_arr_count = '0, eff_count;
  logic             eff_from_shadow;

  safe_reset_shadow #(.ROWS(ROWS), .ROWS_PER_GROUP(RPG), .CTR_W(CTR_W)) dut (.*);

  int checks = 0, failures = 0;
  int unsigned m_ptr = 0, m_cnt [2] = '{0, 0};
  bit m_valid = 0;
  int unsigned n_shadow_hits = 0, n_wraps = 0;

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", msg);
    end
  endtask

  function automatic int shadow_idx(input int unsigned row);
    int unsigned sg = (m_ptr + GROUPS - 1) % GROUPS;
    if (!m_valid || row / RPG != sg || row % RPG < RPG - 2) return -1;
    return int'(row % RPG) - int'(RPG - 2);
  endfunction

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    ref_last2[0] = '0; ref_last2[1] = '0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1'b1;
    for (int i = 0; i < 5000; i++) begin
      automatic int unsigned k = $urandom_range(99);
      @(negedge clk);
      if (k < 10) begin
        ref_done = 1'b1;
        ref_last2[0] = CTR_W'($urandom_range(200));
        ref_last2[1] = CTR_W'($urandom_range(200));
      end else if (k < 90) begin
        automatic int unsigned row;
        automatic int idx;
        automatic int unsigned arr = $urandom_range(30);
        if (k < 60 && m_valid)
          row = ((m_ptr + GROUPS - 1) % GROUPS) * RPG + RPG - 2 + $urandom_range(1);
        else
          row = $urandom_range(ROWS - 1);
        inc_valid = 1'b1; inc_row = ROW_W'(row); inc_arr_count = CTR_W'(arr);
        idx = shadow_idx(row);
        #1;
        if (idx >= 0) begin
          automatic int unsigned e = (m_cnt[idx] == 255) ? 255 : m_cnt[idx] + 1;
          if (arr > e) e = arr;
          n_shadow_hits++;
          check(eff_count == CTR_W'(e) && eff_from_shadow,
                $sformatf("row %0d shadow: eff %0d exp %0d", row, eff_count, e));
          m_cnt[idx] = e;
        end else begin
          check(eff_count == CTR_W'(arr) && !eff_from_shadow,
                $sformatf("row %0d: eff %0d exp %0d", row, eff_count, arr));
        end
      end else begin
        automatic int unsigned row = (k < 95 && m_valid)
          ? ((m_ptr + GROUPS - 1) % GROUPS) * RPG + RPG - 1 : $urandom_range(ROWS - 1);
        automatic int idx = shadow_idx(row);
        clr_valid = 1'b1; clr_row = ROW_W'(row);
        if (idx >= 0) m_cnt[idx] = 0;
      end
      @(posedge clk);
      if (ref_done) begin
        m_cnt[0] = ref_last2[0]; m_cnt[1] = ref_last2[1];
        m_valid = 1;
        m_ptr = (m_ptr + 1) % GROUPS;
        if (m_ptr == 0) n_wraps++;
      end
      #1 ref_done = 1'b0; inc_valid = 1'b0; clr_valid = 1'b0;
      check(grp_ptr == GRP_W'(m_ptr), $sformatf("grp_ptr %0d exp %0d", grp_ptr, m_ptr));
    end
    check(n_shadow_hits > 100, "shadow counters were exercised");
    check(n_wraps > 0, "group pointer wrapped");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
