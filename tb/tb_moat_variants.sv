// tb_moat_variants: runs the whole device end to end in the configurations
// evaluated besides the main one: ALERT levels 2 and 4 (two and four tracked
// rows per bank, RFMs per ALERT and ACTs required between ALERTs), and
// proactive mitigation rates of one aggressor row per 1, 3 and 10 REFs and
// none (ALERT only). Each runs in its own moat_variant_env; the results are
// summed. The main configuration (level 1, 5 REFs) is covered by
// tb_moat_top.
module tb_moat_variants;
  localparam int N = 6;
  localparam int unsigned LEVELS  [N] = '{2, 4, 1, 1, 1, 1};
  localparam int unsigned PERIODS [N] = '{5, 5, 1, 3, 10, 0};
  logic done_v [N];
  int   checks_v [N], failures_v [N];

  for (genvar i = 0; i < N; i++) begin : g_env
    moat_variant_env #(.LEVEL(LEVELS[i]), .PERIOD(PERIODS[i])) u_env (
      .done(done_v[i]), .checks(checks_v[i]), .failures(failures_v[i]));
  end

  function automatic int total(input int v [N]);
    automatic int t = 0;
    for (int i = 0; i < N; i++) t += v[i];
    return t;
  endfunction

  function automatic bit all_done();
    for (int i = 0; i < N; i++) if (!done_v[i]) return 0;
    return 1;
  endfunction

  initial begin : watchdog
    #100ms;
    $display("TB_RESULT checks=%0d failures=%0d", total(checks_v), total(failures_v) + 1);
    $finish;
  end

  initial begin
    #10;
    while (!all_done()) #100;
    $display("TB_RESULT checks=%0d failures=%0d", total(checks_v), total(failures_v));
    $finish;
  end
endmodule
