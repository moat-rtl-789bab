// tb_mitigation_engine: tests the CMA register and mitigation sequencer at
// the default mitigation period of 5 REFs (one step per REF) and at the other
// evaluated rates: one aggressor row per 1, 3 and 10 REFs, and none (ALERT
// only). Each period runs in its own mitigation_engine_env; the results are
// summed.
module tb_mitigation_engine;
  localparam int N = 5;
  localparam int unsigned PERIODS [N] = '{5, 1, 3, 10, 0};
  logic done_v [N];
  int   checks_v [N], failures_v [N];

  for (genvar i = 0; i < N; i++) begin : g_env
    mitigation_engine_env #(.PERIOD(PERIODS[i])) u_env (
      .done_all(done_v[i]), .checks(checks_v[i]), .failures(failures_v[i]));
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
    #2ms;
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
