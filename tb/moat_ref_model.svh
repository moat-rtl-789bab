// moat_ref_model.svh: command-level reference model of one MOAT bank, included by the
// bank and top-level testbenches. It is written from the behaviour of the
// design, not from the RTL: a counter per row, two shadow counters for the
// last two rows of the group refreshed last, the tracker (one CTA entry, or
// n_entries entries: free entry first, else replace the lowest count; the
// highest count, lowest index on ties, is mitigated) with the ETH / ATH
// rules, and the CMA with its mitigation steps (victims -1, +1, -2, +2 ...,
// then the counter reset), spread evenly over a period of mit_period REFs
// (one step per REF for the default of 5; none for 0) and a whole
// mitigation per RFM.

  class bank_model;
    int unsigned rows, rpg, ath, eth, br, steps, cmax;
    int unsigned ctr[];
    int unsigned ptr;
    bit          sh_valid;
    int unsigned sh[2];
    int unsigned n_entries, mit_period;
    bit          cta_valid[];
    int unsigned cta_row[], cta_ctr[];
    bit          cma_valid;
    int unsigned cma_row, step, phase;
    // expected victim refreshes, in order
    int          vref_q[$];
    // statistics
    int unsigned n_shadow, n_insert, n_overwrite, n_reject_eth, n_reject_lower;
    int unsigned n_pro, n_rea, n_preempt, n_edge, n_sat;

    function new(int unsigned rows, int unsigned rpg, int unsigned ctr_w,
                 int unsigned ath, int unsigned eth, int unsigned br,
                 int unsigned n_entries = 1, int unsigned mit_period = 5);
      this.rows = rows; this.rpg = rpg; this.ath = ath; this.eth = eth;
      this.br = br; this.steps = 2 * br + 1; this.cmax = (1 << ctr_w) - 1;
      ctr = new[rows];
      this.n_entries = n_entries;
      this.mit_period = mit_period;
      cta_valid = new[n_entries];
      cta_row = new[n_entries];
      cta_ctr = new[n_entries];
      foreach (cta_valid[i]) begin cta_valid[i] = 0; cta_row[i] = 0; cta_ctr[i] = 0; end
      foreach (ctr[i]) ctr[i] = 0;
    endfunction

    function int shadow_idx(int unsigned row);
      int unsigned sg = (ptr + rows / rpg - 1) % (rows / rpg);
      if (!sh_valid || row / rpg != sg || row % rpg < rpg - 2) return -1;
      return int'(row % rpg) - int'(rpg - 2);
    endfunction

    function int unsigned sat_inc(int unsigned v);
      return (v >= cmax) ? cmax : v + 1;
    endfunction

    // Precharge of row: returns the count reported to the tracker.
    function int unsigned pre(int unsigned row);
      int unsigned eff;
      int idx = shadow_idx(row);
      ctr[row] = sat_inc(ctr[row]);
      if (ctr[row] == cmax) n_sat++;
      eff = ctr[row];
      if (idx >= 0) begin
        int unsigned s = sat_inc(sh[idx]);
        if (s > eff) eff = s;
        sh[idx] = eff;
        n_shadow++;
      end
      begin
        int hit = -1, slot = -1, lo = -1;
        foreach (cta_valid[i]) begin
          if (cta_valid[i] && cta_row[i] == row && hit < 0) hit = i;
          if (!cta_valid[i] && slot < 0) slot = i;
          if (cta_valid[i] && (lo < 0 || cta_ctr[i] < cta_ctr[lo])) lo = i;
        end
        if (hit >= 0) begin
          int unsigned inc = sat_inc(cta_ctr[hit]);
          cta_ctr[hit] = (eff > inc) ? eff : inc;
        end else if (eff > eth && (slot >= 0 || eff > cta_ctr[lo])) begin
          if (slot < 0) begin
            n_overwrite++;
            slot = lo;
          end
          n_insert++;
          cta_valid[slot] = 1; cta_row[slot] = row; cta_ctr[slot] = eff;
        end else if (eff <= eth) n_reject_eth++;
        else n_reject_lower++;
      end
      return eff;
    endfunction

    // Index of the highest-count tracked row (lowest index on ties), -1 if none.
    function int top();
      int t = -1;
      foreach (cta_valid[i])
        if (cta_valid[i] && (t < 0 || cta_ctr[i] > cta_ctr[t])) t = i;
      return t;
    endfunction

    function bit alert_req();
      int t = top();
      return t >= 0 && cta_ctr[t] > ath;
    endfunction

    // Hand the top tracked row to the CMA.
    function void take();
      int t = top();
      cma_valid = 1; cma_row = cta_row[t]; step = 0; cta_valid[t] = 0;
    endfunction

    // One mitigation step of the CMA row.
    function void do_step(bit reactive);
      if (step == steps - 1) begin
        int idx = shadow_idx(cma_row);
        ctr[cma_row] = 0;
        if (idx >= 0) sh[idx] = 0;
        cma_valid = 0; step = 0;
        if (reactive) n_rea++; else n_pro++;
      end else begin
        int d = int'(step / 2 + 1);
        int t = (step % 2 == 1) ? int'(cma_row) + d : int'(cma_row) - d;
        if (t >= 0 && t < int'(rows)) vref_q.push_back(t);
        else n_edge++;
        step++;
      end
    endfunction

    // REF: refresh group ptr, then one mitigation step.
    function void refresh();
      int unsigned g = ptr;
      sh[0] = ctr[g * rpg + rpg - 2];
      sh[1] = ctr[g * rpg + rpg - 1];
      sh_valid = 1;
      for (int r = 0; r < int'(rpg); r++) ctr[g * rpg + r] = 0;
      ptr = (ptr + 1) % (rows / rpg);
      if (mit_period != 0) begin
        int unsigned q = ((phase + 1) * steps) / mit_period - (phase * steps) / mit_period;
        if (phase == 0 && top() >= 0 && !cma_valid) take();
        phase = (phase + 1) % mit_period;
        repeat (q) if (cma_valid) do_step(0);
      end
    endfunction

    // RFM: reactive mitigation of the CTA row (or the rest of the CMA row).
    function void rfm();
      if (top() >= 0) begin
        if (cma_valid) n_preempt++;
        take();
      end
      while (cma_valid) do_step(1);
    endfunction
  endclass

