// Full-size run of the blind detector: the top at its default parameters
// (N_MAX = 512, L1 = 2, L_MAX = 8, P = 64, C1 = 44, C2 = 5, one decoder,
// 16-bit UE ID), with 22 candidates of length 512 and 22 of length 256, each
// carrying K = 57 information bits and 16 ID bits placed by ID mode 1 (the
// 16 most reliable bit channels after the K information ones, by
// polarization weight). Two detections: in the first the UE ID is sent on one
// candidate over a quiet channel, in the second on none; pm_limit is 100.
// As in the reduced
// end-to-end test, the result, the second-phase list, the stopping points
// and the cycle count are compared with the reference model and the
// schedule (per round: load + decode + 5 cycles; sorting C2 + 4 cycles, or
// 2 C2 + 5 with more than C2 ID matches; closing 4 cycles). The measured
// latency is printed next to the 14720-cycle worst case reported for the
// same system with one decoder and a decoder that processes a tree node per
// cycle.
module tb_bd_top_full;
  import bd_pkg::*;
  import bd_ref_pkg::*;
  localparam int N_MAX = N_MAX_D, L_MAX = L_MAX_D, L1 = L1_D, P = P_D, C1 = C1_D, C2 = C2_D,
                 NSCL = N_SCL_MAX_D, IDB = ID_BITS_D, NUM_CODES = NUM_CODES_D, Q = Q_D,
                 W = W_D, PM_W = PM_W_D, K = 57;
  localparam int NCH = L_MAX / L1, NL1 = NSCL * NCH;
  localparam int TRIALS = 2;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic in_we;
  logic [5:0] in_cand;
  logic [2:0] in_chunk;
  logic [0:0] in_code;
  logic signed [Q-1:0] in_data [P];
  logic [3:0] code_nlog2 [NUM_CODES];
  bit_type_t code_bt [NUM_CODES][N_MAX];
  logic [IDB-1:0] ue_id;
  logic [PM_W-1:0] pm_limit;
  logic go, busy, done, out_valid, out_found;
  logic [5:0] out_idx;
  logic [N_MAX-1:0] out_u;
  logic [PM_W-1:0] out_pm;
  logic [5:0] p1_match_cnt;
  logic p1_many_match;
  logic [5:0] p2_list [C2];
  logic dec_busy [NSCL];
  logic [9:0] dec_est_bits [NSCL];

  bd_top dut (.*);

  int checks = 0, failures = 0;
  int m_early = 0, m_many = 0, m_fill = 0, m_found = 0, m_none = 0, m_shared = 0;
  task automatic check(bit ok, string s);
    checks++;
    if (!ok) begin failures++; if (failures < 30) $display("FAIL %s", s); end
  endtask

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // phase-2 decoder completions, mapped to list entries
  int p1_decodes, falls, p2_est [C2];
  bit prev_busy [NSCL];
  always @(posedge clk) begin
    for (int d = 0; d < NSCL; d++) begin
      if (prev_busy[d] && !dec_busy[d]) begin
        if (falls >= p1_decodes) begin
          int e;
          e = ((falls - p1_decodes) / NSCL) * NSCL + d;
          if (e < C2) p2_est[e] = int'(dec_est_bits[d]);
        end
        falls++;
      end
      prev_busy[d] = dec_busy[d];
    end
  end

  initial begin
    int bt [NUM_CODES][];
    int nlog [NUM_CODES];
    int y [C1][];
    int cc [C1];
    int rel [], lst [$];
    bit mt [];
    ref_res_t r1 [C1];
    ref_res_t r2 [C2];
    nlog[0] = 9; nlog[1] = 8;
    for (int c = 0; c < NUM_CODES; c++) begin
      make_code_pw(nlog[c], K, IDB, 1'b0, bt[c]);
      code_nlog2[c] = 4'(nlog[c]);
      for (int j = 0; j < N_MAX; j++)
        code_bt[c][j] = (j < (1 << nlog[c])) ? bit_type_t'(bt[c][j]) : BT_FROZEN;
    end
    for (int c = 0; c < C1; c++) cc[c] = (c < C1 / 2) ? 1 : 0;
    in_we = 0; go = 0; ue_id = '0; pm_limit = '1; in_cand = '0; in_chunk = '0; in_code = '0;
    foreach (in_data[p]) in_data[p] = '0;
    foreach (prev_busy[d]) prev_busy[d] = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;

    for (int t = 0; t < TRIALS; t++) begin
      logic [IDB-1:0] ue;
      int nsend, noise, best, bestpm, cyc, model, nm, lim;
      bit sends [C1];
      ue = IDB'($urandom);
      // metric acceptance threshold
      lim = 100;
      // how many candidates carry this UE's ID
      nsend = (t == 0) ? 1 : 0;
      noise = 10;
      foreach (sends[c]) sends[c] = 0;
      for (int k = 0; k < nsend; k++) sends[(t * 5 + k * 7) % C1] = 1;
      // frames and first-phase reference
      rel = new[C1];
      mt  = new[C1];
      for (int c = 0; c < C1; c++) begin
        bit u[];
        int idi, n;
        logic [IDB-1:0] sid;
        n = nlog[cc[c]];
        sid = sends[c] ? ue : (ue ^ IDB'($urandom_range(1, (1 << IDB) - 1)));
        u = new[1 << n];
        idi = 0;
        foreach (u[j]) begin
          u[j] = (bt[cc[c]][j] == 1) ? 1'($urandom) : 1'b0;
          if (bt[cc[c]][j] == 2) begin u[j] = sid[idi]; idi++; end
        end
        channel(u, n, 12, noise, Q, y[c]);
        r1[c] = scl(y[c], n, bt[cc[c]], L1, 1'b0, 32'(ue), W, PM_W, P);
        rel[c] = r1[c].rel;
        mt[c]  = r1[c].match;
      end
      select_list(rel, mt, C2, lst);
      nm = 0;
      foreach (mt[c]) if (mt[c]) nm++;
      best = -1; bestpm = 0;
      for (int k = 0; k < C2; k++) begin
        r2[k] = scl(y[lst[k]], nlog[cc[lst[k]]], bt[cc[lst[k]]], L_MAX, 1'b1, 32'(ue), W, PM_W, P);
        if (r2[k].vld && r2[k].match && r2[k].pm <= lim && (best < 0 || r2[k].pm < bestpm)) begin best = k; bestpm = r2[k].pm; end
      end
      // schedule model
      model = 0;
      p1_decodes = 0;
      begin
        int b;
        b = 0;
        while (b < C1) begin
          int sz, tmax;
          sz = 0;
          while (sz < NL1 && b + sz < C1 && cc[b + sz] == cc[b]) sz++;
          tmax = 0;
          for (int k = 0; k < sz; k++) if (r1[b + k].cycles > tmax) tmax = r1[b + k].cycles;
          model += NCH * ((1 << nlog[cc[b]]) / P) + tmax + 5;
          p1_decodes += (sz + NCH - 1) / NCH;
          if (sz > NSCL) m_shared++;
          b += sz;
        end
      end
      model += (nm > C2) ? 2 * C2 + 5 : C2 + 4;
      for (int k = 0; k < C2; k += NSCL) begin
        int tmax, chmax;
        tmax = 0; chmax = 1;
        for (int d = 0; d < NSCL && k + d < C2; d++) begin
          if (r2[k + d].cycles > tmax) tmax = r2[k + d].cycles;
          if ((1 << nlog[cc[lst[k + d]]]) / P > chmax) chmax = (1 << nlog[cc[lst[k + d]]]) / P;
        end
        model += chmax + tmax + 5;
      end
      model += 4;
      // load the candidate buffer
      for (int c = 0; c < C1; c++)
        for (int ch = 0; ch < (1 << nlog[cc[c]]) / P; ch++) begin
          in_we = 1; in_cand = 6'(c); in_chunk = 3'(ch); in_code = 1'(cc[c]);
          for (int p = 0; p < P; p++) in_data[p] = Q'(y[c][ch * P + p]);
          @(negedge clk);
        end
      in_we = 0;
      ue_id = ue;
      pm_limit = PM_W'(lim);
      falls = 0;
      foreach (p2_est[k]) p2_est[k] = -1;
      go = 1;
      @(negedge clk);
      go = 0;
      cyc = 1;
      while (!done) begin @(negedge clk); cyc++; end
      check(out_valid, $sformatf("t%0d out_valid", t));
      check(int'(p1_match_cnt) == nm, $sformatf("t%0d match count %0d exp %0d", t, p1_match_cnt, nm));
      check(p1_many_match == (nm > C2), $sformatf("t%0d many", t));
      for (int k = 0; k < C2; k++)
        check(int'(p2_list[k]) == lst[k], $sformatf("t%0d list[%0d] %0d exp %0d", t, k, p2_list[k], lst[k]));
      for (int k = 0; k < C2; k++) begin
        check(p2_est[k] == r2[k].est, $sformatf("t%0d est[%0d] %0d exp %0d", t, k, p2_est[k], r2[k].est));
        if (r2[k].est < (1 << nlog[cc[lst[k]]])) m_early++;
      end
      check(out_found == (best >= 0), $sformatf("t%0d found %0d exp %0d", t, out_found, best >= 0));
      if (best >= 0) begin
        m_found++;
        check(int'(out_idx) == lst[best], $sformatf("t%0d idx %0d exp %0d", t, out_idx, lst[best]));
        check(out_u == r2[best].u[N_MAX-1:0], $sformatf("t%0d bits", t));
        check(int'(out_pm) == bestpm, $sformatf("t%0d pm", t));
      end else m_none++;
      if (nm > C2) m_many++;
      if (nm < C2) m_fill++;
      check(cyc == model, $sformatf("t%0d latency %0d cycles, schedule %0d", t, cyc, model));
      if (t == 0) begin
        for (int c = 0; c < C1; c++)
          if (sends[c]) check(out_found && int'(out_idx) == c, $sformatf("sent candidate %0d not detected", c));
      end
      $display("latency %0d cycles = %0.1f us at 1 GHz (14720 cycles reported for the same configuration)",
               cyc, real'(cyc) / 1000.0);
      $display("trial %0d: sent on %0d, noise %0d, matches %0d, found %0d (cand %0d, pm %0d), %0d cycles",
               t, nsend, noise, nm, out_found, out_idx, out_pm, cyc);
    end
    check(m_found == 1 && m_none == 1, "expected one detection and one miss");
    $display("mechanisms: early_stop=%0d many_match=%0d topped_up=%0d found=%0d none=%0d shared_rounds=%0d",
             m_early, m_many, m_fill, m_found, m_none, m_shared);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
