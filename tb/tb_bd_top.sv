// End-to-end test of the blind detector at reduced size: codes of length 32
// and 64 in a design sized for 64, L1 = 2, L_MAX = 4, P = 8 (so the upper
// stages take several steps), C1 = 12 candidates (six per length), C2 = 3,
// two decoders, 12-bit UE ID. The length-64 code follows ID mode 1; the
// length-32 code uses the same positions with the ID bits decoded last, so
// that the list is full when the ID is checked and early stopping occurs.
// Each trial sends the UE ID on zero, one or several candidates at varying
// noise; the metric threshold pm_limit is open on odd trials and 40 on even
// ones. The complete
// detection (first phase, match count, second-phase list, second phase with
// early stopping, output candidate, bits and metric) is recomputed with the
// reference model, and the cycle count is compared with the schedule:
//   per round  load + decode + 5 cycles, decode from the reference model,
//   sorting    C2 + 4 cycles (2 C2 + 5 when more than C2 IDs matched),
//   closing    4 cycles (empty dispatch check, final state, done).
// Each mechanism (early stop, more than C2 matches, list topped up with
// minima, detection, no detection, several candidates per decoder) must
// occur at least once.
module tb_bd_top;
  import bd_pkg::*;
  import bd_ref_pkg::*;
  localparam int N_MAX = 64, L_MAX = 4, L1 = 2, P = 8, C1 = 12, C2 = 3, NSCL = 2, IDB = 12,
                 NUM_CODES = 2, Q = 6, W = 8, PM_W = 12, K = 8;
  localparam int NCH = L_MAX / L1, NL1 = NSCL * NCH;
  localparam int TRIALS = 14;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic in_we;
  logic [3:0] in_cand;
  logic [2:0] in_chunk;
  logic [0:0] in_code;
  logic signed [Q-1:0] in_data [P];
  logic [2:0] code_nlog2 [NUM_CODES];
  bit_type_t code_bt [NUM_CODES][N_MAX];
  logic [IDB-1:0] ue_id;
  logic [PM_W-1:0] pm_limit;
  logic go, busy, done, out_valid, out_found;
  logic [3:0] out_idx;
  logic [N_MAX-1:0] out_u;
  logic [PM_W-1:0] out_pm;
  logic [4:0] p1_match_cnt;
  logic p1_many_match;
  logic [3:0] p2_list [C2];
  logic dec_busy [NSCL];
  logic [6:0] dec_est_bits [NSCL];

  bd_top #(.N_MAX(N_MAX), .L_MAX(L_MAX), .L1(L1), .P(P), .C1(C1), .C2(C2), .N_SCL_MAX(NSCL),
           .ID_BITS(IDB), .NUM_CODES(NUM_CODES), .Q(Q), .W(W), .PM_W(PM_W)) dut (.*);

  int checks = 0, failures = 0;
  int m_early = 0, m_many = 0, m_fill = 0, m_found = 0, m_none = 0, m_shared = 0;
  task automatic check(bit ok, string s);
    checks++;
    if (!ok) begin failures++; if (failures < 30) $display("FAIL %s", s); end
  endtask

  initial begin : watchdog
    repeat (400000) @(posedge clk);
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
    nlog[0] = 6; nlog[1] = 5;
    for (int c = 0; c < NUM_CODES; c++) begin
      make_code_pw(nlog[c], K, IDB, 1'(c), bt[c]);
      code_nlog2[c] = 3'(nlog[c]);
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
      // metric acceptance threshold: open on odd trials, tight on even ones
      lim = (t % 2) ? (1 << PM_W) - 1 : 40;
      // how many candidates carry this UE's ID
      nsend = (t % 5 == 0) ? 0 : ((t % 5 == 3) ? 5 : 1);
      noise = (t % 3 == 0) ? 30 : ((t % 3 == 1) ? 10 : 20);
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
          in_we = 1; in_cand = 4'(c); in_chunk = 3'(ch); in_code = 1'(cc[c]);
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
      $display("trial %0d: sent on %0d, noise %0d, matches %0d, found %0d (cand %0d, pm %0d), %0d cycles",
               t, nsend, noise, nm, out_found, out_idx, out_pm, cyc);
    end
    check(m_early > 0, "no early stop");
    check(m_many > 0, "more than C2 matches never happened");
    check(m_fill > 0, "list never topped up with minima");
    check(m_found > 0, "never detected");
    check(m_none > 0, "never missed/absent");
    check(m_shared > 0, "no round with several candidates per decoder");
    $display("mechanisms: early_stop=%0d many_match=%0d topped_up=%0d found=%0d none=%0d shared_rounds=%0d",
             m_early, m_many, m_fill, m_found, m_none, m_shared);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
