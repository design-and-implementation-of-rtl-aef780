// Check of PM sorting and candidate selection at its default size (C1 = 44,
// C2 = 5, four first-phase lanes, one second-phase decoder). Each trial
// delivers 44 random (PM, ID-match) results, sometimes through fewer than all
// lanes, with 0 to 9 matches, so that the "matched plus minima" rule and the
// "more than C2 matched, highest PMs" rule both occur. The published list,
// the match count, the sorting latency (C2 cycles for the minima plus a
// fixed 4, and C2 + 1 more for the maximum pass), the dispatch counter and
// the output selector are compared with values computed here.
module tb_bd_cand_select;
  localparam int C1 = 44, C2 = 5, NL1 = 4, N_DEC = 1, PW = 7, PM_W = 12, N_MAX = 512;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic clear;
  logic in_vld [NL1];
  logic [PW-1:0] in_pm [NL1];
  logic in_match [NL1];
  logic sel_done;
  logic [5:0] sel_idx [C2];
  logic [5:0] match_cnt;
  logic many_match;
  logic p2_next;
  logic [5:0] p2_idx [N_DEC];
  logic p2_vld [N_DEC];
  logic p2_more;
  logic f_vld [N_DEC], f_ok [N_DEC], f_match [N_DEC];
  logic [PM_W-1:0] f_pm [N_DEC];
  logic [N_MAX-1:0] f_u [N_DEC];
  logic [5:0] f_idx [N_DEC];
  logic [PM_W-1:0] pm_limit = '1;
  logic final_done, out_valid, out_found;
  logic [5:0] out_idx;
  logic [N_MAX-1:0] out_u;
  logic [PM_W-1:0] out_pm;

  bd_cand_select #(.C1(C1), .C2(C2), .NL1(NL1), .N_DEC(N_DEC), .PW(PW), .PM_W(PM_W), .N_MAX(N_MAX)) dut (.*);

  int checks = 0, failures = 0;
  int n_many = 0, n_fill = 0, n_none = 0;
  task automatic check(bit ok, string s);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", s); end
  endtask

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int pm[C1];
    bit mt[C1];
    clear = 0; p2_next = 0; final_done = 0;
    foreach (in_vld[k]) begin in_vld[k] = 0; in_pm[k] = '0; in_match[k] = 0; end
    f_vld[0] = 0; f_ok[0] = 0; f_match[0] = 0; f_pm[0] = '0; f_u[0] = '0; f_idx[0] = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 40; t++) begin
      int nm, exp[$], cyc, fed, pos;
      int best, bestpm;
      @(negedge clk);
      clear = 1;
      @(negedge clk);
      clear = 0;
      nm = int'($urandom_range(0, 9));
      if (t % 4 == 0) nm = 0;
      foreach (pm[c]) begin
        pm[c] = int'((t % 3 == 0) ? $urandom_range(0, 6) : $urandom_range(0, 127));
        mt[c] = 0;
      end
      for (int k = 0; k < nm; k++) mt[$urandom_range(0, C1 - 1)] = 1;
      nm = 0;
      foreach (mt[c]) if (mt[c]) nm++;
      // reference list
      exp = {};
      if (nm > C2) begin
        bit used[C1];
        foreach (used[c]) used[c] = 0;
        for (int k = 0; k < C2; k++) begin
          int b; b = -1;
          foreach (pm[c]) if (mt[c] && !used[c] && (b < 0 || pm[c] > pm[b])) b = c;
          used[b] = 1; exp.push_back(b);
        end
        n_many++;
      end else begin
        int mins[$];
        bit used[C1];
        mins = {};
        foreach (used[c]) used[c] = 0;
        for (int k = 0; k < C2; k++) begin
          int b; b = -1;
          foreach (pm[c]) if (!used[c] && (b < 0 || pm[c] < pm[b])) b = c;
          used[b] = 1; mins.push_back(b);
        end
        foreach (mt[c]) if (mt[c]) exp.push_back(c);
        foreach (mins[k]) if (!mt[mins[k]] && exp.size() < C2) exp.push_back(mins[k]);
        if (nm < C2) n_fill++;
      end
      // feed, sometimes with only some lanes valid
      pos = 0;
      while (pos < C1) begin
        int nl;
        nl = (t % 2) ? int'($urandom_range(1, NL1)) : NL1;
        fed = 0;
        for (int k = 0; k < NL1; k++) begin
          in_vld[k] = (k < nl) && (pos + fed < C1);
          if (in_vld[k]) begin
            in_pm[k] = PW'(pm[pos + fed]);
            in_match[k] = mt[pos + fed];
            fed++;
          end
        end
        pos += fed;
        @(negedge clk);
      end
      foreach (in_vld[k]) in_vld[k] = 0;
      cyc = 0;
      while (!sel_done) begin @(negedge clk); cyc++; end
      check(int'(match_cnt) == nm, $sformatf("t%0d match_cnt %0d exp %0d", t, match_cnt, nm));
      check(many_match == (nm > C2), $sformatf("t%0d many_match", t));
      check(cyc == ((nm > C2) ? 2 * C2 + 5 : C2 + 4), $sformatf("t%0d sort cycles %0d many %0d", t, cyc, nm > C2));
      for (int k = 0; k < C2; k++)
        check(int'(sel_idx[k]) == exp[k], $sformatf("t%0d list[%0d]=%0d exp %0d", t, k, sel_idx[k], exp[k]));
      // second phase: dispatch and results
      best = -1; bestpm = 0;
      for (int k = 0; k < C2; k++) begin
        @(negedge clk);
        check(p2_more && p2_vld[0] && int'(p2_idx[0]) == exp[k], $sformatf("t%0d dispatch %0d", t, k));
        p2_next = 1;
        @(negedge clk);
        p2_next = 0;
        f_vld[0] = 1; f_idx[0] = 6'(exp[k]);
        f_ok[0] = 1'($urandom_range(0, 3) != 0);
        f_match[0] = (t % 5 == 2) ? 1'b0 : 1'($urandom);
        f_pm[0] = PM_W'($urandom_range(0, 40));
        f_u[0] = {16{32'($urandom)}};
        if (f_ok[0] && f_match[0] && (best < 0 || int'(f_pm[0]) < bestpm)) begin
          best = exp[k]; bestpm = int'(f_pm[0]);
        end
        @(negedge clk);
        f_vld[0] = 0;
      end
      check(!p2_more, $sformatf("t%0d dispatch not exhausted", t));
      final_done = 1;
      @(negedge clk);
      final_done = 0;
      check(out_valid && out_found == (best >= 0), $sformatf("t%0d found", t));
      if (best >= 0)
        check(int'(out_idx) == best && int'(out_pm) == bestpm, $sformatf("t%0d out %0d exp %0d", t, out_idx, best));
      else
        n_none++;
    end
    check(n_many > 0 && n_fill > 0 && n_none > 0, "a selection case never occurred");
    $display("many=%0d fill=%0d none=%0d", n_many, n_fill, n_none);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
