// Check of the iterative PM sorter with the default C1 = 44, C2 = 5: the
// minimum mode must return the five smallest metrics (ties to the lower
// index) in ascending order in exactly C2 cycles; the maximum mode over an
// eligibility mask must return the largest eligible ones and stop early
// when fewer than C2 entries are eligible.
module tb_bd_pm_sorter;
  localparam int C1 = 44, K = 5, PW = 7;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start, find_max, busy, done;
  logic [PW-1:0] pm [C1];
  logic eligible [C1];
  logic [5:0] out_idx [K];
  logic out_vld [K];
  int checks = 0, failures = 0;

  bd_pm_sorter #(.C1(C1), .K(K), .PW(PW)) dut (.*);

  task automatic check(bit ok, string s);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", s); end
  endtask

  initial begin : watchdog
    repeat (20000) @(negedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    start = 0; find_max = 0;
    foreach (pm[c]) begin pm[c] = '0; eligible[c] = 1; end
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 200; t++) begin
      int exp[$];
      int ne, cyc;
      bit mx;
      exp = {};
      mx = (t % 2 == 1);
      ne = 0;
      foreach (pm[c]) begin
        pm[c] = PW'((t % 5 == 0) ? $urandom_range(0, 5) : $urandom_range(0, 127));
        eligible[c] = mx ? ((t % 6 == 1) ? (c % 15 == 0) : 1'($urandom)) : 1'b1;
        if (eligible[c]) ne++;
      end
      // reference: repeated selection
      begin
        bit used[C1];
        foreach (used[c]) used[c] = 0;
        for (int k = 0; k < K && k < ne; k++) begin
          int b;
          b = -1;
          foreach (pm[c])
            if (eligible[c] && !used[c] &&
                (b < 0 || (mx ? pm[c] > pm[b] : pm[c] < pm[b]))) b = c;
          used[b] = 1;
          exp.push_back(b);
        end
      end
      find_max = mx;
      start = 1;
      @(negedge clk);
      start = 0;
      cyc = 0;
      while (!done) begin @(negedge clk); cyc++; end
      for (int k = 0; k < K; k++) begin
        if (k < exp.size())
          check(out_vld[k] && int'(out_idx[k]) == exp[k],
                $sformatf("t%0d k%0d got %0d exp %0d", t, k, out_idx[k], exp[k]));
        else
          check(!out_vld[k], $sformatf("t%0d k%0d should be empty", t, k));
      end
      // C2 cycles when enough entries are eligible (one more to see no hit otherwise)
      check(cyc == ((exp.size() == K) ? K : exp.size() + 1),
            $sformatf("t%0d cycles %0d", t, cyc));
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
