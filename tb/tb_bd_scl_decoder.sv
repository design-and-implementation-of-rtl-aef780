// Self-checking testbench of the flexible list-size SCL decoder.
//
// Runs random codes of two lengths (N = 16 and 32 in a decoder sized for 32,
// 4 PEs per path so that the top stages take several steps) in both list
// modes: L_MAX = 4 paths on one candidate, and L1 = 2 paths on each of two
// candidates at once. Frames carry the UE ID or another ID; early stopping is
// exercised in the L_MAX mode. Every result (validity, metric, reliability,
// ID match, decoded bits, estimated-bit count) and the cycle count are
// compared with the reference model in bd_ref_pkg.
module tb_bd_scl_decoder;
  import bd_pkg::*;
  import bd_ref_pkg::*;

  localparam int N_MAX = 32, L_MAX = 4, L1 = 2, P = 4, Q = 6, W = 8, PM_W = 12, IDB = 4;
  localparam int NCH = L_MAX / L1;
  localparam int NL = 5;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic                 ch_we [NCH];
  logic [2:0]           ch_addr;
  logic signed [Q-1:0]  ch_data [P];
  logic                 start;
  list_mode_t           list_mode;
  logic                 es_en;
  logic                 grp_vld [NCH];
  logic [2:0]           n_log2;
  bit_type_t            bit_type [N_MAX];
  logic [IDB-1:0]       ue_id;
  logic                 busy, done;
  logic [NL:0]          est_bits;
  logic                 res_vld [NCH];
  logic [PM_W-1:0]      res_pm [NCH];
  logic [W-2:0]         res_rel [NCH];
  logic                 res_match [NCH];
  logic [N_MAX-1:0]     res_u [NCH];

  bd_scl_decoder #(.N_MAX(N_MAX), .L_MAX(L_MAX), .L1(L1), .P(P), .Q(Q), .W(W),
                   .PM_W(PM_W), .ID_BITS(IDB)) dut (.*);

  int checks = 0, failures = 0;
  int n_split_runs = 0, n_es_stops = 0;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  initial begin : watchdog
    repeat (400000) @(negedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int y[NCH][];
    int bt[];
    ref_res_t ex [NCH];
    start = 0; es_en = 0; list_mode = LM_L1; ch_addr = '0; ue_id = '0; n_log2 = 5;
    foreach (ch_we[g]) begin ch_we[g] = 0; grp_vld[g] = 0; end
    foreach (ch_data[p]) ch_data[p] = '0;
    foreach (bit_type[j]) bit_type[j] = BT_FROZEN;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);

    for (int trial = 0; trial < 60; trial++) begin
      int n, k, L, ncyc, noise;
      bit es;
      list_mode_t m;
      logic [IDB-1:0] ue;
      n  = (trial % 3 == 0) ? 4 : 5;
      k  = int'($urandom_range(2, 8));
      m  = (trial % 2) ? LM_LMAX : LM_L1;
      es = (m == LM_LMAX) && (trial % 4 == 1 || trial % 4 == 3) && (trial % 8 != 7);
      L  = (m == LM_LMAX) ? L_MAX : L1;
      ue = IDB'($urandom);
      noise = (trial < 10) ? 0 : int'($urandom_range(4, 18));
      make_code(n, k, IDB, bt);
      for (int g = 0; g < NCH; g++) begin
        bit u[];
        int idi;
        logic [IDB-1:0] sent;
        // even trials of es mode send a foreign ID to trigger early stop
        sent = (es && (trial % 8 == 3)) ? ~ue : ((g == 1 && trial % 5 == 0) ? ue ^ 4'b0100 : ue);
        u = new[1 << n];
        idi = 0;
        foreach (u[j]) begin
          u[j] = 0;
          if (bt[j] == 1) u[j] = 1'($urandom);
          if (bt[j] == 2) begin u[j] = sent[idi]; idi++; end
        end
        channel(u, n, 12, noise, Q, y[g]);
        ex[g] = scl(y[g], n, bt, L, es, 32'(ue), W, PM_W, P);
      end
      // load channel memories, group by group
      for (int g = 0; g < NCH; g++) begin
        for (int c = 0; c < (1 << n) / P; c++) begin
          ch_addr = 3'(c);
          foreach (ch_we[h]) ch_we[h] = (h == g);
          for (int p = 0; p < P; p++) ch_data[p] = Q'(y[g][c * P + p]);
          @(negedge clk);
        end
      end
      foreach (ch_we[h]) ch_we[h] = 0;
      foreach (bit_type[j]) bit_type[j] = (j < (1 << n)) ? bit_type_t'(bt[j]) : BT_FROZEN;
      n_log2 = 3'(n); ue_id = ue; list_mode = m; es_en = es;
      grp_vld[0] = 1; grp_vld[1] = (m == LM_L1) && (trial % 7 != 5);
      start = 1;
      @(negedge clk);
      start = 0;
      ncyc = 0;
      while (!done) begin @(negedge clk); ncyc++; end
      if (m == LM_LMAX) n_split_runs++;
      if (es && ex[0].est < (1 << n)) n_es_stops++;
      for (int g = 0; g < NCH; g++) begin
        bit gu;
        gu = (m == LM_L1) ? grp_vld[g] : (g == 0);
        if (!gu) begin
          check(res_vld[g] == 0, $sformatf("t%0d g%0d unused group reports valid", trial, g));
          continue;
        end
        check(res_vld[g] == ex[g].vld, $sformatf("t%0d g%0d vld %0d exp %0d", trial, g, res_vld[g], ex[g].vld));
        if (ex[g].vld) begin
          check(res_pm[g] == PM_W'(ex[g].pm), $sformatf("t%0d g%0d pm %0d exp %0d", trial, g, res_pm[g], ex[g].pm));
          check(res_rel[g] == (W-1)'(ex[g].rel), $sformatf("t%0d g%0d rel %0d exp %0d", trial, g, res_rel[g], ex[g].rel));
          check(res_match[g] == ex[g].match, $sformatf("t%0d g%0d match", trial, g));
          check((res_u[g] & N_MAX'((64'(1) << (1 << n)) - 1)) == ex[g].u[N_MAX-1:0],
                $sformatf("t%0d g%0d u %h exp %h", trial, g, res_u[g], ex[g].u[31:0]));
        end
      end
      // with two groups the run lasts as long as the reference of group 0
      check(int'(est_bits) == ex[0].est, $sformatf("t%0d est %0d exp %0d", trial, est_bits, ex[0].est));
      if (trial < 3) $display("t%0d time %0t ncyc %0d exp %0d", trial, $time, ncyc, ex[0].cycles);
      check(ncyc == ex[0].cycles, $sformatf("t%0d cycles %0d exp %0d", trial, ncyc, ex[0].cycles));
      @(negedge clk);
    end
    check(n_es_stops > 0, "early stopping never triggered");
    $display("list-Lmax runs=%0d early stops=%0d", n_split_runs, n_es_stops);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
