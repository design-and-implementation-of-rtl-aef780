// Check of the decoder array with two decoders running at once on
// different frames and different code lengths (N = 16 and 32), in both list
// modes, with early stopping in the L_MAX mode. Each decoder's results and
// run length are compared with the reference model in bd_ref_pkg.
module tb_bd_decoder_array;
  import bd_pkg::*;
  import bd_ref_pkg::*;
  localparam int N_DEC = 2, N_MAX = 32, L_MAX = 4, L1 = 2, P = 4, Q = 6, W = 8, PM_W = 12, IDB = 4;
  localparam int NCH = 2, NL = 5;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic ch_we [N_DEC][NCH];
  logic [2:0] ch_addr;
  logic signed [Q-1:0] ch_data [N_DEC][P];
  logic start [N_DEC];
  list_mode_t list_mode;
  logic es_en;
  logic grp_vld [N_DEC][NCH];
  logic [2:0] n_log2 [N_DEC];
  bit_type_t bit_type [N_DEC][N_MAX];
  logic [IDB-1:0] ue_id;
  logic busy [N_DEC], done [N_DEC];
  logic [NL:0] est_bits [N_DEC];
  logic res_vld [N_DEC][NCH];
  logic [PM_W-1:0] res_pm [N_DEC][NCH];
  logic [W-2:0] res_rel [N_DEC][NCH];
  logic res_match [N_DEC][NCH];
  logic [N_MAX-1:0] res_u [N_DEC][NCH];

  bd_decoder_array #(.N_DEC(N_DEC), .N_MAX(N_MAX), .L_MAX(L_MAX), .L1(L1), .P(P), .Q(Q),
                     .W(W), .PM_W(PM_W), .ID_BITS(IDB)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(bit ok, string s);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", s); end
  endtask

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int y [N_DEC][NCH][];
    int bt [N_DEC][];
    int nn [N_DEC];
    ref_res_t ex [N_DEC][NCH];
    foreach (start[d]) start[d] = 0;
    foreach (ch_we[d, g]) begin ch_we[d][g] = 0; grp_vld[d][g] = 0; end
    foreach (bit_type[d, j]) bit_type[d][j] = BT_FROZEN;
    ch_addr = '0; es_en = 0; list_mode = LM_L1; ue_id = '0;
    foreach (n_log2[d]) n_log2[d] = 3'd5;
    foreach (ch_data[d, p]) ch_data[d][p] = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 16; t++) begin
      list_mode_t m;
      bit es;
      logic [IDB-1:0] ue;
      int L, cyc [N_DEC];
      bit fin [N_DEC];
      m = (t % 2) ? LM_LMAX : LM_L1;
      es = (m == LM_LMAX);
      L = (m == LM_LMAX) ? L_MAX : L1;
      ue = IDB'($urandom);
      for (int d = 0; d < N_DEC; d++) begin
        nn[d] = (d == 0) ? 5 : 4;
        make_code(nn[d], int'($urandom_range(2, 6)), IDB, bt[d]);
        for (int g = 0; g < NCH; g++) begin
          bit u[];
          int idi;
          logic [IDB-1:0] sent;
          sent = (t % 4 == 3 && d == 1) ? ~ue : ue;
          u = new[1 << nn[d]];
          idi = 0;
          foreach (u[j]) begin
            u[j] = (bt[d][j] == 1) ? 1'($urandom) : 1'b0;
            if (bt[d][j] == 2) begin u[j] = sent[idi]; idi++; end
          end
          channel(u, nn[d], 12, 10, Q, y[d][g]);
          ex[d][g] = scl(y[d][g], nn[d], bt[d], L, es, 32'(ue), W, PM_W, P);
        end
      end
      for (int g = 0; g < NCH; g++)
        for (int c = 0; c < (1 << 5) / P; c++) begin
          ch_addr = 3'(c);
          for (int d = 0; d < N_DEC; d++) begin
            ch_we[d][g] = (c < (1 << nn[d]) / P);
            for (int p = 0; p < P; p++)
              ch_data[d][p] = (c < (1 << nn[d]) / P) ? Q'(y[d][g][c * P + p]) : '0;
          end
          @(negedge clk);
          for (int d = 0; d < N_DEC; d++) ch_we[d][g] = 0;
        end
      for (int d = 0; d < N_DEC; d++) begin
        n_log2[d] = 3'(nn[d]);
        foreach (bit_type[d][j]) bit_type[d][j] = (j < (1 << nn[d])) ? bit_type_t'(bt[d][j]) : BT_FROZEN;
        for (int g = 0; g < NCH; g++) grp_vld[d][g] = 1'b1;
        start[d] = 1;
        cyc[d] = 0;
        fin[d] = 0;
      end
      list_mode = m; es_en = es; ue_id = ue;
      @(negedge clk);
      foreach (start[d]) start[d] = 0;
      while (!(fin[0] && fin[1])) begin
        for (int d = 0; d < N_DEC; d++) if (!fin[d]) begin
          cyc[d]++;
          if (done[d]) fin[d] = 1;
        end
        @(negedge clk);
      end
      for (int d = 0; d < N_DEC; d++) begin
        check(cyc[d] == ex[d][0].cycles + 1, $sformatf("t%0d d%0d cycles %0d exp %0d", t, d, cyc[d], ex[d][0].cycles + 1));
        check(int'(est_bits[d]) == ex[d][0].est, $sformatf("t%0d d%0d est", t, d));
        for (int g = 0; g < ((m == LM_L1) ? NCH : 1); g++) begin
          check(res_vld[d][g] == ex[d][g].vld, $sformatf("t%0d d%0d g%0d vld", t, d, g));
          if (ex[d][g].vld) begin
            check(res_pm[d][g] == PM_W'(ex[d][g].pm), $sformatf("t%0d d%0d g%0d pm", t, d, g));
            check(res_rel[d][g] == (W-1)'(ex[d][g].rel), $sformatf("t%0d d%0d g%0d rel", t, d, g));
            check(res_match[d][g] == ex[d][g].match, $sformatf("t%0d d%0d g%0d match", t, d, g));
            check(res_u[d][g] == ex[d][g].u[N_MAX-1:0], $sformatf("t%0d d%0d g%0d u", t, d, g));
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
