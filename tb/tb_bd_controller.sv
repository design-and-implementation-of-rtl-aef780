// Check of the blind-detection controller with behavioural stand-ins for the
// decoders (done after a random delay) and for the candidate-selection
// block (a fixed three-entry list, handed out by a dispatch counter).
// Ten candidates use two codes (N = 16 and N = 8, 4 LLRs per load cycle);
// two decoders with two candidate groups each. Checked: every candidate's
// channel chunks are copied exactly once per phase into the right lane,
// rounds never mix codes, first-phase runs use list mode L1 without early
// stopping and second-phase runs list mode L_MAX with it, first-phase
// results are reported for all C1 candidates in order, second-phase results
// carry the dispatched indices, and final_done and done come once.
module tb_bd_controller;
  import bd_pkg::*;
  localparam int C1 = 10, N_MAX = 16, P = 4, NCH = 2, N_DEC = 2, NUM_CODES = 2, NL1 = 4, C2 = 3;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic go, busy, done;
  logic [0:0] code_of [C1];
  logic [2:0] code_nlog2 [NUM_CODES];
  logic [3:0] rd_cand [N_DEC];
  logic [1:0] rd_chunk;
  logic dec_ch_we [N_DEC][NCH];
  logic dec_start [N_DEC];
  list_mode_t dec_mode;
  logic dec_es;
  logic dec_grp_vld [N_DEC][NCH];
  logic [0:0] dec_code [N_DEC];
  logic dec_done [N_DEC];
  logic sel_clear;
  logic p1_vld [NL1];
  logic sel_done;
  logic [3:0] p2_idx [N_DEC];
  logic p2_vld [N_DEC];
  logic p2_more, p2_next;
  logic f_vld [N_DEC];
  logic [3:0] f_idx [N_DEC];
  logic final_done;

  bd_controller #(.C1(C1), .N_MAX(N_MAX), .P(P), .NCH(NCH), .N_DEC(N_DEC), .NUM_CODES(NUM_CODES)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(bit ok, string s);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", s); end
  endtask

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // stand-in decoders
  int cnt [N_DEC];
  initial foreach (cnt[d]) cnt[d] = 0;
  always @(posedge clk) begin
    for (int d = 0; d < N_DEC; d++) begin
      dec_done[d] <= 1'b0;
      if (dec_start[d]) cnt[d] <= int'($urandom_range(3, 12));
      else if (cnt[d] == 1) begin dec_done[d] <= 1'b1; cnt[d] <= 0; end
      else if (cnt[d] > 1) cnt[d] <= cnt[d] - 1;
    end
  end

  // stand-in selection block
  int list [C2] = '{7, 2, 5};
  int disp = 0;
  bit in_list = 0;
  always_comb begin
    p2_more = in_list && disp < C2;
    for (int d = 0; d < N_DEC; d++) begin
      p2_vld[d] = in_list && (disp + d < C2);
      p2_idx[d] = 4'((disp + d < C2) ? list[disp + d] : 0);
    end
  end

  // monitors
  int loaded1 [C1][4];
  int loaded2 [C1][4];
  int p1_next = 0, p1_total = 0, n_f = 0, n_final = 0, n_done = 0, n_p1_starts = 0, n_p2_starts = 0;
  bit phase2 = 0;
  always @(posedge clk) if (rst_n) begin
    if (sel_clear) begin in_list <= 0; disp <= 0; end
    if (p2_next) disp <= disp + N_DEC;
    for (int d = 0; d < N_DEC; d++)
      for (int g = 0; g < NCH; g++)
        if (dec_ch_we[d][g]) begin
          if (!phase2) loaded1[rd_cand[d]][rd_chunk]++;
          else loaded2[rd_cand[d]][rd_chunk]++;
          check(code_of[rd_cand[d]] == dec_code[d], "load with wrong code");
        end
    for (int d = 0; d < N_DEC; d++)
      if (dec_start[d]) begin
        if (!phase2) begin
          n_p1_starts++;
          check(dec_mode == LM_L1 && !dec_es, "phase-1 start mode");
        end else begin
          n_p2_starts++;
          check(dec_mode == LM_LMAX && dec_es, "phase-2 start mode");
        end
      end
    begin
      int n;
      n = 0;
      for (int k = 0; k < NL1; k++) if (p1_vld[k]) n++;
      for (int k = 0; k < NL1; k++) check(p1_vld[k] == (k < n), "p1 lanes not packed");
      p1_total += n;
      if (n > 0 && p1_total == C1) begin
        phase2 <= 1;
        fork begin repeat (4) @(posedge clk); sel_done <= 1; in_list <= 1; @(posedge clk); sel_done <= 0; end join_none
      end
    end
    for (int d = 0; d < N_DEC; d++)
      if (f_vld[d]) begin
        check(int'(f_idx[d]) == list[n_f], $sformatf("f_idx %0d exp %0d", f_idx[d], list[n_f]));
        n_f++;
      end
    if (final_done) n_final++;
    if (done) n_done++;
  end

  initial begin
    go = 0; sel_done = 0;
    foreach (code_of[c]) code_of[c] = (c < 6) ? 1'b0 : 1'b1;
    code_nlog2[0] = 3'd4; code_nlog2[1] = 3'd3;
    foreach (loaded1[c, k]) begin loaded1[c][k] = 0; loaded2[c][k] = 0; end
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    go = 1;
    @(negedge clk);
    go = 0;
    while (!done) @(negedge clk);
    repeat (3) @(negedge clk);
    for (int c = 0; c < C1; c++)
      for (int k = 0; k < 4; k++) begin
        int ch;
        bit in2;
        ch = (c < 6) ? 4 : 2;
        in2 = (c == 7 || c == 2 || c == 5);
        check(loaded1[c][k] == ((k < ch) ? 1 : 0), $sformatf("phase-1 load cand %0d chunk %0d x%0d", c, k, loaded1[c][k]));
        check(loaded2[c][k] == ((in2 && k < ch) ? 1 : 0), $sformatf("phase-2 load cand %0d chunk %0d x%0d", c, k, loaded2[c][k]));
      end
    check(p1_total == C1, $sformatf("phase-1 results %0d", p1_total));
    // rounds: {0..3}, {4,5}, {6..9}: decoders started 2 + 1 + 2 times
    check(n_p1_starts == 5, $sformatf("phase-1 decoder starts %0d", n_p1_starts));
    check(n_p2_starts == C2, $sformatf("phase-2 decoder starts %0d", n_p2_starts));
    check(n_f == C2, "phase-2 results");
    check(n_final == 1 && n_done == 1, "final_done/done");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
