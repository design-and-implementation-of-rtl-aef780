// PM sorting and candidate selection.
//
// First phase: for each of the NL1 first-phase decoder lanes a reliability
// metric (PM) and a UE-ID match flag arrive with a valid strobe. They are
// written into the PM and UE-ID-match register files at the address held by
// the address counter, which advances by the number of valid lanes, so the
// controller must deliver candidates in index order. A second counter counts
// the ID matches. When the address counter equals C1, the sorter is started;
// it extracts the C2 smallest PMs, one per cycle. The selector then builds
// the C2-entry second-phase list: all candidates that matched the UE ID,
// followed by the smallest-PM candidates that did not. If more than C2
// matched, the sorter runs a second time in maximum mode over the matched
// candidates and the C2 with the highest PM are taken.
// Second phase: a dispatch counter hands out the list N_DEC entries at a
// time (p2_idx/p2_vld, advanced by p2_next). Returning results are compared
// by the output selector, which keeps the ID-matching result with the lowest
// path metric, provided that metric does not exceed pm_limit; final_done makes it present the detected codeword, if any,
// with out_valid for one cycle.
// Register files, counters, the C1 comparator, the minimum sorter and both
// selectors follow the paper's figure of this block. The tie-breaking, the
// matched-first order of the list, the maximum-mode pass and choosing the
// lowest metric among several second-phase matches and the pm_limit
// acceptance threshold (the paper bases validity on "the matching ID and PM
// value" without giving a rule) are this design's choices. clear starts a new detection.
module bd_cand_select #(
  parameter int unsigned C1    = bd_pkg::C1_D,
  parameter int unsigned C2    = bd_pkg::C2_D,
  parameter int unsigned NL1   = bd_pkg::N_SCL_MAX_D * (bd_pkg::L_MAX_D / bd_pkg::L1_D),
  parameter int unsigned N_DEC = bd_pkg::N_SCL_MAX_D,
  parameter int unsigned PW    = bd_pkg::W_D - 1,
  parameter int unsigned PM_W  = bd_pkg::PM_W_D,
  parameter int unsigned N_MAX = bd_pkg::N_MAX_D,
  localparam int unsigned IW   = $clog2(C1)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              clear,
  // first-phase results
  input  logic              in_vld   [NL1],
  input  logic [PW-1:0]     in_pm    [NL1],
  input  logic              in_match [NL1],
  // second-phase list
  output logic              sel_done,        // one-cycle pulse, list ready
  output logic [IW-1:0]     sel_idx  [C2],
  output logic [$clog2(C1+1)-1:0] match_cnt,
  output logic              many_match,      // more than C2 first-phase matches
  input  logic              p2_next,
  output logic [IW-1:0]     p2_idx   [N_DEC],
  output logic              p2_vld   [N_DEC],
  output logic              p2_more,
  // second-phase results
  input  logic              f_vld    [N_DEC],
  input  logic              f_ok     [N_DEC],
  input  logic [PM_W-1:0]   f_pm     [N_DEC],
  input  logic              f_match  [N_DEC],
  input  logic [N_MAX-1:0]  f_u      [N_DEC],
  input  logic [IW-1:0]     f_idx    [N_DEC],
  input  logic [PM_W-1:0]   pm_limit,        // largest accepted path metric
  input  logic              final_done,
  output logic              out_valid,
  output logic              out_found,
  output logic [IW-1:0]     out_idx,
  output logic [N_MAX-1:0]  out_u,
  output logic [PM_W-1:0]   out_pm
);

  typedef enum logic [2:0] {ST_COLLECT, ST_SORTMIN, ST_SORTMAX, ST_SELECT, ST_LIST} st_t;
  st_t st;

  logic [PW-1:0]           pm_reg    [C1];
  logic                    match_reg [C1];
  logic [$clog2(C1+1)-1:0] wr_cnt;
  localparam int DCW = $clog2(C2 + N_DEC + 1);
  logic [DCW-1:0] disp_cnt;

  // sorter
  logic          so_start, so_max, so_busy, so_done;
  logic          so_elig [C1];
  logic [IW-1:0] so_idx  [C2];
  logic          so_vld  [C2];
  logic [IW-1:0] min_idx [C2];
  logic          min_vld [C2];

  always_comb
    for (int c = 0; c < C1; c++)
      so_elig[c] = (st == ST_SORTMAX) ? match_reg[c] : 1'b1;

  bd_pm_sorter #(.C1(C1), .K(C2), .PW(PW)) u_sorter (
    .clk, .rst_n,
    .start (so_start), .find_max (so_max),
    .pm (pm_reg), .eligible (so_elig),
    .busy (so_busy), .done (so_done),
    .out_idx (so_idx), .out_vld (so_vld)
  );

  // selector: matched candidates first, then smallest-PM non-matched ones
  logic [IW-1:0] list_idx [C2];
  always_comb begin
    int n;
    n = 0;
    for (int k = 0; k < C2; k++) list_idx[k] = '0;
    for (int c = 0; c < C1; c++)
      if (match_reg[c] && n < C2) begin
        list_idx[n] = IW'(c);
        n++;
      end
    for (int k = 0; k < C2; k++)
      if (min_vld[k] && !match_reg[min_idx[k]] && n < C2) begin
        list_idx[n] = min_idx[k];
        n++;
      end
  end

  assign so_start = (st == ST_SORTMIN || st == ST_SORTMAX) && !so_busy && !so_done;
  assign so_max   = (st == ST_SORTMAX);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      st         <= ST_COLLECT;
      wr_cnt     <= '0;
      match_cnt  <= '0;
      disp_cnt   <= '0;
      sel_done   <= 1'b0;
      many_match <= 1'b0;
      for (int c = 0; c < C1; c++) begin pm_reg[c] <= '0; match_reg[c] <= 1'b0; end
      for (int k = 0; k < C2; k++) begin
        sel_idx[k] <= '0; min_idx[k] <= '0; min_vld[k] <= 1'b0;
      end
    end else begin
      sel_done <= 1'b0;
      if (clear) begin
        st         <= ST_COLLECT;
        wr_cnt     <= '0;
        match_cnt  <= '0;
        disp_cnt   <= '0;
        many_match <= 1'b0;
      end else begin
        unique case (st)
          ST_COLLECT: begin
            int n, m;
            n = 0;
            m = 0;
            for (int k = 0; k < NL1; k++)
              if (in_vld[k] && int'(wr_cnt) + n < C1) begin
                pm_reg[int'(wr_cnt) + n]    <= in_pm[k];
                match_reg[int'(wr_cnt) + n] <= in_match[k];
                n++;
                if (in_match[k]) m++;
              end
            wr_cnt    <= wr_cnt + ($clog2(C1+1))'(n);
            match_cnt <= match_cnt + ($clog2(C1+1))'(m);
            if (int'(wr_cnt) == C1) st <= ST_SORTMIN;
          end
          ST_SORTMIN: if (so_done) begin
            min_idx <= so_idx;
            min_vld <= so_vld;
            if (int'(match_cnt) > C2) begin
              st         <= ST_SORTMAX;
              many_match <= 1'b1;
            end else begin
              st <= ST_SELECT;
            end
          end
          ST_SORTMAX: if (so_done) begin
            sel_idx  <= so_idx;
            sel_done <= 1'b1;
            st       <= ST_LIST;
          end
          ST_SELECT: begin
            sel_idx  <= list_idx;
            sel_done <= 1'b1;
            st       <= ST_LIST;
          end
          ST_LIST: if (p2_next) disp_cnt <= disp_cnt + DCW'(N_DEC);
          default: st <= ST_COLLECT;
        endcase
      end
    end
  end

  // dispatch counter and codeword multiplexer addresses
  always_comb begin
    for (int d = 0; d < N_DEC; d++) begin
      int e;
      e = int'(disp_cnt) + d;
      p2_vld[d] = (st == ST_LIST) && (e < C2);
      p2_idx[d] = (e < C2) ? sel_idx[e] : '0;
    end
    p2_more = (st == ST_LIST) && (int'(disp_cnt) < C2);
  end

  // output selector
  logic             best_found;
  logic [IW-1:0]    best_idx;
  logic [N_MAX-1:0] best_u;
  logic [PM_W-1:0]  best_pm;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      best_found <= 1'b0; best_idx <= '0; best_u <= '0; best_pm <= '0;
      out_valid  <= 1'b0; out_found <= 1'b0; out_idx <= '0; out_u <= '0; out_pm <= '0;
    end else begin
      out_valid <= 1'b0;
      if (clear) begin
        best_found <= 1'b0;
      end else begin
        logic          bf;
        logic [PM_W-1:0] bp;
        bf = best_found;
        bp = best_pm;
        for (int d = 0; d < N_DEC; d++)
          if (f_vld[d] && f_ok[d] && f_match[d] && f_pm[d] <= pm_limit &&
              (!bf || f_pm[d] < bp)) begin
            bf = 1'b1;
            bp = f_pm[d];
            best_idx <= f_idx[d];
            best_u   <= f_u[d];
          end
        best_found <= bf;
        best_pm    <= bp;
        if (final_done) begin
          out_valid <= 1'b1;
          out_found <= best_found;
          out_idx   <= best_idx;
          out_u     <= best_u;
          out_pm    <= best_pm;
        end
      end
    end
  end

endmodule
