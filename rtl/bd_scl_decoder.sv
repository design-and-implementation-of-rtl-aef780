// Flexible list-size successive-cancellation list (SCL) decoder.
//
// Decodes polar codes of length N = 2^n_log2 <= N_MAX by descending the SC
// tree leaf by leaf, left branches first. L_MAX parallel sets of P processing
// elements compute the child LLRs of a node; a child stage with 2^s values
// takes max(1, 2^s/P) cycles. All memories are registers:
//   chan[NCH][N_MAX]   channel LLRs, one copy per candidate group
//   llr [L_MAX][N_MAX] per-path LLRs, stage s stored at [2^s, 2^(s+1))
//   beta[L_MAX][N_MAX] per-path left-child partial sums, same layout
//   u_hat[L_MAX][N_MAX] per-path bit estimates
// The cycle that computes a leaf LLR also takes the leaf decision: a frozen
// bit is estimated as 0 on every path and the path metrics are updated with
// eq. (7). An information or ID bit splits every path into two candidates;
// in the next (sort) cycle the L lowest metrics survive and the survivors'
// memories are copied from their parents, so a split leaf costs one extra
// cycle. With P >= N/2 a full decode takes 2N - 2 + (number of split leaves)
// cycles, i.e. 2N + K + 16 - 2 with K information and 16 ID bits.
//
// list_mode selects the effective list size. LM_LMAX decodes one candidate
// with L_MAX paths. LM_L1 decodes NCH = L_MAX/L1 candidates at once, L1 paths
// each, every group having its own channel memory and its own L1-of-2L1
// sorter; with L1 = 1 splitting and sorting are bypassed (plain SC).
// With es_en set, each estimated ID bit is compared with the UE ID after the
// survivors are chosen; paths that disagree are deactivated, and decoding
// stops once no path is left. Inactive paths never survive a sort.
//
// Reset (rst_n, active low) is synchronous, since the large path memories
// are not reset and share the process with the control state.
// Interface: channel LLRs are written P at a time (ch_we per group, ch_addr
// selects the P-wide chunk) before start. start (one cycle, in idle) latches
// the code description (n_log2, bit_type per leaf, ue_id), list_mode, es_en
// and grp_vld. done pulses one cycle after the last leaf; the res_* outputs
// then describe the best (lowest-metric) active path of each group and stay
// valid until the next start. res_rel is |LLR| of the last estimated leaf on
// that path, used as the first-phase reliability measure.
//
// From the paper: PE equations, P-PE scheduling, register memories, one
// extra cycle per split, the L1/L_MAX sharing with replicated channel memory
// and sorters, early stopping after survivor selection. This design's own
// choices: fixed-point widths, full-copy path memories, the ranking sorter,
// the load interface, and that no Fast-SSCL node pruning is done.
module bd_scl_decoder
  import bd_pkg::*;
#(
  parameter int unsigned N_MAX   = bd_pkg::N_MAX_D,
  parameter int unsigned L_MAX   = bd_pkg::L_MAX_D,
  parameter int unsigned L1      = bd_pkg::L1_D,
  parameter int unsigned P       = bd_pkg::P_D,
  parameter int unsigned Q       = bd_pkg::Q_D,
  parameter int unsigned W       = bd_pkg::W_D,
  parameter int unsigned PM_W    = bd_pkg::PM_W_D,
  parameter int unsigned ID_BITS = bd_pkg::ID_BITS_D,
  localparam int unsigned NL     = $clog2(N_MAX),
  localparam int unsigned NCH    = L_MAX / L1,
  localparam int unsigned CHUNKS = (N_MAX > P) ? N_MAX / P : 1,
  localparam int unsigned CAW    = (CHUNKS > 1) ? $clog2(CHUNKS) : 1
) (
  input  logic                  clk,
  input  logic                  rst_n,
  // channel LLR load
  input  logic                  ch_we    [NCH],
  input  logic [CAW-1:0]        ch_addr,
  input  logic signed [Q-1:0]   ch_data  [P],
  // run control
  input  logic                  start,
  input  list_mode_t            list_mode,
  input  logic                  es_en,
  input  logic                  grp_vld  [NCH],
  input  logic [$clog2(NL+1)-1:0] n_log2,
  input  bit_type_t             bit_type [N_MAX],
  input  logic [ID_BITS-1:0]    ue_id,
  output logic                  busy,
  output logic                  done,
  output logic [NL:0]           est_bits,     // leaves estimated in the last run
  // results per candidate group
  output logic                  res_vld   [NCH],
  output logic [PM_W-1:0]       res_pm    [NCH],
  output logic [W-2:0]          res_rel   [NCH],
  output logic                  res_match [NCH],
  output logic [N_MAX-1:0]      res_u     [NCH]
);

  localparam int unsigned LW  = (L_MAX > 1) ? $clog2(L_MAX) : 1;
  localparam logic [PM_W-1:0] PM_SAT = '1;

  typedef enum logic [1:0] {S_IDLE, S_RUN, S_SORT} state_t;

  // ---------------------------------------------------------------- state
  state_t                 state;
  logic signed [Q-1:0]    chan  [NCH][N_MAX];
  logic signed [W-1:0]    llr   [L_MAX][N_MAX];
  logic [N_MAX-1:0]       beta  [L_MAX];
  logic [N_MAX-1:0]       u_hat [L_MAX];
  logic [PM_W-1:0]        pm    [L_MAX];
  logic                   act   [L_MAX];
  logic                   idm   [L_MAX];
  logic [W-2:0]           last_abs [L_MAX];

  bit_type_t              bt    [N_MAX];
  logic [$clog2(NL+1)-1:0] n_cur;
  logic [ID_BITS-1:0]     ue;
  list_mode_t             mode;
  logic                   es;
  logic                   used  [NCH];

  logic [NL-1:0]          leaf;      // leaf index i
  logic [$clog2(NL+1)-1:0] stg;      // child stage being computed
  logic [CAW-1:0]         step;
  logic                   is_g;
  logic [$clog2(ID_BITS+1)-1:0] id_idx;

  // candidates registered in a split leaf cycle
  logic [PM_W-1:0]        cpm   [2*L_MAX];
  logic                   cvld  [2*L_MAX];
  logic [W-2:0]           cabs  [L_MAX];

  // ---------------------------------------------------------------- helpers
  function automatic int unsigned grp_of(int unsigned l, list_mode_t m);
    return (m == LM_L1) ? l / L1 : 0;
  endfunction

  function automatic logic [NL:0] ctz(logic [NL-1:0] v);
    ctz = (NL+1)'(NL);
    for (int b = NL - 1; b >= 0; b--)
      if (v[b]) ctz = (NL+1)'(b);
  endfunction

  // Partial-sum update after leaf i is estimated as u (eq. 3): combine with
  // stored left siblings while the finished node is a right child, then
  // store the result as the left sibling of its stage.
  function automatic logic [N_MAX-1:0] beta_upd(logic [N_MAX-1:0] row,
                                                logic [NL-1:0] i, logic u);
    logic [N_MAX-1:0] cur, nxt;
    logic             stop;
    cur    = '0;
    cur[0] = u;
    stop   = 1'b0;
    for (int s = 0; s < NL; s++) begin
      if (!stop) begin
        if (i[s]) begin
          nxt = '0;
          for (int j = 0; j < (1 << s); j++) begin
            nxt[j]            = row[(1 << s) + j] ^ cur[j];
            nxt[(1 << s) + j] = cur[j];
          end
          cur = nxt;
        end else begin
          for (int j = 0; j < (1 << s); j++) row[(1 << s) + j] = cur[j];
          stop = 1'b1;
        end
      end
    end
    return row;
  endfunction

  function automatic logic [PM_W-1:0] pm_add(logic [PM_W-1:0] a, logic [W-2:0] b);
    logic [PM_W:0] s;
    s = {1'b0, a} + (PM_W+1)'(b);
    return s[PM_W] ? PM_SAT : s[PM_W-1:0];
  endfunction

  // ---------------------------------------------------------------- PE array
  logic signed [W-1:0] pe_a [L_MAX][P];
  logic signed [W-1:0] pe_b [L_MAX][P];
  logic                pe_bl[L_MAX][P];
  logic signed [W-1:0] pe_y [L_MAX][P];

  always_comb begin
    for (int l = 0; l < L_MAX; l++) begin
      for (int p = 0; p < P; p++) begin
        int unsigned j, half;
        j    = int'(step) * P + p;
        half = 1 << stg;
        pe_a[l][p]  = '0;
        pe_b[l][p]  = '0;
        pe_bl[l][p] = 1'b0;
        if (j < half) begin
          if (32'(stg) + 1 == 32'(n_cur)) begin
            pe_a[l][p] = W'(chan[grp_of(l, mode)][j]);
            pe_b[l][p] = W'(chan[grp_of(l, mode)][j + half]);
          end else begin
            pe_a[l][p] = llr[l][2 * half + j];
            pe_b[l][p] = llr[l][3 * half + j];
          end
          pe_bl[l][p] = beta[l][half + j];
        end
      end
    end
  end

  for (genvar gl = 0; gl < L_MAX; gl++) begin : g_path
    for (genvar gp = 0; gp < P; gp++) begin : g_pe
      bd_pe #(.W(W)) u_pe (
        .a      (pe_a[gl][gp]),
        .b      (pe_b[gl][gp]),
        .beta_l (pe_bl[gl][gp]),
        .sel_g  (is_g),
        .y      (pe_y[gl][gp])
      );
    end
  end

  // ---------------------------------------------------------------- leaf logic
  logic               leaf_hard [L_MAX];
  logic [W-2:0]       leaf_abs  [L_MAX];
  logic               l_eff_one;
  logic               is_leaf, split;
  logic               last_step;
  logic               any_live;
  logic               ue_bit;

  always_comb begin
    for (int l = 0; l < L_MAX; l++) begin
      leaf_hard[l] = pe_y[l][0][W-1];
      leaf_abs[l]  = pe_y[l][0][W-1] ? (W-1)'(-pe_y[l][0]) : pe_y[l][0][W-2:0];
    end
    l_eff_one = (mode == LM_L1) ? (L1 == 1) : (L_MAX == 1);
    is_leaf   = (stg == 0);
    split     = is_leaf && (bt[leaf] != BT_FROZEN) && !l_eff_one;
    last_step = ((1 << stg) <= P) || (int'(step) == ((1 << stg) / P) - 1);
    ue_bit    = (int'(id_idx) < ID_BITS) ? ue[id_idx[$clog2(ID_BITS)-1:0]] : 1'b0;
    any_live  = 1'b0;
    for (int l = 0; l < L_MAX; l++)
      if (act[l]) any_live = 1'b1;
  end

  // ---------------------------------------------------------------- sorters
  localparam int unsigned CW_MAX = $clog2(2 * L_MAX);
  localparam int unsigned CW_1   = $clog2(2 * L1);

  logic [CW_MAX-1:0] sm_idx [L_MAX];
  logic              sm_vld [L_MAX];
  logic [CW_1-1:0]   s1_idx [NCH][L1];
  logic              s1_vld [NCH][L1];

  bd_path_sorter #(.L(L_MAX), .PM_W(PM_W)) u_sort_max (
    .cand_pm (cpm), .cand_vld (cvld), .surv_idx (sm_idx), .surv_vld (sm_vld)
  );

  for (genvar gg = 0; gg < NCH; gg++) begin : g_sort1
    logic [PM_W-1:0] pm_g  [2*L1];
    logic            vld_g [2*L1];
    always_comb
      for (int c = 0; c < 2 * L1; c++) begin
        pm_g[c]  = cpm[2 * L1 * gg + c];
        vld_g[c] = cvld[2 * L1 * gg + c];
      end
    bd_path_sorter #(.L(L1), .PM_W(PM_W)) u_sort_l1 (
      .cand_pm (pm_g), .cand_vld (vld_g),
      .surv_idx (s1_idx[gg]), .surv_vld (s1_vld[gg])
    );
  end

  // survivor of each slot: source path, chosen bit, validity, new metric
  logic [LW-1:0]   sv_src [L_MAX];
  logic            sv_bit [L_MAX];
  logic            sv_vld [L_MAX];
  logic [PM_W-1:0] sv_pm  [L_MAX];

  always_comb begin
    for (int l = 0; l < L_MAX; l++) begin
      int unsigned c;
      if (mode == LM_LMAX) begin
        c         = int'(sm_idx[l]);
        sv_vld[l] = sm_vld[l];
      end else begin
        c         = 2 * L1 * (l / L1) + int'(s1_idx[l / L1][l % L1]);
        sv_vld[l] = s1_vld[l / L1][l % L1];
      end
      sv_src[l] = LW'(c / 2);
      sv_bit[l] = c[0];
      sv_pm[l]  = cpm[c];
    end
  end

  // Partial-sum rows after the current leaf: in a sort cycle each survivor
  // extends its source path's row with its bit, otherwise every path extends
  // its own row with its decision.
  logic [N_MAX-1:0] beta_nxt [L_MAX];
  for (genvar l = 0; l < L_MAX; l++) begin : g_beta
    logic [N_MAX-1:0] row;
    logic             ub;
    always_comb begin
      if (state == S_SORT) begin
        row = beta[sv_src[l]];
        ub  = sv_bit[l];
      end else begin
        row = beta[l];
        ub  = (bt[leaf] == BT_FROZEN) ? 1'b0 : leaf_hard[l];
      end
      beta_nxt[l] = beta_upd(row, leaf, ub);
    end
  end

  // ---------------------------------------------------------------- sequencing
  logic [NL-1:0] n_last;
  assign n_last = NL'((1 << n_cur) - 1);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state    <= S_IDLE;
      done     <= 1'b0;
      leaf     <= '0;
      stg      <= '0;
      step     <= '0;
      is_g     <= 1'b0;
      id_idx   <= '0;
      est_bits <= '0;
      n_cur    <= '0;
      ue       <= '0;
      mode     <= LM_L1;
      es       <= 1'b0;
      for (int l = 0; l < L_MAX; l++) begin
        act[l] <= 1'b0;
        idm[l] <= 1'b0;
        pm[l]  <= '0;
        last_abs[l] <= '0;
        u_hat[l] <= '0;
        beta[l]  <= '0;
      end
      for (int g = 0; g < NCH; g++) used[g] <= 1'b0;
    end else begin
      done <= 1'b0;

      // channel memory write port
      for (int g = 0; g < NCH; g++)
        if (ch_we[g])
          for (int p = 0; p < P; p++)
            if (int'(ch_addr) * P + p < N_MAX)
              chan[g][int'(ch_addr) * P + p] <= ch_data[p];

      unique case (state)
        S_IDLE: if (start) begin
          state  <= S_RUN;
          bt     <= bit_type;
          n_cur  <= n_log2;
          ue     <= ue_id;
          mode   <= list_mode;
          es     <= es_en;
          leaf   <= '0;
          stg    <= ($clog2(NL+1))'(n_log2 - 1);
          step   <= '0;
          is_g   <= 1'b0;
          id_idx <= '0;
          for (int g = 0; g < NCH; g++)
            used[g] <= (list_mode == LM_L1) ? grp_vld[g] : (g == 0);
          for (int l = 0; l < L_MAX; l++) begin
            pm[l]    <= '0;
            idm[l]   <= 1'b1;
            u_hat[l] <= '0;
            beta[l]  <= '0;
            last_abs[l] <= '0;
            if (list_mode == LM_L1)
              act[l] <= (l % L1 == 0) && grp_vld[l / L1];
            else
              act[l] <= (l == 0);
          end
        end

        S_RUN: begin
          if (!any_live) begin
            // every path deactivated by early stopping
            state    <= S_IDLE;
            done     <= 1'b1;
            est_bits <= (NL+1)'(leaf);
          end else if (!is_leaf) begin
            for (int l = 0; l < L_MAX; l++)
              for (int p = 0; p < P; p++)
                if (int'(step) * P + p < (1 << stg))
                  llr[l][(1 << stg) + int'(step) * P + p] <= pe_y[l][p];
            if (last_step) begin
              step <= '0;
              stg  <= stg - 1'b1;
              is_g <= 1'b0;
            end else begin
              step <= step + 1'b1;
            end
          end else if (split) begin
            for (int l = 0; l < L_MAX; l++) begin
              cabs[l]      <= leaf_abs[l];
              cvld[2*l]    <= act[l];
              cvld[2*l+1]  <= act[l];
              cpm[2*l]     <= leaf_hard[l] ? pm_add(pm[l], leaf_abs[l]) : pm[l];
              cpm[2*l+1]   <= leaf_hard[l] ? pm[l] : pm_add(pm[l], leaf_abs[l]);
            end
            state <= S_SORT;
          end else begin
            // frozen leaf, or information/ID leaf with list size 1
            for (int l = 0; l < L_MAX; l++) begin
              logic ub;
              ub = (bt[leaf] == BT_FROZEN) ? 1'b0 : leaf_hard[l];
              if (ub != leaf_hard[l]) pm[l] <= pm_add(pm[l], leaf_abs[l]);
              last_abs[l]    <= leaf_abs[l];
              u_hat[l][leaf] <= ub;
              beta[l]        <= beta_nxt[l];
              if (bt[leaf] == BT_ID && ub != ue_bit) begin
                idm[l] <= 1'b0;
                if (es) act[l] <= 1'b0;
              end
            end
            if (bt[leaf] == BT_ID) id_idx <= id_idx + 1'b1;
            if (leaf == n_last) begin
              state    <= S_IDLE;
              done     <= 1'b1;
              est_bits <= (NL+1)'(leaf) + 1'b1;
            end else begin
              leaf <= leaf + 1'b1;
              stg  <= ($clog2(NL+1))'(ctz(leaf + 1'b1));
              step <= '0;
              is_g <= 1'b1;
            end
          end
        end

        S_SORT: begin
          for (int l = 0; l < L_MAX; l++) begin
            logic [N_MAX-1:0] u_new;
            u_new       = u_hat[sv_src[l]];
            u_new[leaf] = sv_bit[l];
            llr[l]      <= llr[sv_src[l]];
            beta[l]     <= beta_nxt[l];
            u_hat[l]    <= u_new;
            pm[l]       <= sv_pm[l];
            last_abs[l] <= cabs[sv_src[l]];
            if (bt[leaf] == BT_ID && sv_bit[l] != ue_bit) begin
              idm[l] <= 1'b0;
              act[l] <= sv_vld[l] && !es;
            end else begin
              idm[l] <= idm[sv_src[l]];
              act[l] <= sv_vld[l];
            end
          end
          if (bt[leaf] == BT_ID) id_idx <= id_idx + 1'b1;
          if (leaf == n_last) begin
            state    <= S_IDLE;
            done     <= 1'b1;
            est_bits <= (NL+1)'(leaf) + 1'b1;
          end else begin
            state <= S_RUN;
            leaf  <= leaf + 1'b1;
            stg   <= ($clog2(NL+1))'(ctz(leaf + 1'b1));
            step  <= '0;
            is_g  <= 1'b1;
          end
        end

        default: state <= S_IDLE;
      endcase
    end
  end

  assign busy = (state != S_IDLE);

  // ---------------------------------------------------------------- results
  always_comb begin
    for (int g = 0; g < NCH; g++) begin
      int unsigned lo, hi;
      logic [LW-1:0] best;
      logic        found;
      if (mode == LM_L1) begin lo = g * L1; hi = g * L1 + L1; end
      else if (g == 0)   begin lo = 0;      hi = L_MAX;       end
      else               begin lo = 0;      hi = 0;           end
      best  = LW'(lo);
      found = 1'b0;
      for (int l = 0; l < L_MAX; l++)
        if (l >= lo && l < hi && act[l] && (!found || pm[l] < pm[best])) begin
          best  = LW'(l);
          found = 1'b1;
        end
      res_vld[g]   = found && used[g];
      res_pm[g]    = pm[best];
      res_rel[g]   = last_abs[best];
      res_match[g] = idm[best];
      res_u[g]     = u_hat[best];
    end
  end

endmodule
