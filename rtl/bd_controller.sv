// Blind-detection controller.
//
// Sequences one detection over the C1 buffered candidates:
//  1. First phase, in rounds. A round takes the next run of up to NL1 =
//     N_DEC * NCH consecutive candidates that use the same code (the groups
//     of one decoder share its schedule, so one round holds one code). Lane
//     k = d*NCH + g is group g of decoder d. The channel LLRs are copied from
//     the candidate buffer into the decoders' channel memories, P per cycle,
//     group by group; the decoders then run with list size L1 and early
//     stopping off; when all have finished, the lane results are handed to
//     the candidate-selection block in candidate order.
//  2. Wait for the candidate-selection block to publish the C2-entry list.
//  3. Second phase, in rounds of N_DEC candidates: load, run with list size
//     L_MAX and early stopping on, hand the results to the output selector.
//  4. Pulse final_done (to the output selector) and done.
// The two-phase sequence, the list-size switch and enabling early stopping
// only in the second phase are the paper's; the paper only names the
// controller, so the round structure, the load protocol and the
// same-code-per-round rule are this design's choices.
module bd_controller
  import bd_pkg::*;
#(
  parameter int unsigned C1        = bd_pkg::C1_D,
  parameter int unsigned N_MAX     = bd_pkg::N_MAX_D,
  parameter int unsigned P         = bd_pkg::P_D,
  parameter int unsigned NCH       = bd_pkg::L_MAX_D / bd_pkg::L1_D,
  parameter int unsigned N_DEC     = bd_pkg::N_SCL_MAX_D,
  parameter int unsigned NUM_CODES = bd_pkg::NUM_CODES_D,
  localparam int unsigned NL       = $clog2(N_MAX),
  localparam int unsigned NL1      = N_DEC * NCH,
  localparam int unsigned IW       = $clog2(C1),
  localparam int unsigned CHUNKS   = (N_MAX > P) ? N_MAX / P : 1,
  localparam int unsigned CAW      = (CHUNKS > 1) ? $clog2(CHUNKS) : 1,
  localparam int unsigned CDW      = (NUM_CODES > 1) ? $clog2(NUM_CODES) : 1
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    go,
  output logic                    busy,
  output logic                    done,
  // code description
  input  logic [CDW-1:0]          code_of    [C1],
  input  logic [$clog2(NL+1)-1:0] code_nlog2 [NUM_CODES],
  // candidate buffer read
  output logic [IW-1:0]           rd_cand    [N_DEC],
  output logic [CAW-1:0]          rd_chunk,
  // decoder array control
  output logic                    dec_ch_we  [N_DEC][NCH],
  output logic                    dec_start  [N_DEC],
  output list_mode_t              dec_mode,
  output logic                    dec_es,
  output logic                    dec_grp_vld[N_DEC][NCH],
  output logic [CDW-1:0]          dec_code   [N_DEC],
  input  logic                    dec_done   [N_DEC],
  // candidate selection
  output logic                    sel_clear,
  output logic                    p1_vld     [NL1],
  input  logic                    sel_done,
  input  logic [IW-1:0]           p2_idx     [N_DEC],
  input  logic                    p2_vld     [N_DEC],
  input  logic                    p2_more,
  output logic                    p2_next,
  output logic                    f_vld      [N_DEC],
  output logic [IW-1:0]           f_idx      [N_DEC],
  output logic                    final_done
);

  typedef enum logic [3:0] {
    C_IDLE, C_P1_PLAN, C_P1_LOAD, C_P1_START, C_P1_WAIT, C_P1_REPORT,
    C_SORT, C_P2_PLAN, C_P2_LOAD, C_P2_START, C_P2_WAIT, C_P2_REPORT, C_FINAL
  } cst_t;

  cst_t                    st;
  logic [IW:0]             base;       // first candidate of the round
  logic [$clog2(NL1+1)-1:0] bsz;       // candidates in the round
  logic [CDW-1:0]          cur_code;
  logic [$clog2(NCH+1)-1:0] grp;       // group being loaded
  logic [CAW:0]            chunk;
  logic                    pending [N_DEC];
  logic [IW-1:0]           cand2 [N_DEC];
  logic                    v2    [N_DEC];
  logic                    sel_ready;

  function automatic int unsigned chunks_of(logic [CDW-1:0] c,
                                            logic [$clog2(NL+1)-1:0] nl [NUM_CODES]);
    int unsigned n;
    n = 1 << nl[c];
    return (n > P) ? n / P : 1;
  endfunction

  // size of the next first-phase round: consecutive candidates, same code
  logic [$clog2(NL1+1)-1:0] plan_sz;
  always_comb begin
    logic stop;
    plan_sz = '0;
    stop    = 1'b0;
    for (int k = 0; k < NL1; k++) begin
      int c;
      c = int'(base) + k;
      if (!stop && c < C1 && code_of[c] == code_of[int'(base) < C1 ? int'(base) : 0])
        plan_sz = plan_sz + 1'b1;
      else
        stop = 1'b1;
    end
  end

  // longest second-phase load among the active decoders
  int unsigned p2_chunks;
  always_comb begin
    p2_chunks = 1;
    for (int d = 0; d < N_DEC; d++)
      if (v2[d] && chunks_of(code_of[cand2[d]], code_nlog2) > p2_chunks)
        p2_chunks = chunks_of(code_of[cand2[d]], code_nlog2);
  end

  logic any_pending;
  always_comb begin
    any_pending = 1'b0;
    for (int d = 0; d < N_DEC; d++) if (pending[d]) any_pending = 1'b1;
  end

  // ---------------------------------------------------------------- outputs
  always_comb begin
    busy       = (st != C_IDLE);
    sel_clear  = (st == C_IDLE) && go;
    p2_next    = (st == C_P2_PLAN) && p2_more;
    final_done = (st == C_FINAL);
    dec_mode   = (st == C_P2_START) ? LM_LMAX : LM_L1;
    dec_es     = (st == C_P2_START);
    rd_chunk   = CAW'(chunk);
    for (int d = 0; d < N_DEC; d++) begin
      logic any;
      any = 1'b0;
      if (st == C_P2_LOAD || st == C_P2_START || st == C_P2_WAIT || st == C_P2_REPORT) begin
        rd_cand[d]  = cand2[d];
        dec_code[d] = code_of[cand2[d]];
      end else begin
        rd_cand[d]  = IW'(int'(base) + d * NCH + int'(grp));
        dec_code[d] = cur_code;
      end
      for (int g = 0; g < NCH; g++) begin
        dec_grp_vld[d][g] = (d * NCH + g) < int'(bsz);
        if (dec_grp_vld[d][g]) any = 1'b1;
        dec_ch_we[d][g] = 1'b0;
        if (st == C_P1_LOAD)
          dec_ch_we[d][g] = (g == int'(grp)) && dec_grp_vld[d][g];
        if (st == C_P2_LOAD)
          dec_ch_we[d][g] = (g == 0) && v2[d] &&
                            (int'(chunk) < chunks_of(code_of[cand2[d]], code_nlog2));
      end
      dec_start[d] = (st == C_P1_START) ? any : ((st == C_P2_START) ? v2[d] : 1'b0);
      f_vld[d]     = (st == C_P2_REPORT) && v2[d];
      f_idx[d]     = cand2[d];
    end
    for (int k = 0; k < NL1; k++)
      p1_vld[k] = (st == C_P1_REPORT) && (k < int'(bsz));
  end

  // ---------------------------------------------------------------- sequencing
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      st        <= C_IDLE;
      done      <= 1'b0;
      base      <= '0;
      bsz       <= '0;
      cur_code  <= '0;
      grp       <= '0;
      chunk     <= '0;
      sel_ready <= 1'b0;
      for (int d = 0; d < N_DEC; d++) begin
        pending[d] <= 1'b0; cand2[d] <= '0; v2[d] <= 1'b0;
      end
    end else begin
      done <= 1'b0;
      if (sel_done) sel_ready <= 1'b1;
      for (int d = 0; d < N_DEC; d++)
        if (dec_done[d]) pending[d] <= 1'b0;

      unique case (st)
        C_IDLE: if (go) begin
          base      <= '0;
          sel_ready <= 1'b0;
          st        <= C_P1_PLAN;
        end
        C_P1_PLAN: begin
          bsz      <= plan_sz;
          cur_code <= code_of[base[IW-1:0]];
          grp      <= '0;
          chunk    <= '0;
          st       <= C_P1_LOAD;
        end
        C_P1_LOAD: begin
          if (int'(chunk) == chunks_of(cur_code, code_nlog2) - 1) begin
            chunk <= '0;
            if (int'(grp) == NCH - 1) st <= C_P1_START;
            else grp <= grp + 1'b1;
          end else begin
            chunk <= chunk + 1'b1;
          end
        end
        C_P1_START: begin
          for (int d = 0; d < N_DEC; d++) pending[d] <= dec_start[d];
          st <= C_P1_WAIT;
        end
        C_P1_WAIT: if (!any_pending) st <= C_P1_REPORT;
        C_P1_REPORT: begin
          base <= base + (IW+1)'(bsz);
          if (int'(base) + int'(bsz) >= C1) st <= C_SORT;
          else st <= C_P1_PLAN;
        end
        C_SORT: if (sel_ready || sel_done) st <= C_P2_PLAN;
        C_P2_PLAN: begin
          if (p2_more) begin
            cand2 <= p2_idx;
            v2    <= p2_vld;
            chunk <= '0;
            st    <= C_P2_LOAD;
          end else begin
            st <= C_FINAL;
          end
        end
        C_P2_LOAD: begin
          if (int'(chunk) >= int'(p2_chunks) - 1) begin
            chunk <= '0;
            st    <= C_P2_START;
          end else begin
            chunk <= chunk + 1'b1;
          end
        end
        C_P2_START: begin
          for (int d = 0; d < N_DEC; d++) pending[d] <= dec_start[d];
          st <= C_P2_WAIT;
        end
        C_P2_WAIT: if (!any_pending) st <= C_P2_REPORT;
        C_P2_REPORT: st <= C_P2_PLAN;
        C_FINAL: begin
          done <= 1'b1;
          st   <= C_IDLE;
        end
        default: st <= C_IDLE;
      endcase
    end
  end

endmodule
