// Polar-code blind detector (top level).
//
// A user equipment must find, among C1 received control-channel candidates,
// the one addressed to it. The transmitter puts the 16-bit UE ID on bit
// positions of the polar code that would otherwise be frozen. Detection runs
// in two phases on one array of flexible list-size SCL decoders:
//   phase 1: every candidate is decoded with a small list L1; L_MAX/L1
//            candidates share one decoder. Each yields a reliability (the
//            |LLR| of the last estimated bit of its best path) and a flag
//            telling whether its decoded ID bits equal the UE ID.
//   select:  C2 candidates go on: those whose ID matched, topped up with the
//            least reliable ones (a transmission to this UE may hide there).
//   phase 2: the C2 candidates are decoded with list L_MAX and early
//            stopping: a path dies as soon as one of its ID bits differs from
//            the UE ID, and a decode ends when no path is left.
// The output is the decoded bit vector (u, length N_MAX, bits above the code
// length are 0) of the second-phase candidate whose ID matched with the
// lowest path metric, provided that metric is at most pm_limit, or
// out_found = 0.
//
// Use: write each candidate's channel LLRs into the candidate buffer with
// in_we (P LLRs per cycle, in_chunk selects them) together with its code
// index; set the code table (code_nlog2, code_bt), ue_id and pm_limit;
// pulse go. done and out_valid pulse together when the detection ends. The structure (controller, decoder array, PM sorting and
// candidate selection, Fig.-8-style wiring) follows the paper; the buffer
// and load protocol are this design's.
module bd_top
  import bd_pkg::*;
#(
  parameter int unsigned N_MAX     = bd_pkg::N_MAX_D,
  parameter int unsigned L_MAX     = bd_pkg::L_MAX_D,
  parameter int unsigned L1        = bd_pkg::L1_D,
  parameter int unsigned P         = bd_pkg::P_D,
  parameter int unsigned C1        = bd_pkg::C1_D,
  parameter int unsigned C2        = bd_pkg::C2_D,
  parameter int unsigned N_SCL_MAX = bd_pkg::N_SCL_MAX_D,
  parameter int unsigned ID_BITS   = bd_pkg::ID_BITS_D,
  parameter int unsigned NUM_CODES = bd_pkg::NUM_CODES_D,
  parameter int unsigned Q         = bd_pkg::Q_D,
  parameter int unsigned W         = bd_pkg::W_D,
  parameter int unsigned PM_W      = bd_pkg::PM_W_D,
  localparam int unsigned NL       = $clog2(N_MAX),
  localparam int unsigned NCH      = L_MAX / L1,
  localparam int unsigned NL1      = N_SCL_MAX * NCH,
  localparam int unsigned IW       = $clog2(C1),
  localparam int unsigned CHUNKS   = (N_MAX > P) ? N_MAX / P : 1,
  localparam int unsigned CAW      = (CHUNKS > 1) ? $clog2(CHUNKS) : 1,
  localparam int unsigned CDW      = (NUM_CODES > 1) ? $clog2(NUM_CODES) : 1
) (
  input  logic                    clk,
  input  logic                    rst_n,
  // candidate input
  input  logic                    in_we,
  input  logic [IW-1:0]           in_cand,
  input  logic [CAW-1:0]          in_chunk,
  input  logic [CDW-1:0]          in_code,
  input  logic signed [Q-1:0]     in_data    [P],
  // configuration
  input  logic [$clog2(NL+1)-1:0] code_nlog2 [NUM_CODES],
  input  bit_type_t               code_bt    [NUM_CODES][N_MAX],
  input  logic [ID_BITS-1:0]      ue_id,
  input  logic [PM_W-1:0]         pm_limit,   // largest accepted path metric
  // control and result
  input  logic                    go,
  output logic                    busy,
  output logic                    done,
  output logic                    out_valid,
  output logic                    out_found,
  output logic [IW-1:0]           out_idx,
  output logic [N_MAX-1:0]        out_u,
  output logic [PM_W-1:0]         out_pm,
  output logic [$clog2(C1+1)-1:0] p1_match_cnt,
  output logic                    p1_many_match, // more than C2 first-phase matches
  output logic [IW-1:0]           p2_list    [C2],
  output logic                    dec_busy     [N_SCL_MAX],
  output logic [NL:0]             dec_est_bits [N_SCL_MAX]
);

  // candidate buffer
  logic [IW-1:0]       rd_cand [N_SCL_MAX];
  logic [CAW-1:0]      rd_chunk;
  logic signed [Q-1:0] rd_data [N_SCL_MAX][P];
  logic [CDW-1:0]      code_of [C1];

  bd_cand_buffer #(.C1(C1), .N_MAX(N_MAX), .P(P), .Q(Q), .NUM_CODES(NUM_CODES),
                   .N_RD(N_SCL_MAX)) u_buf (
    .clk,
    .wr_en (in_we), .wr_cand (in_cand), .wr_chunk (in_chunk), .wr_code (in_code),
    .wr_data (in_data),
    .rd_cand, .rd_chunk, .rd_data, .code_of
  );

  // decoder array
  logic                    dec_ch_we   [N_SCL_MAX][NCH];
  logic                    dec_start   [N_SCL_MAX];
  list_mode_t              dec_mode;
  logic                    dec_es;
  logic                    dec_grp_vld [N_SCL_MAX][NCH];
  logic [CDW-1:0]          dec_code    [N_SCL_MAX];
  logic [$clog2(NL+1)-1:0] dec_nlog2   [N_SCL_MAX];
  bit_type_t               dec_bt      [N_SCL_MAX][N_MAX];
  logic                    dec_done    [N_SCL_MAX];
  logic                    res_vld     [N_SCL_MAX][NCH];
  logic [PM_W-1:0]         res_pm      [N_SCL_MAX][NCH];
  logic [W-2:0]            res_rel     [N_SCL_MAX][NCH];
  logic                    res_match   [N_SCL_MAX][NCH];
  logic [N_MAX-1:0]        res_u       [N_SCL_MAX][NCH];

  always_comb
    for (int d = 0; d < N_SCL_MAX; d++) begin
      dec_nlog2[d] = code_nlog2[dec_code[d]];
      dec_bt[d]    = code_bt[dec_code[d]];
    end

  bd_decoder_array #(.N_DEC(N_SCL_MAX), .N_MAX(N_MAX), .L_MAX(L_MAX), .L1(L1), .P(P),
                     .Q(Q), .W(W), .PM_W(PM_W), .ID_BITS(ID_BITS)) u_array (
    .clk, .rst_n,
    .ch_we (dec_ch_we), .ch_addr (rd_chunk), .ch_data (rd_data),
    .start (dec_start), .list_mode (dec_mode), .es_en (dec_es),
    .grp_vld (dec_grp_vld), .n_log2 (dec_nlog2), .bit_type (dec_bt),
    .ue_id (ue_id),
    .busy (dec_busy), .done (dec_done), .est_bits (dec_est_bits),
    .res_vld, .res_pm, .res_rel, .res_match, .res_u
  );

  // controller
  logic          sel_clear, sel_done, p2_more, p2_next, final_done;
  logic          p1_vld  [NL1];
  logic [IW-1:0] p2_idx  [N_SCL_MAX];
  logic          p2_vld  [N_SCL_MAX];
  logic          f_vld   [N_SCL_MAX];
  logic [IW-1:0] f_idx   [N_SCL_MAX];

  bd_controller #(.C1(C1), .N_MAX(N_MAX), .P(P), .NCH(NCH), .N_DEC(N_SCL_MAX),
                  .NUM_CODES(NUM_CODES)) u_ctrl (
    .clk, .rst_n, .go, .busy, .done,
    .code_of, .code_nlog2,
    .rd_cand, .rd_chunk,
    .dec_ch_we, .dec_start, .dec_mode, .dec_es, .dec_grp_vld, .dec_code,
    .dec_done,
    .sel_clear, .p1_vld, .sel_done, .p2_idx, .p2_vld, .p2_more, .p2_next,
    .f_vld, .f_idx, .final_done
  );

  // PM sorting and candidate selection
  logic [W-2:0]     lane_pm    [NL1];
  logic             lane_match [NL1];
  logic             f_ok       [N_SCL_MAX];
  logic [PM_W-1:0]  f_pm       [N_SCL_MAX];
  logic             f_match    [N_SCL_MAX];
  logic [N_MAX-1:0] f_u        [N_SCL_MAX];

  always_comb begin
    for (int d = 0; d < N_SCL_MAX; d++) begin
      for (int g = 0; g < NCH; g++) begin
        lane_pm[d * NCH + g]    = res_rel[d][g];
        lane_match[d * NCH + g] = res_match[d][g];
      end
      f_ok[d]    = res_vld[d][0];
      f_pm[d]    = res_pm[d][0];
      f_match[d] = res_match[d][0];
      f_u[d]     = res_u[d][0];
    end
  end

  bd_cand_select #(.C1(C1), .C2(C2), .NL1(NL1), .N_DEC(N_SCL_MAX), .PW(W-1),
                   .PM_W(PM_W), .N_MAX(N_MAX)) u_sel (
    .clk, .rst_n, .clear (sel_clear),
    .in_vld (p1_vld), .in_pm (lane_pm), .in_match (lane_match),
    .sel_done, .sel_idx (p2_list), .match_cnt (p1_match_cnt), .many_match (p1_many_match),
    .p2_next, .p2_idx, .p2_vld, .p2_more,
    .f_vld, .f_ok, .f_pm, .f_match, .f_u, .f_idx, .pm_limit,
    .final_done,
    .out_valid, .out_found, .out_idx, .out_u, .out_pm
  );

endmodule
