// Array of N_DEC flexible list-size SCL decoders.
//
// All decoders are physically identical and independent: each has its own
// channel memories, start/done handshake and code description, so in the
// first phase they decode N_DEC * L_MAX/L1 candidates at a time and in the
// second phase N_DEC candidates at a time, possibly of different lengths.
// The list-size mode and the early-stopping enable are common to the array,
// as the same hardware serves one phase at a time. Ports are those of
// bd_scl_decoder with a leading [N_DEC] dimension; the channel-LLR data bus
// is per decoder, the chunk address is shared. The number of decoders is the
// paper's N_SCLmax, swept from 1 to 5 in its results.
module bd_decoder_array
  import bd_pkg::*;
#(
  parameter int unsigned N_DEC   = bd_pkg::N_SCL_MAX_D,
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
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    ch_we     [N_DEC][NCH],
  input  logic [CAW-1:0]          ch_addr,
  input  logic signed [Q-1:0]     ch_data   [N_DEC][P],
  input  logic                    start     [N_DEC],
  input  list_mode_t              list_mode,
  input  logic                    es_en,
  input  logic                    grp_vld   [N_DEC][NCH],
  input  logic [$clog2(NL+1)-1:0] n_log2    [N_DEC],
  input  bit_type_t               bit_type  [N_DEC][N_MAX],
  input  logic [ID_BITS-1:0]      ue_id,
  output logic                    busy      [N_DEC],
  output logic                    done      [N_DEC],
  output logic [NL:0]             est_bits  [N_DEC],
  output logic                    res_vld   [N_DEC][NCH],
  output logic [PM_W-1:0]         res_pm    [N_DEC][NCH],
  output logic [W-2:0]            res_rel   [N_DEC][NCH],
  output logic                    res_match [N_DEC][NCH],
  output logic [N_MAX-1:0]        res_u     [N_DEC][NCH]
);

  for (genvar d = 0; d < N_DEC; d++) begin : g_dec
    bd_scl_decoder #(
      .N_MAX(N_MAX), .L_MAX(L_MAX), .L1(L1), .P(P), .Q(Q), .W(W),
      .PM_W(PM_W), .ID_BITS(ID_BITS)
    ) u_dec (
      .clk, .rst_n,
      .ch_we     (ch_we[d]),
      .ch_addr   (ch_addr),
      .ch_data   (ch_data[d]),
      .start     (start[d]),
      .list_mode (list_mode),
      .es_en     (es_en),
      .grp_vld   (grp_vld[d]),
      .n_log2    (n_log2[d]),
      .bit_type  (bit_type[d]),
      .ue_id     (ue_id),
      .busy      (busy[d]),
      .done      (done[d]),
      .est_bits  (est_bits[d]),
      .res_vld   (res_vld[d]),
      .res_pm    (res_pm[d]),
      .res_rel   (res_rel[d]),
      .res_match (res_match[d]),
      .res_u     (res_u[d])
    );
  end

endmodule
