// Candidate buffer: channel LLRs of the C1 candidates of one blind-detection
// round, with the code each candidate uses.
//
// The C1 candidates of a control region are available together; this
// register file holds them while the first phase decodes them in batches and
// while the second phase re-reads the C2 chosen ones. Writes come P LLRs at a
// time (wr_cand, wr_chunk select the candidate and the P-wide chunk; the code
// index is written with every chunk). Each of the N_RD read ports returns the
// P LLRs of chunk rd_chunk of candidate rd_cand[r] combinationally, which is
// the codeword multiplexer feeding the decoders. Holding all candidates in one
// buffer is this design's reading of how the input reaches the decoders.
module bd_cand_buffer #(
  parameter int unsigned C1        = bd_pkg::C1_D,
  parameter int unsigned N_MAX     = bd_pkg::N_MAX_D,
  parameter int unsigned P         = bd_pkg::P_D,
  parameter int unsigned Q         = bd_pkg::Q_D,
  parameter int unsigned NUM_CODES = bd_pkg::NUM_CODES_D,
  parameter int unsigned N_RD      = bd_pkg::N_SCL_MAX_D,
  localparam int unsigned IW       = $clog2(C1),
  localparam int unsigned CHUNKS   = (N_MAX > P) ? N_MAX / P : 1,
  localparam int unsigned CAW      = (CHUNKS > 1) ? $clog2(CHUNKS) : 1,
  localparam int unsigned CDW      = (NUM_CODES > 1) ? $clog2(NUM_CODES) : 1
) (
  input  logic                clk,
  input  logic                wr_en,
  input  logic [IW-1:0]       wr_cand,
  input  logic [CAW-1:0]      wr_chunk,
  input  logic [CDW-1:0]      wr_code,
  input  logic signed [Q-1:0] wr_data [P],
  input  logic [IW-1:0]       rd_cand [N_RD],
  input  logic [CAW-1:0]      rd_chunk,
  output logic signed [Q-1:0] rd_data [N_RD][P],
  output logic [CDW-1:0]      code_of [C1]
);

  logic signed [Q-1:0] mem [C1][N_MAX];

  always_ff @(posedge clk) begin
    if (wr_en && int'(wr_cand) < C1) begin
      code_of[wr_cand] <= wr_code;
      for (int p = 0; p < P; p++)
        if (int'(wr_chunk) * P + p < N_MAX)
          mem[wr_cand][int'(wr_chunk) * P + p] <= wr_data[p];
    end
  end

  always_comb
    for (int r = 0; r < N_RD; r++)
      for (int p = 0; p < P; p++)
        rd_data[r][p] = (int'(rd_cand[r]) < C1 && int'(rd_chunk) * P + p < N_MAX)
                        ? mem[rd_cand[r]][int'(rd_chunk) * P + p] : '0;

endmodule
