// Check of the candidate buffer: random LLRs are written chunk by chunk for
// every candidate with a random code index, then read back through two read
// ports at random addresses and compared with a copy kept here.
module tb_bd_cand_buffer;
  localparam int C1 = 12, N_MAX = 32, P = 4, Q = 6, NUM_CODES = 2, N_RD = 2;
  logic clk = 0;
  always #5 clk = ~clk;
  logic wr_en;
  logic [3:0] wr_cand;
  logic [2:0] wr_chunk;
  logic [0:0] wr_code;
  logic signed [Q-1:0] wr_data [P];
  logic [3:0] rd_cand [N_RD];
  logic [2:0] rd_chunk;
  logic signed [Q-1:0] rd_data [N_RD][P];
  logic [0:0] code_of [C1];
  int shadow [C1][N_MAX];
  int code_sh [C1];
  int checks = 0, failures = 0;

  bd_cand_buffer #(.C1(C1), .N_MAX(N_MAX), .P(P), .Q(Q), .NUM_CODES(NUM_CODES), .N_RD(N_RD)) dut (.*);

  initial begin : watchdog
    repeat (10000) @(negedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    wr_en = 0;
    for (int c = 0; c < C1; c++) begin
      code_sh[c] = int'($urandom_range(0, 1));
      for (int k = 0; k < N_MAX / P; k++) begin
        wr_en = 1; wr_cand = 4'(c); wr_chunk = 3'(k); wr_code = 1'(code_sh[c]);
        for (int p = 0; p < P; p++) begin
          shadow[c][k*P+p] = int'($urandom_range(0, 62)) - 31;
          wr_data[p] = Q'(shadow[c][k*P+p]);
        end
        @(negedge clk);
      end
    end
    wr_en = 0;
    for (int t = 0; t < 300; t++) begin
      int k;
      k = int'($urandom_range(0, N_MAX / P - 1));
      rd_chunk = 3'(k);
      for (int r = 0; r < N_RD; r++) rd_cand[r] = 4'($urandom_range(0, C1 - 1));
      #1;
      for (int r = 0; r < N_RD; r++)
        for (int p = 0; p < P; p++) begin
          checks++;
          if (int'(rd_data[r][p]) != shadow[rd_cand[r]][k*P+p]) begin
            failures++;
            if (failures < 10) $display("FAIL cand %0d pos %0d", rd_cand[r], k*P+p);
          end
        end
      @(negedge clk);
    end
    for (int c = 0; c < C1; c++) begin
      checks++;
      if (int'(code_of[c]) != code_sh[c]) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
