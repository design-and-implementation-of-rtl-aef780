// Iterative extremum sorter of the candidate-selection block.
//
// On start it finds, one per clock cycle, the K extreme path metrics among
// the eligible entries of pm[]: each cycle every remaining metric is compared
// with all others, the minimum (find_max = 0) or maximum (find_max = 1) is
// reported, and it is excluded from the following comparisons. Ties go to the
// lower index. After K cycles, or earlier if no eligible entry is left, done
// pulses and out_idx/out_vld hold the result in order of extraction.
// The minimum search over C2 cycles is the paper's sorter; the maximum mode,
// used to rank first-phase ID matches when more than C2 match, is this
// design's addition for a case the paper states but does not map to hardware.
module bd_pm_sorter #(
  parameter int unsigned C1   = bd_pkg::C1_D,
  parameter int unsigned K    = bd_pkg::C2_D,
  parameter int unsigned PW   = bd_pkg::W_D - 1,
  localparam int unsigned IW  = $clog2(C1)
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           start,
  input  logic           find_max,
  input  logic [PW-1:0]  pm       [C1],
  input  logic           eligible [C1],
  output logic           busy,
  output logic           done,
  output logic [IW-1:0]  out_idx  [K],
  output logic           out_vld  [K]
);

  logic                 running;
  logic                 mx;
  logic                 excl [C1];
  logic [$clog2(K+1)-1:0] cnt;

  // combinational search for the current extremum
  logic          hit;
  logic [IW-1:0] hit_idx;
  logic          better;

  always_comb begin
    hit     = 1'b0;
    hit_idx = '0;
    better  = 1'b0;
    for (int c = 0; c < C1; c++) begin
      if (eligible[c] && !excl[c]) begin
        better = mx ? (pm[c] > pm[hit_idx]) : (pm[c] < pm[hit_idx]);
        if (!hit || better) begin
          hit     = 1'b1;
          hit_idx = IW'(c);
        end
      end
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      running <= 1'b0;
      mx      <= 1'b0;
      done    <= 1'b0;
      cnt     <= '0;
      for (int c = 0; c < C1; c++) excl[c] <= 1'b0;
      for (int k = 0; k < K; k++) begin out_idx[k] <= '0; out_vld[k] <= 1'b0; end
    end else begin
      done <= 1'b0;
      if (start && !running) begin
        running <= 1'b1;
        mx      <= find_max;
        cnt     <= '0;
        for (int c = 0; c < C1; c++) excl[c] <= 1'b0;
        for (int k = 0; k < K; k++) out_vld[k] <= 1'b0;
      end else if (running) begin
        if (hit) begin
          out_idx[cnt] <= hit_idx;
          out_vld[cnt] <= 1'b1;
          excl[hit_idx] <= 1'b1;
        end
        if (!hit || int'(cnt) == K - 1) begin
          running <= 1'b0;
          done    <= 1'b1;
        end
        cnt <= cnt + 1'b1;
      end
    end
  end

  assign busy = running;

endmodule
