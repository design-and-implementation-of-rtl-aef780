// Exhaustive check of the processing element over all W = 8 input pairs
// inside the symmetric range, both partial-sum values and both outputs,
// against integer min-sum f and saturated g computed here.
module tb_bd_pe;
  localparam int W = 8;
  localparam int M = (1 << (W - 1)) - 1;
  logic signed [W-1:0] a, b, y;
  logic beta_l, sel_g;
  int checks = 0, failures = 0;

  bd_pe #(.W(W)) dut (.*);

  initial begin : watchdog
    #10ms;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int ia = -M; ia <= M; ia++)
      for (int ib = -M; ib <= M; ib += 3)
        for (int s = 0; s < 4; s++) begin
          int exp, ma, mb;
          a = W'(ia); b = W'(ib); beta_l = s[0]; sel_g = s[1];
          #1;
          ma = ia < 0 ? -ia : ia;
          mb = ib < 0 ? -ib : ib;
          if (!sel_g) begin
            exp = (ma < mb) ? ma : mb;
            if ((ia < 0) != (ib < 0)) exp = -exp;
          end else begin
            exp = beta_l ? ib - ia : ib + ia;
            if (exp > M) exp = M;
            if (exp < -M) exp = -M;
          end
          checks++;
          if (int'(y) != exp) begin
            failures++;
            if (failures < 10) $display("FAIL a=%0d b=%0d bl=%0d g=%0d y=%0d exp=%0d", ia, ib, beta_l, sel_g, y, exp);
          end
        end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
