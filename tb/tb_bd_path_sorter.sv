// Random check of the surviving-path selection (L = 8, 16 candidates):
// slot r must hold the valid candidate of rank r in (metric, index) order,
// and slots beyond the number of valid candidates must be invalid. Metrics
// are drawn from a small range so that ties are frequent.
module tb_bd_path_sorter;
  localparam int L = 8, PM_W = 12;
  logic [PM_W-1:0] cand_pm [2*L];
  logic            cand_vld [2*L];
  logic [3:0]      surv_idx [L];
  logic            surv_vld [L];
  int checks = 0, failures = 0;

  bd_path_sorter #(.L(L), .PM_W(PM_W)) dut (.*);

  initial begin : watchdog
    #1s;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 2000; t++) begin
      int order[$];
      for (int c = 0; c < 2*L; c++) begin
        cand_pm[c]  = PM_W'((t % 3 == 0) ? $urandom_range(0, 7) : $urandom_range(0, 4095));
        cand_vld[c] = (t % 4 == 0) ? 1'($urandom) : 1'b1;
      end
      #1;
      // reference: insertion sort of valid candidates by (pm, index)
      order = {};
      for (int c = 0; c < 2*L; c++)
        if (cand_vld[c]) begin
          int pos;
          pos = order.size();
          for (int k = 0; k < order.size(); k++)
            if (cand_pm[c] < cand_pm[order[k]]) begin pos = k; break; end
          order.insert(pos, c);
        end
      for (int r = 0; r < L; r++) begin
        checks++;
        if (r < order.size()) begin
          if (!surv_vld[r] || int'(surv_idx[r]) != order[r]) begin
            failures++;
            if (failures < 10) $display("FAIL t=%0d slot %0d got %0d/%0d exp %0d", t, r, surv_idx[r], surv_vld[r], order[r]);
          end
        end else if (surv_vld[r]) begin
          failures++;
          if (failures < 10) $display("FAIL t=%0d slot %0d should be empty", t, r);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
