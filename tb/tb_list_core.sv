// tb_list_core: random metrics and validity for 2L = 4 candidates; the
// reference sorts the valid candidates by (metric, index) and expects slot k
// to hold the k-th of them.
module tb_list_core;
  localparam int L = 2, PMW = 18;
  logic [PMW-1:0] pm [2*L];
  logic v [2*L];
  logic [1:0] idx [L];
  logic sv [L];
  int checks = 0, failures = 0;

  list_core #(.L(L), .PMW(PMW)) dut (.cand_pm(pm), .cand_valid(v), .sel_idx(idx), .sel_valid(sv));

  initial begin : wd
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 3000; t++) begin
      automatic int order[$];
      for (int c = 0; c < 2*L; c++) begin
        pm[c] = PMW'($urandom_range(t < 1500 ? 7 : 5000));
        v[c]  = ($urandom_range(3) != 0);
        if (v[c]) order.push_back(c);
      end
      // selection sort by (pm, index)
      for (int i = 0; i < order.size(); i++)
        for (int j = i + 1; j < order.size(); j++)
          if (pm[order[j]] < pm[order[i]] || (pm[order[j]] == pm[order[i]] && order[j] < order[i])) begin
            int tmp; tmp = order[i]; order[i] = order[j]; order[j] = tmp;
          end
      #1;
      for (int k = 0; k < L; k++) begin
        checks++;
        if (k < order.size()) begin
          if (!sv[k] || int'(idx[k]) != order[k]) begin
            failures++;
            if (failures < 10) $display("slot %0d: got %0d/%0d expected %0d", k, idx[k], sv[k], order[k]);
          end
        end else if (sv[k]) begin
          failures++;
          $display("slot %0d should be empty", k);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
