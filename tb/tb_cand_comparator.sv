// tb_cand_comparator: random pass flags and metrics; the reference is the
// passing candidate with the smallest metric (lowest index on a tie).
module tb_cand_comparator;
  localparam int L = 2, PMW = 18;
  logic pass [2*L];
  logic [PMW-1:0] pm [2*L];
  logic found;
  logic [1:0] best;
  int checks = 0, failures = 0;

  cand_comparator #(.L(L), .PMW(PMW)) dut (.pass(pass), .pm(pm), .found(found), .best(best));

  initial begin : wd
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 3000; t++) begin
      int eb; eb = -1;
      for (int c = 0; c < 2*L; c++) begin
        pass[c] = ($urandom_range(2) == 0);
        pm[c]   = PMW'($urandom_range(t < 1000 ? 3 : 100000));
      end
      for (int c = 0; c < 2*L; c++)
        if (pass[c] && (eb < 0 || pm[c] < pm[eb])) eb = c;
      #1;
      checks++;
      if ((eb < 0) ? found : (!found || int'(best) != eb)) begin
        failures++;
        if (failures < 10) $display("got %0d/%0d expected %0d", best, found, eb);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
