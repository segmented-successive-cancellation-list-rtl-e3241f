// tb_path_memory: random parent/bit updates on a small memory (KM=20, L=2)
// against a reference array that is copied and written the same way.
module tb_path_memory;
  localparam int KM = 20, L = 2;
  logic clk = 0, uv, ui;
  logic [0:0] par [L];
  logic bt [L];
  logic [4:0] idx;
  logic [KM-1:0] rows [L];
  logic [KM-1:0] ref_rows [L];
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  path_memory #(.KM(KM), .L(L)) dut (.clk(clk), .upd_valid(uv), .upd_parent(par), .upd_bit(bt),
                                     .upd_info(ui), .info_idx(idx), .rows(rows));

  initial begin : wd
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    uv = 0; ui = 0; idx = 0;
    for (int k = 0; k < L; k++) begin par[k] = 1'(k); bt[k] = 0; end
    // initialise both rows to zero through the port
    for (int i = 0; i < KM; i++) begin
      @(negedge clk); uv = 1; ui = 1; idx = 5'(i); par[0] = 0; par[1] = 1; bt[0] = 0; bt[1] = 0;
    end
    @(negedge clk); uv = 0;
    for (int k = 0; k < L; k++) ref_rows[k] = '0;
    for (int t = 0; t < 500; t++) begin
      logic [KM-1:0] old [L];
      @(negedge clk);
      uv = ($urandom_range(3) != 0); ui = $urandom; idx = 5'($urandom_range(KM - 1));
      for (int k = 0; k < L; k++) begin par[k] = 1'($urandom); bt[k] = $urandom; end
      old = ref_rows;
      if (uv) for (int k = 0; k < L; k++) begin
        ref_rows[k] = old[par[k]];
        if (ui) ref_rows[k][idx] = bt[k];
      end
      @(posedge clk); #1;
      for (int k = 0; k < L; k++) begin
        checks++;
        if (rows[k] !== ref_rows[k]) begin failures++; if (failures < 10) $display("row %0d %h exp %h", k, rows[k], ref_rows[k]); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
