// tb_usum: N=16, L=2. Random list decisions (random parents and bits) are
// applied leaf by leaf; a reference keeps every path's full decision vector.
// Whenever a left node of stage d completes, the stored partial sums of that
// stage must equal the polar transform u*F^{(x)m} of the node's decisions,
// computed here with the butterfly recursion.
module tb_usum;
  localparam int N = 16, L = 2, LOGN = 4;
  logic clk = 0, uv;
  logic [0:0] par [L];
  logic bt [L];
  logic [LOGN-1:0] leaf;
  logic [N-1:0] beta [L];
  int checks = 0, failures = 0;
  bit u [L][N];
  always #5 clk = ~clk;

  usum #(.N(N), .L(L)) dut (.clk(clk), .upd_valid(uv), .upd_parent(par), .upd_bit(bt), .leaf(leaf), .beta(beta));

  initial begin : wd
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    uv = 0; leaf = 0;
    for (int fr = 0; fr < 40; fr++) begin
      for (int i = 0; i < N; i++) begin
        bit old [L][N];
        @(negedge clk);
        uv = 1; leaf = LOGN'(i);
        for (int k = 0; k < L; k++) begin par[k] = 1'($urandom); bt[k] = $urandom; end
        old = u;
        for (int k = 0; k < L; k++) begin
          u[k] = old[par[k]];
          u[k][i] = bt[k];
        end
        @(posedge clk); #1; uv = 0;
        // stages whose left node completed at leaf i
        for (int d = LOGN; d >= 1; d--) begin
          int sz, first;
          sz = N >> d;
          if ((i % (2*sz)) == sz - 1) begin
            first = i - sz + 1;
            for (int k = 0; k < L; k++) begin
              automatic bit x [$];
              for (int j = 0; j < sz; j++) x.push_back(u[k][first + j]);
              for (int h = 1; h < sz; h *= 2)
                for (int j = 0; j < sz; j++) if ((j & h) == 0) x[j] ^= x[j + h];
              for (int j = 0; j < sz; j++) begin
                checks++;
                if (beta[k][sz + j] != x[j]) begin
                  failures++;
                  if (failures < 10) $display("leaf %0d stage %0d path %0d bit %0d", i, d, k, j);
                end
              end
            end
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
