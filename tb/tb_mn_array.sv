// tb_mn_array: N=16, L=2, P=4. The testbench plays the decoder's schedule
// (stage by stage, leaf by leaf) for two paths whose decisions are equal at
// each segment start and differ inside segments; it supplies the partial
// sums itself (polar transform of the decided bits); path 1 becomes a copy
// of path 0 at random leaves and at every segment end. At each leaf the stage-n LLR of every path
// must equal a recursive SC reference computed here from the channel LLRs
// with an independent f/g formulation.
module tb_mn_array;
  localparam int N = 16, L = 2, P = 4, Q = 8, LOGN = 4;
  logic clk = 0, calc_en, uv;
  logic signed [Q-1:0] ch [N];
  logic [LOGN:0] depth;
  logic [LOGN-1:0] leaf;
  logic [N-1:0] beta [L];
  logic [0:0] par [L];
  logic signed [Q-1:0] lo [L];
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  mn_array #(.N(N), .L(L), .P(P), .Q(Q)) dut (.clk(clk), .ch_llr(ch), .calc_en(calc_en), .depth(depth),
      .leaf(leaf), .beta(beta), .upd_valid(uv), .upd_parent(par), .leaf_llr(lo));

  initial begin : wd
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int sat(int v); return v > 127 ? 127 : (v < -128 ? -128 : v); endfunction
  function automatic int c(int d); if (d < 0) d = -d; return (d <= 2) ? 1 : 0; endfunction
  function automatic int ff(int x, int z);
    int ax, az, m;
    ax = x < 0 ? -x : x; az = z < 0 ? -z : z; m = ax < az ? ax : az;
    return sat((((x < 0) != (z < 0)) ? -m : m) + c(x + z) - c(x - z));
  endfunction
  function automatic void enc(ref bit v [$]);
    for (int h = 1; h < v.size(); h *= 2)
      for (int j = 0; j < v.size(); j++) if ((j & h) == 0) v[j] ^= v[j + h];
  endfunction
  // LLR of leaf i of the sub-tree with input y, given its decided bits u
  function automatic int sc_llr(int y [$], bit u [$], int i);
    int h; int ya [$]; bit x [$]; bit ur [$];
    if (y.size() == 1) return y[0];
    h = y.size() / 2;
    if (i < h) begin
      for (int j = 0; j < h; j++) ya.push_back(ff(y[j], y[j + h]));
      return sc_llr(ya, u[0:h-1], i);
    end
    x = u[0:h-1]; enc(x);
    for (int j = 0; j < h; j++) ya.push_back(sat(x[j] ? y[j+h] - y[j] : y[j+h] + y[j]));
    ur = u[h:2*h-1];
    return sc_llr(ya, ur, i - h);
  endfunction

  bit u [L][N];
  // partial sums as the decoder keeps them: per stage, the left node's transform
  task automatic set_beta(int i);
    for (int k = 0; k < L; k++) begin
      beta[k] = '0;
      for (int d = 1; d <= LOGN; d++) begin
        int sz, node; bit x [$];
        sz = N >> d;
        node = (i / sz);                // node of stage d holding leaf i
        if (node % 2 == 1) begin        // right child: left sibling complete
          for (int j = 0; j < sz; j++) x.push_back(u[k][(node - 1) * sz + j]);
          enc(x);
          for (int j = 0; j < sz; j++) beta[k][sz + j] = x[j];
        end
      end
    end
  endtask

  initial begin
    calc_en = 0; uv = 0; depth = 0; leaf = 0;
    par[0] = 0; par[1] = 1;
    for (int fr = 0; fr < 30; fr++) begin
      automatic int y [$];
      for (int j = 0; j < N; j++) begin
        ch[j] = Q'(int'($urandom_range(fr < 10 ? 30 : 255)) - (fr < 10 ? 15 : 128));
        y.push_back(int'(ch[j]));
      end
      for (int i = 0; i < N; i++) begin
        int d0;
        d0 = LOGN;
        if (i == 0) d0 = 1;
        else for (int t = LOGN - 1; t >= 0; t--) if (i[t]) d0 = LOGN - t;
        set_beta(i);
        for (int d = d0; d <= LOGN; d++) begin
          @(negedge clk); calc_en = 1; depth = (LOGN+1)'(d); leaf = LOGN'(i);
          uv = 0;
          if (d == LOGN) begin
            #1;
            for (int k = 0; k < L; k++) begin
              automatic bit uu [$];
              int e;
              for (int j = 0; j < N; j++) uu.push_back(u[k][j]);
              e = sc_llr(y, uu, i);
              checks++;
              if (int'(lo[k]) != e) begin
                failures++;
                if (failures < 10) $display("frame %0d leaf %0d path %0d llr %0d exp %0d", fr, i, k, lo[k], e);
              end
            end
            // decide: path k takes a random bit; at segment ends path 1 copies path 0
            // path 1 either continues or becomes a copy of path 0
            uv = 1;
            par[1] = 1'($urandom);
            if ((i % (N / P)) == N / P - 1) par[1] = 0;
            if (par[1] == 0) u[1] = u[0];
            u[0][i] = $urandom;
            u[1][i] = ((i % (N / P)) == N / P - 1) ? u[0][i] : 1'($urandom);
          end
        end
      end
      @(negedge clk); calc_en = 0; uv = 0; par[1] = 1;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
