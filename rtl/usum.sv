// usum: partial-sum (U_SUM) unit of the SCL decoder, one vector per list path.
//
// The g-type mixed node of stage d needs the re-encoded bits of its left
// sibling sub-tree. This unit keeps, for each path and each stage d, the
// re-encoded bits of the last completed left node of that stage (N/2^d bits,
// stored at addresses N/2^d .. N/2^(d-1)-1, N-1 bits per path in all).
//
// When leaf i is decided with bit u, the new bit climbs the tree: while the
// node is a right child it is combined with the stored left sibling,
//     parent = { left XOR right , right }   (upper half first),
// and at the first stage where the node is a left child the combined vector
// is stored. The whole climb is an XOR chain evaluated in the same cycle.
//
// Interface and timing: on upd_valid each list slot k takes the vectors of
// slot upd_parent[k], extended with bit upd_bit[k] at leaf `leaf`; beta shows
// the registers. The layout and the one-cycle update are this design's
// choices; the decoder it follows only names the unit.
module usum #(
  parameter int unsigned N = 1024,
  parameter int unsigned L = 2,
  localparam int unsigned LOGN = $clog2(N),
  localparam int unsigned LW   = (L > 1) ? $clog2(L) : 1
) (
  input  logic            clk,
  input  logic            upd_valid,
  input  logic [LW-1:0]   upd_parent [L],
  input  logic            upd_bit    [L],
  input  logic [LOGN-1:0] leaf,
  output logic [N-1:0]    beta       [L]
);

  logic [N-1:0] bnext [L];

  // stage whose left node completes with this leaf: n - (trailing ones of i)
  logic [LOGN:0] store_d;
  always_comb begin
    store_d = '0;                      // 0: the whole tree completes
    for (int t = int'(LOGN) - 1; t >= 0; t--)
      if (!leaf[t]) store_d = (LOGN + 1)'(int'(LOGN) - t);
  end

  always_comb begin
    for (int unsigned k = 0; k < L; k++) begin
      logic [N-1:0] src, v;
      src = beta[upd_parent[k]];
      v   = '0;
      // v holds the re-encoded vector of the node at stage d, same layout
      v[1] = upd_bit[k];
      for (int d = int'(LOGN); d >= 1; d--) begin
        int unsigned sz;
        sz = N >> d;
        if (d > 1)
          for (int unsigned j = 0; j < sz; j++) begin
            v[2*sz + j]      = v[sz + j] ^ src[sz + j];
            v[2*sz + sz + j] = v[sz + j];
          end
      end
      bnext[k] = src;
      for (int d = 1; d <= int'(LOGN); d++) begin
        int unsigned sz;
        sz = N >> d;
        if (int'(store_d) == d)
          for (int unsigned j = 0; j < sz; j++) bnext[k][sz + j] = v[sz + j];
      end
    end
  end

  always_ff @(posedge clk)
    if (upd_valid)
      for (int unsigned k = 0; k < L; k++) beta[k] <= bnext[k];

endmodule
