// mn_array: the stages of mixed nodes of the full-module segmented SCL decoder,
// with the LLR registers that hold each stage's results.
//
// Stage d (1..n, n = log2 N) of the SC tree holds N/2^d LLRs. Stage d is
// computed from stage d-1 (stage 0 being the channel LLRs) by N/2^d mixed
// nodes working in parallel: node j takes the parent's entries j and
// j + N/2^d and applies f when the current leaf's bit (n-d) is 0 (the node is
// a left child) or g with the stored left partial sum when it is 1.
//
// Because every segment starts from a single surviving path and a node of
// stage d <= log2 P spans one or more whole segments, stages 1..log2 P are
// built once (SC rule) and only stages log2 P + 1 .. n once per list path.
// The node count is N - L + (L-1) N/P, which for N=1024, L=2, P=4 is 1278.
// Shared stages read the partial sums of path slot 0, which is where the
// surviving path of a segment is placed.
//
// Interface and timing: with calc_en high the stage given by `depth` is
// written at the clock edge; leaf_llr is the combinational stage-n result of
// each path for the current cycle (valid when depth == n). On upd_valid every
// list slot k copies the per-path LLR registers of slot upd_parent[k]
// (path duplication after a decision); this wins over a write in the same
// cycle, whose stage-n value is no longer needed.
//
// Storage layout (this design's choice): stage d entry j lives at address
// N/2^d + j, so addresses N/P..N-1 are the shared stages and 1..N/P-1 the
// per-path stages. The tree is in natural order (encoder x = u F^{(x)n}); the
// bit-reversal permutation of the code only reorders the channel LLRs.
module mn_array #(
  parameter int unsigned N = 1024,
  parameter int unsigned L = 2,
  parameter int unsigned P = 4,
  parameter int unsigned Q = 8,
  localparam int unsigned LOGN = $clog2(N),
  localparam int unsigned LW   = (L > 1) ? $clog2(L) : 1
) (
  input  logic                   clk,
  input  logic signed [Q-1:0]    ch_llr   [N],
  input  logic                   calc_en,
  input  logic [LOGN:0]          depth,
  input  logic [LOGN-1:0]        leaf,
  input  logic [N-1:0]           beta     [L],
  input  logic                   upd_valid,
  input  logic [LW-1:0]          upd_parent [L],
  output logic signed [Q-1:0]    leaf_llr [L]
);

  localparam int unsigned S  = $clog2(P);   // shared stages
  localparam int unsigned NP = N / P;       // first shared address

  // registers
  logic signed [Q-1:0] sh    [NP:N-1];
  logic signed [Q-1:0] pp    [L][1:NP-1];
  // next values from the mixed nodes
  logic signed [Q-1:0] sh_nx [NP:N-1];
  logic signed [Q-1:0] pp_nx [L][1:NP-1];

  for (genvar d = 1; d <= LOGN; d++) begin : g_stage
    localparam int unsigned SZ = N >> d;
    localparam int unsigned PB = 2 * SZ;     // parent base address
    for (genvar j = 0; j < SZ; j++) begin : g_node
      if (d <= S) begin : g_shared
        logic signed [Q-1:0] a, b;
        if (d == 1) begin : g_ch
          assign a = ch_llr[j];
          assign b = ch_llr[j + SZ];
        end else begin : g_sh
          assign a = sh[PB + j];
          assign b = sh[PB + j + SZ];
        end
        mn #(.Q(Q)) u_mn (
          .a(a), .b(b), .sel_g(leaf[LOGN-d]), .psum(beta[0][SZ + j]),
          .y(sh_nx[SZ + j])
        );
      end else begin : g_path
        for (genvar p = 0; p < L; p++) begin : g_p
          logic signed [Q-1:0] a, b;
          if (d == 1) begin : g_ch
            assign a = ch_llr[j];
            assign b = ch_llr[j + SZ];
          end else if (d - 1 <= S) begin : g_sh
            assign a = sh[PB + j];
            assign b = sh[PB + j + SZ];
          end else begin : g_pp
            assign a = pp[p][PB + j];
            assign b = pp[p][PB + j + SZ];
          end
          mn #(.Q(Q)) u_mn (
            .a(a), .b(b), .sel_g(leaf[LOGN-d]), .psum(beta[p][SZ + j]),
            .y(pp_nx[p][SZ + j])
          );
        end
      end
    end
  end

  for (genvar p = 0; p < L; p++) begin : g_out
    assign leaf_llr[p] = pp_nx[p][1];
  end

  always_ff @(posedge clk) begin
    if (calc_en) begin
      // stage d occupies addresses N/2^d .. N/2^(d-1)-1
      for (int d = 1; d <= int'(LOGN); d++)
        if (d == int'(depth)) begin
          if (d <= int'(S)) begin
            for (int a = int'(N >> d); a < int'(N >> (d - 1)); a++)
              sh[a] <= sh_nx[a];
          end else begin
            for (int p = 0; p < int'(L); p++)
              for (int a = int'(N >> d); a < int'(N >> (d - 1)); a++)
                pp[p][a] <= pp_nx[p][a];
          end
        end
    end
    if (upd_valid) begin
      for (int unsigned k = 0; k < L; k++)
        for (int unsigned a = 1; a < NP; a++)
          pp[k][a] <= pp[upd_parent[k]][a];
    end
  end

endmodule
