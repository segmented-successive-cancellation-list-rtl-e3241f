// list_core: list core (LC) of the SCL decoder - keeps the L best of the 2L
// path extensions at an information bit.
//
// Candidate c (c = 2*path + bit) carries a path-metric penalty cand_pm[c]
// (smaller is better; it is the negative of the log-likelihood metric, so the
// "largest metric" of the decoding rule is the smallest penalty here) and a
// flag cand_valid[c]. Each candidate counts the candidates that beat it
// (valid, smaller penalty, or equal penalty and lower index); a valid
// candidate whose count k is below L goes to list slot k. Slots that receive
// no candidate (fewer than L valid extensions) report sel_valid = 0.
//
// This full rank selection is this design's choice: the decoder it follows
// uses a distributed sorter from the literature, whose insides are not given.
// It is combinational and takes (2L)^2 comparators.
module list_core #(
  parameter int unsigned L   = 2,
  parameter int unsigned PMW = 18,
  localparam int unsigned CW = $clog2(2 * L)
) (
  input  logic [PMW-1:0] cand_pm    [2*L],
  input  logic           cand_valid [2*L],
  output logic [CW-1:0]  sel_idx    [L],
  output logic           sel_valid  [L]
);

  localparam int unsigned C = 2 * L;

  function automatic logic beats(int unsigned x, int unsigned y,
                                 logic [PMW-1:0] pm [C], logic v [C]);
    if (!v[x]) return 1'b0;
    if (!v[y]) return 1'b1;
    if (pm[x] < pm[y]) return 1'b1;
    return (pm[x] == pm[y]) && (x < y);
  endfunction

  always_comb begin
    for (int unsigned k = 0; k < L; k++) begin
      sel_idx[k]   = '0;
      sel_valid[k] = 1'b0;
    end
    for (int unsigned c = 0; c < C; c++) begin
      int unsigned rank;
      rank = 0;
      for (int unsigned d = 0; d < C; d++)
        if (d != c && beats(d, c, cand_pm, cand_valid)) rank++;
      if (cand_valid[c] && rank < L) begin
        sel_idx[rank]   = CW'(c);
        sel_valid[rank] = 1'b1;
      end
    end
  end

endmodule
