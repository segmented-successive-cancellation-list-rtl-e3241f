// cand_comparator: comparator "C" behind the segment CRC detectors.
//
// Of the 2L end-of-segment candidates it considers only those that passed the
// segment CRC and picks the one with the best path metric (smallest penalty,
// i.e. largest likelihood metric); a tie goes to the lower candidate index,
// which is this design's choice. `found` is low when no candidate passed,
// which ends the decoding of the frame early.
//
// Combinational: a linear scan over the 2L candidates.
module cand_comparator #(
  parameter int unsigned L   = 2,
  parameter int unsigned PMW = 18,
  localparam int unsigned CW = $clog2(2 * L)
) (
  input  logic           pass [2*L],
  input  logic [PMW-1:0] pm   [2*L],
  output logic           found,
  output logic [CW-1:0]  best
);

  always_comb begin
    logic [PMW-1:0] bpm;
    found = 1'b0;
    best  = '0;
    bpm   = '1;
    for (int unsigned c = 0; c < 2 * L; c++)
      if (pass[c] && (!found || pm[c] < bpm)) begin
        found = 1'b1;
        best  = CW'(c);
        bpm   = pm[c];
      end
  end

endmodule
