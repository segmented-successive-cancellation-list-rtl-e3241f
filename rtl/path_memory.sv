// path_memory: decided information bits of every list path ("Memory").
//
// Each of the L rows holds the K+m information and CRC bits of one path, in
// decoding order; frozen bits are not stored. On upd_valid every row k becomes
// a copy of row upd_parent[k]; when upd_info is set, bit upd_bit[k] is
// written at position info_idx of that copy. The same port serves both
// sources of an update: the list core during a segment and the CRC
// comparator when the survivor of a segment is written back (the
// multiplexer in front of this unit sits in the decoder top).
//
// Registers, one-cycle update, rows visible on `rows`.
module path_memory #(
  parameter int unsigned KM = 544,
  parameter int unsigned L  = 2,
  localparam int unsigned LW = (L > 1) ? $clog2(L) : 1,
  localparam int unsigned IW = $clog2(KM + 1)
) (
  input  logic          clk,
  input  logic          upd_valid,
  input  logic [LW-1:0] upd_parent [L],
  input  logic          upd_bit    [L],
  input  logic          upd_info,
  input  logic [IW-1:0] info_idx,
  output logic [KM-1:0] rows       [L]
);

  always_ff @(posedge clk)
    if (upd_valid)
      for (int unsigned k = 0; k < L; k++) begin
        rows[k] <= rows[upd_parent[k]];
        if (upd_info && info_idx < IW'(KM))
          rows[k][info_idx] <= upd_bit[k];
      end

endmodule
