// crc_detector: serial CRC check of one segment, as a linear feedback shift
// register that takes one bit per clock.
//
// The generator polynomial is given in Koopman hex notation (POLY holds the
// x^W .. x^1 coefficients, the +1 term is implicit), as the decoder it
// belongs to specifies its CRCs; the full generator is g = {POLY, 1}. The
// register divides the bit stream, first bit = highest power, by g:
//     fb = r[W-1] ^ din;  r = (r << 1) ^ (fb ? g[W-1:0] : 0).
// A stream made of data followed by the W CRC bits (remainder of
// data * x^W / g, most significant bit first) leaves r = 0, so `pass` is high.
//
// Timing: clr empties the register at the edge; with en high one bit is
// shifted in per edge; pass reflects the register after the last edge.
module crc_detector #(
  parameter int unsigned W    = 8,
  parameter int unsigned POLY = 32'hA6
) (
  input  logic clk,
  input  logic clr,
  input  logic en,
  input  logic din,
  output logic pass
);

  localparam logic [W:0]   G   = {POLY[W-1:0], 1'b1};
  localparam logic [W-1:0] TAP = G[W-1:0];

  logic [W-1:0] r;

  always_ff @(posedge clk) begin
    if (clr)     r <= '0;
    else if (en) r <= {r[W-2:0], 1'b0} ^ ((r[W-1] ^ din) ? TAP : '0);
  end

  assign pass = (r == '0);

endmodule
