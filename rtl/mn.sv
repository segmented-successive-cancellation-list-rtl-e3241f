// mn: mixed node of the SC decoding tree.
//
// One node computes one output LLR from two input LLRs a (upper half of the
// parent vector) and b (lower half). With sel_g = 0 it performs the "f" update
// of the first line of Eq. (6) in the LLR domain,
//     f(a,b) = max*(a+b, 0) - max*(a, b),
// where max*(x,y) = max(x,y) + ln(1+exp(-|x-y|)) (the Jacobi logarithm).
// With sel_g = 1 it performs the "g" update, b + a when the partial sum bit
// psum is 0 and b - a when it is 1.
//
// The LLR grid is 1/2 (one fraction bit), so the correction term
// ln(1+exp(-|d|)) is rounded to that grid: one LSB when |d| <= 2 LSB
// (|d| <= 1.0), zero otherwise. Internal sums are one bit wider and the
// result saturates to the Q-bit two's complement range. The correction
// rounding and the saturation are this design's choices.
//
// Purely combinational.
module mn #(
  parameter int unsigned Q = 8
) (
  input  logic signed [Q-1:0] a,
  input  logic signed [Q-1:0] b,
  input  logic                sel_g,
  input  logic                psum,
  output logic signed [Q-1:0] y
);

  localparam int W = Q + 2;
  localparam logic signed [W-1:0] VMAX = W'((1 <<< (Q-1)) - 1);
  localparam logic signed [W-1:0] VMIN = -W'(1 <<< (Q-1));

  // max* on the half-LSB grid
  function automatic logic signed [W-1:0] maxstar(logic signed [W-1:0] x1,
                                                   logic signed [W-1:0] x2);
    logic signed [W-1:0] d, m;
    d = x1 - x2;
    m = (d >= 0) ? x1 : x2;
    if (d < 0) d = -d;
    return (d <= 2) ? m + W'(1) : m;
  endfunction

  logic signed [W-1:0] ax, bx, fv, gv, r;

  always_comb begin
    ax = W'(a);
    bx = W'(b);
    fv = maxstar(ax + bx, '0) - maxstar(ax, bx);
    gv = psum ? (bx - ax) : (bx + ax);
    r  = sel_g ? gv : fv;
    if (r > VMAX)      y = VMAX[Q-1:0];
    else if (r < VMIN) y = VMIN[Q-1:0];
    else               y = r[Q-1:0];
  end

endmodule
