// tca_pkg: constants shared by the segmented (tailored-CRC) SCL polar decoder.
//
// The defaults describe the (1024,512) code with 32 CRC bits split over four
// code-bit segments of 256 positions each, list size 2 and 8-bit LLRs
// (1 sign, 6 integer, 1 fraction bit). The per-segment CRC lengths 3/10/11/8
// and their generator polynomials are the tailored allocation obtained from
// the virtual-length rule; they are written in Koopman hex notation: the hex
// holds the x^W term down to x^1 and the "+1" term is implicit, so 0x9 is
// x^4+x+1.
package tca_pkg;

  localparam int unsigned TCA_N = 1024;   // code length
  localparam int unsigned TCA_K = 512;    // data bits
  localparam int unsigned TCA_M = 32;     // CRC bits in total
  localparam int unsigned TCA_L = 2;      // list size
  localparam int unsigned TCA_P = 4;      // segments
  localparam int unsigned TCA_Q = 8;      // LLR width

  // Segment CRCs of the tailored allocation, segment 1 first.
  localparam int unsigned TCA_CRC_LEN  [TCA_P] = '{3, 10, 11, 8};
  localparam int unsigned TCA_CRC_POLY [TCA_P] = '{32'h5, 32'h327, 32'h583, 32'hA6};


  // Path metric width for a code of length n_len with q-bit LLRs: the penalty
  // per bit is below 2^(q-1), so q-1+log2(N)+1 bits never overflow.
  function automatic int unsigned pm_width(int unsigned n_len, int unsigned q);
    return q + $clog2(n_len);
  endfunction

endpackage
