// kan_pkg: constants and types shared by the KAN B-spline lookup and the
// time-modulated dynamic-voltage input generator.
//
// The defaults describe the reference configuration: cubic splines (K=3) on
// G=5 knot intervals, 8-bit unsigned inputs, 8-bit B(X) samples, and an input
// generator that can run with N=4 (TD-P, high performance) or N=3 (TD-A, high
// accuracy). LD is the largest power-of-two knot width with G*2^LD <= 2^8,
// which places every knot on the input quantisation grid.
package kan_pkg;

  localparam int unsigned XBITS = 8;   // input bit width n
  localparam int unsigned K     = 3;   // spline order
  localparam int unsigned G     = 5;   // knot intervals
  localparam int unsigned LD    = 5;   // log2 of the knot width in input codes
  localparam int unsigned BW    = 8;   // B(X) sample width
  localparam int unsigned NMAX  = 4;   // N in TD-P mode
  localparam int unsigned NTDA  = 3;   // N in TD-A mode
  localparam int unsigned SLICES = 8;  // bit slices per coefficient

  // Operating mode of the input generator.
  typedef enum logic {
    MODE_TDP = 1'b0,  // N = NMAX: 2N-bit vector, W_P1:W_PN = 1:2^NMAX
    MODE_TDA = 1'b1   // N = NTDA: 2N-bit vector, W_P1:W_PN = 1:2^NTDA
  } td_mode_e;

endpackage
