// sh_lut: Sharable-Hemi LUT holding one B-spline basis function.
//
// With the quantisation grid aligned to the knots (G*2^LD <= 2^n), every
// basis function B_i(X) is the same curve shifted by whole knot intervals, so
// one table serves all of them. A cubic basis spans four intervals, i.e.
// 4*2^LD sample addresses u = 0 .. 4*2^LD-1, with u on the knot grid. The
// curve is symmetric, B(u) = B(4*2^LD - u), so only entries 0 .. 2^(LD+1)
// are stored (the centre entry 2^(LD+1) is the one that has no partner, the
// "odd grid" case); addresses above the centre are plain wires to their
// mirror entry. The stored half is a register array written through a simple
// synchronous port and cleared by reset.
//
// Interface: we/waddr/wdata write one stored entry on the rising clock edge.
// full_v presents all 4*2^LD addresses combinationally.
// The shared, mirrored table follows the Alignment-Symmetry scheme; the write
// port, reset value and the choice of the odd (knot-aligned) sample set are
// this design's.
module sh_lut #(
  parameter int unsigned LD = 5,
  parameter int unsigned BW = 8,
  localparam int unsigned SPAN  = 4 * (2**LD),     // full curve length
  localparam int unsigned DEPTH = 2**(LD+1) + 1,   // stored entries
  localparam int unsigned AW    = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          we,
  input  logic [AW-1:0] waddr,
  input  logic [BW-1:0] wdata,
  output logic [BW-1:0] full_v [SPAN]
);

  logic [BW-1:0] mem [DEPTH];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int unsigned i = 0; i < DEPTH; i++) mem[i] <= '0;
    end else if (we && (32'(waddr) < DEPTH)) begin
      mem[waddr] <= wdata;
    end
  end

  // Mirror wiring: the lower half (and centre) is stored, the upper half is
  // the same storage read backwards.
  always_comb begin
    for (int unsigned u = 0; u < SPAN; u++) begin
      if (u < DEPTH) full_v[u] = mem[u];
      else           full_v[u] = mem[SPAN - u];
    end
  end

endmodule
