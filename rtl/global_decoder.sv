// global_decoder: (XBITS-LD)-bit decoder for the global part of a KAN input.
//
// The high bits X[XBITS-1:LD] name the knot interval j the input falls in
// ("global information"). The decoder raises bit j of a G-wide one-hot. The
// valid data range is [0, G*2^LD-1]; a code j >= G lies outside every
// interval, and then no bit is raised, which forces all B(X) outputs of the
// lookup to zero (this out-of-range rule is this design's choice).
// Combinational.
module global_decoder #(
  parameter int unsigned XBITS = 8,
  parameter int unsigned LD    = 5,
  parameter int unsigned G     = 5
) (
  input  logic [XBITS-LD-1:0] glb,     // X[XBITS-1:LD]
  output logic [G-1:0]        onehot   // bit j set when glb == j < G
);

  always_comb begin
    for (int unsigned j = 0; j < G; j++)
      onehot[j] = (glb == (XBITS-LD)'(j));
  end

endmodule
