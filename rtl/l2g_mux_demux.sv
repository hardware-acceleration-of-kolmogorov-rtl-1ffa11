// l2g_mux_demux: local-to-global multiplexer/demultiplexer of the B(X) lookup.
//
// For an input in knot interval j, the cubic basis functions B_j .. B_(j+3)
// are the only non-zero ones. Basis B_(j+m) sees the input in segment 3-m of
// its own four-interval support, so local multiplexer m (2^LD-to-1, one-hot
// select from the local decoder) reads SH-LUT addresses (3-m)*2^LD + local
// and produces B_m-local. Demultiplexer m (1-to-G, one-hot select from the
// global decoder) then steers B_m-local onto output B_(j+m)-global. Every
// other output is zero. Combinational; the selections are AND-OR trees, the
// digital equivalent of transmission-gate multiplexers.
// The four-mux / four-demux structure follows the PowerGap architecture; the
// zero on unselected outputs is this design's choice.
module l2g_mux_demux #(
  parameter int unsigned LD = 5,
  parameter int unsigned G  = 5,
  parameter int unsigned BW = 8,
  localparam int unsigned K    = 3,
  localparam int unsigned SEG  = 2**LD,
  localparam int unsigned SPAN = 4 * SEG,
  localparam int unsigned NB   = G + K
) (
  input  logic [BW-1:0] full_v [SPAN],   // SH-LUT view
  input  logic [SEG-1:0] loc_oh,         // local one-hot
  input  logic [G-1:0]   glb_oh,         // interval one-hot
  output logic [BW-1:0]  b_global [NB]   // B_0 .. B_(NB-1)
);

  logic [BW-1:0] b_local [K+1];

  // Four 2^LD-to-1 local multiplexers.
  always_comb begin
    for (int unsigned m = 0; m <= K; m++) begin
      b_local[m] = '0;
      for (int unsigned l = 0; l < SEG; l++)
        b_local[m] |= full_v[(K-m)*SEG + l] & {BW{loc_oh[l]}};
    end
  end

  // Four 1-to-G demultiplexers onto the global outputs.
  always_comb begin
    for (int unsigned i = 0; i < NB; i++) begin
      b_global[i] = '0;
      for (int unsigned m = 0; m <= K; m++)
        if (i >= m && (i - m) < G)
          b_global[i] |= b_local[m] & {BW{glb_oh[i-m]}};
    end
  end

endmodule
