// bx_lookup: B(X) lookup for one KAN input channel.
//
// Splits the input X into local bits X[LD-1:0] and global bits X[XBITS-1:LD],
// decodes each with its own small decoder, and uses the two one-hots to pick
// the four active basis values out of the shared SH-LUT view and place them
// on outputs B_j .. B_(j+3) of the G+K basis outputs. Several channels share
// one SH-LUT; each has its own decoders and L2G multiplexer/demultiplexer.
// Combinational: b is valid in the same cycle as x and full_v.
// The structure follows the ASP-KAN-HAQ lookup; nothing here is invented
// beyond the out-of-range rule of global_decoder.
module bx_lookup #(
  parameter int unsigned XBITS = 8,
  parameter int unsigned LD    = 5,
  parameter int unsigned G     = 5,
  parameter int unsigned BW    = 8,
  localparam int unsigned SPAN = 4 * (2**LD),
  localparam int unsigned NB   = G + 3
) (
  input  logic [XBITS-1:0] x,
  input  logic [BW-1:0]    full_v [SPAN],
  output logic [BW-1:0]    b [NB]
);

  logic [2**LD-1:0] loc_oh;
  logic [G-1:0]     glb_oh;

  local_decoder #(.LD(LD)) u_loc (
    .loc(x[LD-1:0]), .onehot(loc_oh));

  global_decoder #(.XBITS(XBITS), .LD(LD), .G(G)) u_glb (
    .glb(x[XBITS-1:LD]), .onehot(glb_oh));

  l2g_mux_demux #(.LD(LD), .G(G), .BW(BW)) u_l2g (
    .full_v(full_v), .loc_oh(loc_oh), .glb_oh(glb_oh), .b_global(b));

endmodule
