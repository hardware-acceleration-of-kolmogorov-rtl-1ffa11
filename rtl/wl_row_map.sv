// wl_row_map: word-line row assignment for sparsity-aware coefficient mapping.
//
// Bit-line IR drop grows with a cell's distance from the clamp, so the
// coefficients whose basis functions fire most often and most strongly are
// written into the rows nearest the clamp. The B value belonging to a
// coefficient must then drive that coefficient's row. This block holds a
// programmable table, one entry per crossbar row, naming which lookup output
// (basis function of which input) drives that row, and routes the B values
// accordingly. Row 0 is the row nearest the clamp.
//
// Interface: we/wrow/wsrc write one table entry on the rising clock edge;
// reset loads the identity (row r driven by lookup output r). b_row follows
// b_in combinationally.
// Placing critical coefficients near the clamp is the paper's mapping
// strategy; realising the placement with a programmable routing table is this
// design's choice (the row order itself is computed offline).
module wl_row_map #(
  parameter int unsigned NROWS = 128,
  parameter int unsigned BW    = 8,
  localparam int unsigned RW   = (NROWS > 1) ? $clog2(NROWS) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          we,
  input  logic [RW-1:0] wrow,
  input  logic [RW-1:0] wsrc,
  input  logic [BW-1:0] b_in  [NROWS],
  output logic [BW-1:0] b_row [NROWS]
);

  logic [RW-1:0] src_of [NROWS];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int unsigned r = 0; r < NROWS; r++) src_of[r] <= RW'(r);
    end else if (we && (32'(wrow) < NROWS) && (32'(wsrc) < NROWS)) begin
      src_of[wrow] <= wsrc;
    end
  end

  always_comb begin
    for (int unsigned r = 0; r < NROWS; r++)
      b_row[r] = b_in[src_of[r]];
  end

endmodule
