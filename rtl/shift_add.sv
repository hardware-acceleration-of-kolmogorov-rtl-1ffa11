// shift_add: recombines bit-sliced coefficient columns.
//
// Each 8-bit coefficient magnitude is stored as 8 one-bit cells in 8 adjacent
// columns, most significant slice first. The sense amplifier of column k
// returns sum_r B_r * bit_k(c_r); weighting column k by 2^(SLICES-1-k) and
// adding gives sum_r B_r * c_r. Combinational.
// Bit slicing and shift-and-add follow the paper; the unsigned-only
// coefficient format is this design's choice (the paper does not give a sign
// scheme).
module shift_add #(
  parameter int unsigned SLICES = 8,
  parameter int unsigned QW     = 15
) (
  input  logic [QW-1:0]        col_q [SLICES],   // index 0 = MSB slice
  output logic [QW+SLICES-1:0] sum
);

  always_comb begin
    sum = '0;
    for (int unsigned k = 0; k < SLICES; k++)
      sum += (QW+SLICES)'(col_q[k]) << (SLICES - 1 - k);
  end

endmodule
