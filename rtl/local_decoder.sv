// local_decoder: LD-bit decoder for the local part of a KAN input.
//
// PowerGap quantisation makes every knot interval exactly 2^LD input codes
// wide, so the low LD bits of the input give the position inside the current
// interval ("local information"). This block turns those bits into a one-hot
// select for the 2^LD-to-1 local multiplexers. It is purely combinational.
// The split of the input into local and global bits follows the PowerGap
// scheme; the plain one-hot decoder structure is this design's own choice.
module local_decoder #(
  parameter int unsigned LD = 5
) (
  input  logic [LD-1:0]    loc,     // X[LD-1:0]
  output logic [2**LD-1:0] onehot   // bit l set when loc == l
);

  always_comb begin
    onehot = '0;
    onehot[loc] = 1'b1;
  end

endmodule
