// tb_bx_lookup: one input channel of the B(X) lookup, all 256 inputs.
// The shared view carries the cubic B-spline samples. For every x the eight
// outputs must equal the eight basis functions B_0..B_7 evaluated at x on the
// knot grid (zero outside [0, G*2^LD-1]). The sum of the four active outputs
// must also stay within rounding of the spline's partition of unity (383).
module tb_bx_lookup;
  import tb_kan_ref_pkg::*;
  localparam int unsigned XBITS = 8, LD = 5, G = 5, BW = 8;
  localparam int unsigned S = 2**LD, SPAN = 4*S, NB = G + 3;
  logic [XBITS-1:0] x;
  logic [BW-1:0] full_v [SPAN];
  logic [BW-1:0] b [NB];
  int checks = 0, failures = 0;

  bx_lookup #(.XBITS(XBITS), .LD(LD), .G(G), .BW(BW)) dut (.x, .full_v, .b);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int u = 0; u < SPAN; u++) full_v[u] = BW'(bval(u, S));
    for (int xv = 0; xv < 2**XBITS; xv++) begin
      automatic int sum = 0;
      x = XBITS'(xv);
      #1;
      for (int i = 0; i < NB; i++) begin
        automatic int unsigned e = bref(xv, i, LD, G);
        checks++;
        sum += b[i];
        if (b[i] !== BW'(e)) begin
          failures++;
          $display("FAIL x=%0d i=%0d got=%0d exp=%0d", xv, i, b[i], e);
        end
      end
      if (xv < G*S) begin
        checks++;
        if (sum < 380 || sum > 386) begin
          failures++;
          $display("FAIL x=%0d partition sum=%0d", xv, sum);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
