// tb_l2g_mux_demux: local-to-global mux/demux check.
// The SH-LUT view is filled with random values. For every interval j (and
// an empty interval select) and every local position l, output B_i must be
// view[(3-(i-j))*S + l] when 0 <= i-j <= 3 and zero otherwise.
module tb_l2g_mux_demux;
  localparam int unsigned LD = 5, G = 5, BW = 8;
  localparam int unsigned S = 2**LD, SPAN = 4*S, NB = G + 3;
  logic [BW-1:0] full_v [SPAN];
  logic [S-1:0] loc_oh;
  logic [G-1:0] glb_oh;
  logic [BW-1:0] b_global [NB];
  int checks = 0, failures = 0;

  l2g_mux_demux #(.LD(LD), .G(G), .BW(BW)) dut (.full_v, .loc_oh, .glb_oh, .b_global);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int rep = 0; rep < 3; rep++) begin
      for (int u = 0; u < SPAN; u++) full_v[u] = BW'($urandom_range(1, 255));
      for (int j = 0; j <= G; j++) begin
        for (int l = 0; l < S; l++) begin
          loc_oh = S'(1) << l;
          glb_oh = (j < G) ? G'(1) << j : '0;
          #1;
          for (int i = 0; i < NB; i++) begin
            automatic int m = i - j;
            automatic logic [BW-1:0] e;
            e = (j < G && m >= 0 && m <= 3) ? full_v[(3-m)*S + l] : '0;
            checks++;
            if (b_global[i] !== e) begin
              failures++;
              $display("FAIL j=%0d l=%0d i=%0d got=%0d exp=%0d", j, l, i, b_global[i], e);
            end
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
