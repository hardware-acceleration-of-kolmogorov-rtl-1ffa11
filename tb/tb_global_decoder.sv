// tb_global_decoder: exhaustive check of the global (interval) decoder.
// Codes below G select interval j; codes G and above select nothing.
module tb_global_decoder;
  localparam int unsigned XBITS = 8, LD = 5, G = 5;
  logic [XBITS-LD-1:0] glb;
  logic [G-1:0] onehot;
  int checks = 0, failures = 0;

  global_decoder #(.XBITS(XBITS), .LD(LD), .G(G)) dut (.glb, .onehot);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [G-1:0] exp_oh;
    for (int j = 0; j < 2**(XBITS-LD); j++) begin
      glb = (XBITS-LD)'(j);
      #1;
      exp_oh = (j < G) ? G'(1) << j : '0;
      checks++;
      if (onehot !== exp_oh) begin
        failures++;
        $display("FAIL glb=%0d onehot=%b exp=%b", j, onehot, exp_oh);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
