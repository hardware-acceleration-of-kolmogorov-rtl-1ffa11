// tb_local_decoder: exhaustive check of the LD-bit local decoder.
// Every code 0..2^LD-1 must give exactly bit `code` set.
module tb_local_decoder;
  localparam int unsigned LD = 5;
  logic [LD-1:0] loc;
  logic [2**LD-1:0] onehot;
  int checks = 0, failures = 0;

  local_decoder #(.LD(LD)) dut (.loc, .onehot);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int l = 0; l < 2**LD; l++) begin
      loc = LD'(l);
      #1;
      checks++;
      if (onehot !== (2**LD)'(1) << l) begin
        failures++;
        $display("FAIL loc=%0d onehot=%h", l, onehot);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
