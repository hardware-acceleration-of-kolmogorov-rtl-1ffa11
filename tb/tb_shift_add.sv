// tb_shift_add: bit-slice recombination.
// Random column sums; the result must equal sum_k col_q[k] * 2^(7-k).
module tb_shift_add;
  localparam int unsigned SLICES = 8, QW = 15;
  logic [QW-1:0] col_q [SLICES];
  logic [QW+SLICES-1:0] sum;
  int checks = 0, failures = 0;

  shift_add #(.SLICES(SLICES), .QW(QW)) dut (.col_q, .sum);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int rep = 0; rep < 500; rep++) begin
      automatic longint e = 0;
      for (int k = 0; k < SLICES; k++) begin
        col_q[k] = (rep == 0) ? '1 : QW'($urandom);
        e += longint'(col_q[k]) * (longint'(1) << (SLICES-1-k));
      end
      #1;
      checks++;
      if (longint'(sum) != e) begin
        failures++;
        $display("FAIL got=%0d exp=%0d", sum, e);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
