// tb_wl_row_map: row routing table.
// After reset row r carries lookup output r. A random permutation is then
// written (as a sparsity-aware mapping would be) and each row must carry the
// B value of its assigned source; an out-of-range write is ignored.
module tb_wl_row_map;
  localparam int unsigned NROWS = 128, BW = 8, RW = $clog2(NROWS);
  logic clk = 0, rst_n = 1, we = 0;
  logic [RW-1:0] wrow = '0, wsrc = '0;
  logic [BW-1:0] b_in [NROWS];
  logic [BW-1:0] b_row [NROWS];
  int perm [NROWS];
  int checks = 0, failures = 0;

  wl_row_map #(.NROWS(NROWS), .BW(BW)) dut (.clk, .rst_n, .we, .wrow, .wsrc, .b_in, .b_row);

  always #5 clk = ~clk;
  initial #1 rst_n = 0;   // a real falling edge for the asynchronous reset

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check_all();
    for (int r = 0; r < NROWS; r++) begin
      checks++;
      if (b_row[r] !== b_in[perm[r]]) begin
        failures++;
        $display("FAIL row=%0d got=%0d exp=%0d (src %0d)", r, b_row[r], b_in[perm[r]], perm[r]);
      end
    end
  endtask

  initial begin
    for (int r = 0; r < NROWS; r++) begin
      b_in[r] = BW'($urandom);
      perm[r] = r;
    end
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(posedge clk); #1;
    check_all();
    // Fisher-Yates shuffle
    for (int r = NROWS-1; r > 0; r--) begin
      int k = $urandom_range(0, r);
      int t = perm[r]; perm[r] = perm[k]; perm[k] = t;
    end
    for (int r = 0; r < NROWS; r++) begin
      we = 1; wrow = RW'(r); wsrc = RW'(perm[r]);
      @(posedge clk); #1;
    end
    we = 0;
    for (int rep = 0; rep < 4; rep++) begin
      for (int r = 0; r < NROWS; r++) b_in[r] = BW'($urandom);
      #1;
      check_all();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
