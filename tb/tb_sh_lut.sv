// tb_sh_lut: Sharable-Hemi LUT check.
// After reset the whole view reads zero. The stored half (entries 0..2S,
// S = 2^LD) is written with the cubic B-spline samples; every one of the 4S
// addresses of the view must then equal the spline sample at that address,
// which checks the mirror wiring against the curve itself. A write to an
// address beyond the stored half must change nothing.
module tb_sh_lut;
  import tb_kan_ref_pkg::*;
  localparam int unsigned LD = 5, BW = 8;
  localparam int unsigned S = 2**LD, SPAN = 4*S, DEPTH = 2*S + 1, AW = $clog2(DEPTH);
  logic clk = 0, rst_n = 1, we = 0;
  logic [AW-1:0] waddr = '0;
  logic [BW-1:0] wdata = '0;
  logic [BW-1:0] full_v [SPAN];
  int checks = 0, failures = 0;

  sh_lut #(.LD(LD), .BW(BW)) dut (.clk, .rst_n, .we, .waddr, .wdata, .full_v);

  always #5 clk = ~clk;
  initial #1 rst_n = 0;   // a real falling edge for the asynchronous reset

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check_view(input bit zero);
    for (int u = 0; u < SPAN; u++) begin
      int unsigned e = zero ? 0 : bval(u, S);
      checks++;
      if (full_v[u] !== BW'(e)) begin
        failures++;
        $display("FAIL u=%0d got=%0d exp=%0d", u, full_v[u], e);
      end
    end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(posedge clk); #1;
    check_view(1);
    for (int a = 0; a < DEPTH; a++) begin
      we = 1; waddr = AW'(a); wdata = BW'(bval(a, S));
      @(posedge clk); #1;
    end
    we = 0;
    check_view(0);
    // out-of-range write is ignored
    if (DEPTH < 2**AW) begin
      we = 1; waddr = AW'(DEPTH); wdata = 8'hA5;
      @(posedge clk); #1;
      we = 0;
      check_view(0);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
