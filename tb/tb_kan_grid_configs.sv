// tb_kan_grid_configs: the tile at the grid sizes of the IR-drop accuracy
// study (G = 7, 15, 30, 60), each with the largest knot width 2^LD such that
// G * 2^LD <= 256 (LD = 5, 4, 3, 2), plus the reference G = 5, LD = 5.
// Two inputs and two outputs per configuration keep the run short; the
// lookup, routing and pulse logic are the same as at full width.
module tb_kan_grid_configs;
  logic clk = 0, rst_n = 1;
  logic fin [5];
  int ck [5], fl [5];

  always #5 clk = ~clk;
  initial begin
    #1 rst_n = 0;
    #20 rst_n = 1;
  end

  kan_grid_run #(.G_P(5),  .LD_P(5)) u_g5  (.clk, .rst_n, .finished(fin[0]), .checks(ck[0]), .failures(fl[0]));
  kan_grid_run #(.G_P(7),  .LD_P(5)) u_g7  (.clk, .rst_n, .finished(fin[1]), .checks(ck[1]), .failures(fl[1]));
  kan_grid_run #(.G_P(15), .LD_P(4)) u_g15 (.clk, .rst_n, .finished(fin[2]), .checks(ck[2]), .failures(fl[2]));
  kan_grid_run #(.G_P(30), .LD_P(3)) u_g30 (.clk, .rst_n, .finished(fin[3]), .checks(ck[3]), .failures(fl[3]));
  kan_grid_run #(.G_P(60), .LD_P(2)) u_g60 (.clk, .rst_n, .finished(fin[4]), .checks(ck[4]), .failures(fl[4]));

  int checks = 0, failures = 0;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #30;
    wait (fin[0] && fin[1] && fin[2] && fin[3] && fin[4]);
    for (int i = 0; i < 5; i++) begin
      checks += ck[i];
      failures += fl[i];
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
