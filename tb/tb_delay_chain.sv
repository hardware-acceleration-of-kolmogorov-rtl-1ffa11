// tb_delay_chain: pulse widths from the delay chain.
// For each mode, go is raised for a while; W_P1 must be high for exactly one
// cycle and W_P(N+1) for exactly 2^N+1 cycles (17 in TD-P, 9 in TD-A), both
// rising in the first cycle of go. A relaunch right after go drops must give
// the same widths.
module tb_delay_chain;
  import kan_pkg::*;
  logic clk = 0, rst_n = 1, go = 0;
  td_mode_e mode = MODE_TDP;
  logic p1, pn1;
  int checks = 0, failures = 0;

  delay_chain dut (.clk, .rst_n, .go, .mode, .p1, .pn1);

  always #5 clk = ~clk;
  initial #1 rst_n = 0;   // a real falling edge for the asynchronous reset

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(input td_mode_e m, input int n);
    int c1 = 0, cn = 0;
    bit first_ok;
    mode = m;
    @(negedge clk); go = 1;
    #1;
    first_ok = p1 && pn1;
    for (int c = 0; c < 2**NMAX + 6; c++) begin
      @(negedge clk);
      // sample the cycle that just ended
    end
    go = 0;
    checks++;
    if (!first_ok) begin failures++; $display("FAIL mode=%0d pulses not high in first cycle", m); end
  endtask

  // Count pulse widths on every cycle while go is high.
  int cnt_p1 = 0, cnt_pn1 = 0;
  always @(posedge clk) begin
    if (p1) cnt_p1++;
    if (pn1) cnt_pn1++;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int rep = 0; rep < 2; rep++) begin
      foreach (run_modes[k]) begin
        automatic int n = (run_modes[k] == MODE_TDA) ? NTDA : NMAX;
        cnt_p1 = 0; cnt_pn1 = 0;
        run(run_modes[k], n);
        checks++;
        if (cnt_p1 != 1) begin failures++; $display("FAIL mode=%0d p1 width %0d", run_modes[k], cnt_p1); end
        checks++;
        if (cnt_pn1 != 2**n + 1) begin failures++; $display("FAIL mode=%0d pn1 width %0d exp %0d", run_modes[k], cnt_pn1, 2**n+1); end
        @(negedge clk);   // one idle cycle, then relaunch
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  td_mode_e run_modes [2] = '{MODE_TDP, MODE_TDA};
endmodule
