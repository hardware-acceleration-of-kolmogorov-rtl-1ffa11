// tb_pm_tcm: pulse modulation and timing control, driven with a delay chain.
// Random 8-bit vectors in random modes. Checks per operation:
//  - code_a/code_b hold the low/high N bits of the 2N-bit vector (TD-P: all
//    8 bits; TD-A: the top 6 bits);
//  - W_P1 lasts 1 cycle, W_PN (sel_b) 2^N cycles, W_P(N+1) 2^N+1 cycles;
//  - done arrives 2^N+2 clock edges after the accepting edge;
//  - in_ready and precharge are low for the whole operation.
module tb_pm_tcm;
  import kan_pkg::*;
  localparam int unsigned NWL = 4;
  logic clk = 0, rst_n = 1, in_valid = 0;
  td_mode_e mode = MODE_TDP;
  logic in_ready;
  logic [7:0] in_vec [NWL];
  logic go, p1, pn1, sel_b, wl_pulse, bl_precharge, sa_sample, done;
  td_mode_e chain_mode;
  logic [3:0] code_a [NWL];
  logic [3:0] code_b [NWL];
  int checks = 0, failures = 0;

  delay_chain u_chain (.clk, .rst_n, .go, .mode(chain_mode), .p1, .pn1);
  pm_tcm #(.NWL(NWL)) dut (.clk, .rst_n, .mode, .in_valid, .in_ready, .in_vec,
    .go, .chain_mode, .p1, .pn1, .code_a, .code_b, .sel_b, .wl_pulse,
    .bl_precharge, .sa_sample, .done);

  always #5 clk = ~clk;
  initial #1 rst_n = 0;   // a real falling edge for the asynchronous reset

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int op = 0; op < 200; op++) begin
      automatic td_mode_e m = $urandom_range(0, 1) ? MODE_TDA : MODE_TDP;
      automatic int n = (m == MODE_TDA) ? NTDA : NMAX;
      automatic logic [7:0] v [NWL];
      automatic int c_p1 = 0, c_pn = 0, c_pn1 = 0, lat = 0;
      automatic bit busy_ok = 1;
      for (int r = 0; r < NWL; r++) v[r] = 8'($urandom);
      chk(in_ready && bl_precharge, "idle before op");
      in_valid = 1; mode = m; in_vec = v;
      @(posedge clk);              // accepting edge
      #1 in_valid = 0;
      for (int r = 0; r < NWL; r++) begin
        automatic logic [7:0] vt = (m == MODE_TDA) ? v[r] >> 2 : v[r];
        chk(code_a[r] == 4'(vt & ((8'd1 << n) - 8'd1)) && code_b[r] == 4'(vt >> n),
            $sformatf("split r=%0d v=%h mode=%0d a=%0d b=%0d", r, v[r], m, code_a[r], code_b[r]));
      end
      while (!done) begin
        if (in_ready || bl_precharge) busy_ok = 0;
        if (p1) c_p1++;
        if (sel_b) c_pn++;
        if (wl_pulse) c_pn1++;
        @(posedge clk); #1;
        lat++;
        if (lat > 100) break;
      end
      chk(busy_ok, "ready/precharge low while busy");
      chk(c_p1 == 1, $sformatf("W_P1 width %0d", c_p1));
      chk(c_pn == 2**n, $sformatf("W_PN width %0d exp %0d", c_pn, 2**n));
      chk(c_pn1 == 2**n + 1, $sformatf("W_P(N+1) width %0d", c_pn1));
      chk(lat == 2**n + 2, $sformatf("done latency %0d exp %0d", lat, 2**n + 2));
      chk(sa_sample, "sa_sample with done");
      @(posedge clk);              // EVAL ends, back to IDLE
      @(negedge clk);
      if ($urandom_range(0, 1)) @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
