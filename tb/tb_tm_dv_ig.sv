// tb_tm_dv_ig: input generator as seen by the bit line.
// A simple charge integrator adds wl_level of every enabled word line once
// per unit cycle and is cleared by precharge; this is the linear cell current
// I[x] proportional to x times pulse time. At sa_sample each word line must
// have delivered exactly its input value (TD-P) or the top 6 bits of it
// (TD-A). Operations are issued back to back with in_valid held high, and
// the cycle count per operation (2^N+4) is checked.
module tb_tm_dv_ig;
  import kan_pkg::*;
  localparam int unsigned NWL = 8;
  logic clk = 0, rst_n = 1, in_valid = 0;
  td_mode_e mode = MODE_TDP;
  logic in_ready, bl_precharge, sa_sample, done;
  logic [7:0] in_vec [NWL];
  logic wl_on [NWL];
  logic [3:0] wl_level [NWL];
  int acc [NWL];
  int checks = 0, failures = 0;

  tm_dv_ig #(.NWL(NWL)) dut (.clk, .rst_n, .mode, .in_valid, .in_ready, .in_vec,
    .wl_on, .wl_level, .bl_precharge, .sa_sample, .done);

  always #5 clk = ~clk;
  initial #1 rst_n = 0;   // a real falling edge for the asynchronous reset

  always @(posedge clk) begin
    for (int r = 0; r < NWL; r++)
      if (bl_precharge) acc[r] <= 0;
      else if (wl_on[r]) acc[r] <= acc[r] + int'(wl_level[r]);
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [7:0] v [NWL];
    td_mode_e m;
    int t_acc, t_prev = -1, ops = 0, n_prev = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    in_valid = 1;
    for (int r = 0; r < NWL; r++) v[r] = 8'($urandom);
    m = MODE_TDP;
    in_vec = v; mode = m;
    t_acc = 0;
    while (ops < 100) begin
      @(posedge clk);
      t_acc++;
      if (in_ready && in_valid) begin
        // accepted at this edge: remember what was sent
        automatic logic [7:0] sent [NWL] = in_vec;
        automatic td_mode_e sm = mode;
        automatic int n = (sm == MODE_TDA) ? NTDA : NMAX;
        automatic int start = t_acc;
        #1;
        for (int r = 0; r < NWL; r++) v[r] = 8'($urandom);
        m = $urandom_range(0, 1) ? MODE_TDA : MODE_TDP;
        in_vec = v; mode = m;
        while (!done) begin @(posedge clk); t_acc++; #1; end
        for (int r = 0; r < NWL; r++) begin
          automatic int e = (sm == MODE_TDA) ? int'(sent[r] >> 2) : int'(sent[r]);
          checks++;
          if (acc[r] != e) begin
            failures++;
            $display("FAIL op=%0d r=%0d mode=%0d charge=%0d exp=%0d", ops, r, sm, acc[r], e);
          end
        end
        checks++;
        if (t_acc - start != 2**n + 2) begin
          failures++;
          $display("FAIL op=%0d latency %0d exp %0d", ops, t_acc - start, 2**n + 2);
        end
        if (t_prev >= 0) begin
          // back-to-back: accepts are 2^N+4 cycles apart (N of the earlier op)
          checks++;
          if (start - t_prev != 2**n_prev + 4) begin
            failures++;
            $display("FAIL op=%0d issue spacing %0d exp %0d", ops, start - t_prev, 2**n_prev + 4);
          end
        end
        n_prev = n;
        t_prev = start;
        ops++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
