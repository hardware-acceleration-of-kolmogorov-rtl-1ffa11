// tb_kan_accel_top: end-to-end test of the KAN tile at its default size
// (16 inputs x 8 basis functions = 128 word lines, 16 outputs x 8 slices =
// 128 columns) with a behavioural RRAM array.
//
// The SH-LUT is loaded with the cubic B-spline half curve, the row table with
// a random permutation (as a sparsity-aware placement would produce), and the
// array with random 8-bit coefficients, bit-sliced MSB first into the row of
// the basis function they belong to. Random input vectors are run in random
// TD-P / TD-A modes; each output must equal
//   y_o = sum_rows Beff(row) * c(row, o),  Beff = B (TD-P) or B >> 2 (TD-A),
// with B computed from the spline formula, not from the LUT. Part way
// through, the LUT is reloaded with a 4-bit-precision curve. The test also
// checks the result latency (2^N+3 edges after the accept edge) and counts
// the mechanisms it exercises: both modes, mode switches, inputs outside the
// knot range, reads from the mirrored LUT half, remapped rows, input stalls
// while busy, and a LUT reload. A mechanism that never occurred is a failure.
module tb_kan_accel_top;
  import kan_pkg::*;
  import tb_kan_ref_pkg::*;
  localparam int unsigned NCH = 16, NOUT = 16, NBP = G + K;
  localparam int unsigned ROWS = NCH * NBP, COLS = NOUT * SLICES;
  localparam int unsigned QW = $clog2(ROWS * (2**BW - 1) + 1);
  localparam int unsigned S = 2**LD, DEPTH = 2*S + 1;
  localparam int unsigned LAW = $clog2(DEPTH), RW = $clog2(ROWS);

  logic clk = 0, rst_n = 1;
  logic lut_we = 0, map_we = 0, x_valid = 0;
  logic [LAW-1:0] lut_waddr = '0;
  logic [BW-1:0] lut_wdata = '0;
  logic [RW-1:0] map_row = '0, map_src = '0;
  td_mode_e mode = MODE_TDP;
  logic x_ready;
  logic [XBITS-1:0] x [NCH];
  logic wl_on [ROWS];
  logic [NMAX-1:0] wl_level [ROWS];
  logic bl_precharge, sa_sample, y_valid;
  logic [QW-1:0] sa_q [COLS];
  logic [QW+SLICES-1:0] y [NOUT];
  bit cells [ROWS][COLS];

  int checks = 0, failures = 0;
  int perm [ROWS];
  int coef [ROWS][NOUT];
  int lut_mask = 'hFF;

  kan_accel_top dut (.clk, .rst_n, .lut_we, .lut_waddr, .lut_wdata,
    .map_we, .map_row, .map_src, .mode, .x_valid, .x_ready, .x,
    .wl_on, .wl_level, .bl_precharge, .sa_sample, .sa_q, .y_valid, .y);

  rram_acim_model #(.ROWS(ROWS), .COLS(COLS), .NM(NMAX), .QW(QW)) u_array (
    .clk, .wl_on, .wl_level, .bl_precharge, .cells, .sa_q);

  always #5 clk = ~clk;
  initial #1 rst_n = 0;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // mechanism counters
  int n_tdp = 0, n_tda = 0, n_switch = 0, n_oor = 0, n_mirror = 0, n_remap = 0, n_stall = 0, n_reload = 0;
  always @(posedge clk) if (rst_n && x_valid && !x_ready) n_stall++;

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic load_lut(input int mask);
    for (int a = 0; a < DEPTH; a++) begin
      @(negedge clk);
      lut_we = 1; lut_waddr = LAW'(a); lut_wdata = BW'(bval(a, S) & mask);
    end
    @(negedge clk);
    lut_we = 0;
    lut_mask = mask;
  endtask

  initial begin
    td_mode_e last_mode = MODE_TDP;
    repeat (2) @(posedge clk);
    rst_n = 1;
    // coefficients, bit-sliced MSB first
    for (int r = 0; r < ROWS; r++)
      for (int o = 0; o < NOUT; o++) begin
        coef[r][o] = $urandom_range(0, 255);
        for (int k = 0; k < SLICES; k++)
          cells[r][o*SLICES + k] = coef[r][o][SLICES-1-k];
      end
    load_lut('hFF);
    // random row placement
    for (int r = 0; r < ROWS; r++) perm[r] = r;
    for (int r = ROWS-1; r > 0; r--) begin
      automatic int k = $urandom_range(0, r);
      automatic int t = perm[r];
      perm[r] = perm[k]; perm[k] = t;
    end
    for (int r = 0; r < ROWS; r++) begin
      @(negedge clk);
      map_we = 1; map_row = RW'(r); map_src = RW'(perm[r]);
      if (perm[r] != r) n_remap++;
    end
    @(negedge clk);
    map_we = 0;

    for (int op = 0; op < 60; op++) begin
      automatic td_mode_e m = (op < 2) ? td_mode_e'(op % 2) :
                              ($urandom_range(0, 1) ? MODE_TDA : MODE_TDP);
      automatic int n = (m == MODE_TDA) ? NTDA : NMAX;
      automatic int xs [NCH];
      automatic longint e [NOUT];
      automatic int lat = 0;
      if (op == 30) begin load_lut('hF0); n_reload++; end
      for (int j = 0; j < NCH; j++) begin
        xs[j] = ($urandom_range(0, 9) == 0) ? $urandom_range(G*S, 255) : $urandom_range(0, G*S-1);
        if (xs[j] >= G*S) n_oor++;
        else if (((xs[j] % S) + 3*S) > 2*S) n_mirror++;   // segment-3 read lies in the mirrored half
      end
      // expected outputs from the spline formula
      for (int o = 0; o < NOUT; o++) begin
        e[o] = 0;
        for (int r = 0; r < ROWS; r++) begin
          automatic int src = perm[r];
          automatic int b = int'(bref(xs[src / NBP], src % NBP, LD, G)) & lut_mask;
          if (m == MODE_TDA) b = b >> 2;
          e[o] += longint'(b) * coef[r][o];
        end
      end
      // present the inputs, sometimes while the tile is still busy
      @(negedge clk);
      for (int j = 0; j < NCH; j++) x[j] = XBITS'(xs[j]);
      mode = m; x_valid = 1;
      if (m != last_mode) n_switch++;
      last_mode = m;
      if (m == MODE_TDA) n_tda++; else n_tdp++;
      do @(posedge clk); while (!x_ready);   // accepting edge
      // every third op is issued twice: the repeat is requested right after
      // the first accept and must wait (x_ready low) until the tile is free
      for (int pass = 0; pass < ((op % 3 == 0) ? 2 : 1); pass++) begin
        if (pass == 1) do @(posedge clk); while (!x_ready);
        #1 x_valid = (op % 3 == 0) && (pass == 0);
        lat = 0;
        while (!y_valid && lat < 100) begin @(posedge clk); #1; lat++; end
        chk(lat == 2**n + 3, $sformatf("op %0d latency %0d exp %0d", op, lat, 2**n + 3));
        for (int o = 0; o < NOUT; o++)
          chk(longint'(y[o]) == e[o], $sformatf("op %0d mode %0d y[%0d]=%0d exp %0d", op, m, o, y[o], e[o]));
      end
      // next op may start immediately (inputs wait for x_ready) or after a gap
      repeat ($urandom_range(0, 3)) @(negedge clk);
    end
    chk(n_tdp > 0, "TD-P mode never used");
    chk(n_tda > 0, "TD-A mode never used");
    chk(n_switch > 0, "mode never switched");
    chk(n_oor > 0, "no out-of-range input");
    chk(n_mirror > 0, "mirrored LUT half never read");
    chk(n_remap > 0, "row table never remapped");
    chk(n_reload > 0, "LUT never reloaded");
    chk(n_stall > 0, "input never stalled");
    $display("mechanisms: tdp=%0d tda=%0d switch=%0d out_of_range=%0d mirror=%0d remap=%0d reload=%0d stall_cycles=%0d",
             n_tdp, n_tda, n_switch, n_oor, n_mirror, n_remap, n_reload, n_stall);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
