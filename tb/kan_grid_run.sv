// kan_grid_run: runs one kan_accel_top configuration (grid size G_P with knot
// width 2^LD_P) against a behavioural array and reports its own check and
// failure counts. Used by tb_kan_grid_configs to cover several grid sizes in
// one simulation.
//
// It loads the half B-spline table for the configuration, an identity-then-
// reversed row map, random coefficients, and runs OPS random input vectors
// in alternating TD-P / TD-A mode, comparing every output with the spline
// formula. `finished` rises when it is done.
module kan_grid_run
  import kan_pkg::*;
  import tb_kan_ref_pkg::*;
#(
  parameter int unsigned G_P  = 5,
  parameter int unsigned LD_P = 5,
  parameter int unsigned NCH  = 2,
  parameter int unsigned NOUT = 2,
  parameter int unsigned OPS  = 20
) (
  input  logic clk,
  input  logic rst_n,
  output logic finished,
  output int   checks,
  output int   failures
);
  localparam int unsigned NBP = G_P + K;
  localparam int unsigned ROWS = NCH * NBP, COLS = NOUT * SLICES;
  localparam int unsigned QW = $clog2(ROWS * (2**BW - 1) + 1);
  localparam int unsigned S = 2**LD_P, DEPTH = 2*S + 1;
  localparam int unsigned LAW = $clog2(DEPTH), RW = $clog2(ROWS);

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
  int coef [ROWS][NOUT];
  int perm [ROWS];

  kan_accel_top #(.NCH(NCH), .NOUT(NOUT), .LD_P(LD_P), .G_P(G_P)) dut (
    .clk, .rst_n, .lut_we, .lut_waddr, .lut_wdata,
    .map_we, .map_row, .map_src, .mode, .x_valid, .x_ready, .x,
    .wl_on, .wl_level, .bl_precharge, .sa_sample, .sa_q, .y_valid, .y);

  rram_acim_model #(.ROWS(ROWS), .COLS(COLS), .NM(NMAX), .QW(QW)) u_array (
    .clk, .wl_on, .wl_level, .bl_precharge, .cells, .sa_q);

  initial begin
    finished = 0; checks = 0; failures = 0;
    @(posedge rst_n);
    for (int r = 0; r < ROWS; r++)
      for (int o = 0; o < NOUT; o++) begin
        coef[r][o] = $urandom_range(0, 255);
        for (int k = 0; k < SLICES; k++) cells[r][o*SLICES + k] = coef[r][o][SLICES-1-k];
      end
    for (int a = 0; a < DEPTH; a++) begin
      @(negedge clk);
      lut_we = 1; lut_waddr = LAW'(a); lut_wdata = BW'(bval(a, S));
    end
    @(negedge clk); lut_we = 0;
    for (int r = 0; r < ROWS; r++) begin
      perm[r] = ROWS - 1 - r;
      @(negedge clk);
      map_we = 1; map_row = RW'(r); map_src = RW'(perm[r]);
    end
    @(negedge clk); map_we = 0;
    for (int op = 0; op < OPS; op++) begin
      automatic td_mode_e m = td_mode_e'(op % 2);
      automatic int n = (m == MODE_TDA) ? NTDA : NMAX;
      automatic int xs [NCH];
      automatic longint e [NOUT];
      automatic int lat = 0;
      for (int j = 0; j < NCH; j++) xs[j] = $urandom_range(0, 255);
      for (int o = 0; o < NOUT; o++) begin
        e[o] = 0;
        for (int r = 0; r < ROWS; r++) begin
          automatic int src = perm[r];
          automatic int b = int'(bref(xs[src / NBP], src % NBP, LD_P, G_P));
          if (m == MODE_TDA) b = b >> 2;
          e[o] += longint'(b) * coef[r][o];
        end
      end
      @(negedge clk);
      for (int j = 0; j < NCH; j++) x[j] = XBITS'(xs[j]);
      mode = m; x_valid = 1;
      do @(posedge clk); while (!x_ready);
      #1 x_valid = 0;
      while (!y_valid && lat < 100) begin @(posedge clk); #1; lat++; end
      checks++;
      if (lat != 2**n + 3) begin
        failures++;
        $display("FAIL G=%0d op %0d latency %0d", G_P, op, lat);
      end
      for (int o = 0; o < NOUT; o++) begin
        checks++;
        if (longint'(y[o]) != e[o]) begin
          failures++;
          $display("FAIL G=%0d LD=%0d op %0d y[%0d]=%0d exp %0d", G_P, LD_P, op, o, y[o], e[o]);
        end
      end
    end
    finished = 1;
  end
endmodule
