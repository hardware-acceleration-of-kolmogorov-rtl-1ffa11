// kan_accel_top: one KAN-layer tile built around an RRAM analog CIM array.
//
// A KAN layer computes, for every output o, y_o = sum_j sum_i c'_(o,i,j) *
// B_i(x_j): each input x_j passes through G+K cubic B-spline basis functions
// and the basis values are weighted by trained coefficients. This tile
//   1. looks up B_0..B_(G+K-1)(x_j) for all NCH inputs at once, through one
//      shared Sharable-Hemi LUT (sh_lut) and a per-input bx_lookup,
//   2. routes each B value to the crossbar row that holds its coefficient
//      (wl_row_map, loaded with the sparsity-aware row order),
//   3. drives every word line with a time-modulated dynamic-voltage pulse
//      (tm_dv_ig), so each row delivers charge proportional to B x c,
//   4. takes the per-column sense-amplifier results of the external RRAM
//      array and shift-adds each group of SLICES bit-slice columns into one
//      output (shift_add).
// The RRAM array, its clamp, charge capacitor, sense amplifiers, the DAC and
// the word-line buffers are analog and sit outside: wl_on/wl_level,
// bl_precharge and sa_sample go to the array, sa_q comes back.
//
// Interface: program the SH-LUT (lut_*) and row table (map_*) at any time
// while idle. Present x with x_valid; the inputs are looked up and captured
// in the cycle x_valid && x_ready. Word lines pulse for 2^N+1 cycles; the
// array must present sa_q while sa_sample is high; y is registered at the end
// of that cycle and y_valid is high for one cycle after it. y_valid comes 2^N+3
// cycles after the accepting edge, and a new x can be accepted every 2^N+4
// cycles (20 in TD-P, 12 in TD-A); x_ready is low meanwhile.
// In TD-A mode the array sees the top 6 bits of each B value, so y is 1/4 of
// the TD-P scale.
// The dataflow follows the paper; the tile size (16 inputs x 8 basis
// functions = 128 rows, 16 outputs x 8 slices = 128 columns), handshake and
// output registering are this design's choices.
module kan_accel_top
  import kan_pkg::*;
#(
  parameter int unsigned NCH  = 16,
  parameter int unsigned NOUT = 16,
  parameter int unsigned LD_P = LD,
  parameter int unsigned G_P  = G,
  localparam int unsigned NBP   = G_P + K,
  localparam int unsigned ROWS  = NCH * NBP,
  localparam int unsigned COLS  = NOUT * SLICES,
  localparam int unsigned QW    = $clog2(ROWS * (2**BW - 1) + 1),
  localparam int unsigned LAW   = $clog2(2**(LD_P+1) + 1),
  localparam int unsigned RW    = $clog2(ROWS),
  localparam int unsigned SPAN  = 4 * (2**LD_P)
) (
  input  logic             clk,
  input  logic             rst_n,
  // SH-LUT programming
  input  logic             lut_we,
  input  logic [LAW-1:0]   lut_waddr,
  input  logic [BW-1:0]    lut_wdata,
  // row map programming
  input  logic             map_we,
  input  logic [RW-1:0]    map_row,
  input  logic [RW-1:0]    map_src,
  // inputs
  input  td_mode_e         mode,
  input  logic             x_valid,
  output logic             x_ready,
  input  logic [XBITS-1:0] x [NCH],
  // to the RRAM-ACIM array
  output logic             wl_on    [ROWS],
  output logic [NMAX-1:0]  wl_level [ROWS],
  output logic             bl_precharge,
  output logic             sa_sample,
  // from the array's sense amplifiers, column c = output c/SLICES, slice c%SLICES (MSB first)
  input  logic [QW-1:0]    sa_q [COLS],
  // results
  output logic             y_valid,
  output logic [QW+SLICES-1:0] y [NOUT]
);

  logic [BW-1:0] full_v [SPAN];
  logic [BW-1:0] b_flat [ROWS];
  logic [BW-1:0] b_row  [ROWS];
  logic          done;

  sh_lut #(.LD(LD_P), .BW(BW)) u_lut (
    .clk, .rst_n, .we(lut_we), .waddr(lut_waddr), .wdata(lut_wdata), .full_v);

  for (genvar j = 0; j < NCH; j++) begin : g_ch
    logic [BW-1:0] b_ch [NBP];
    bx_lookup #(.XBITS(XBITS), .LD(LD_P), .G(G_P), .BW(BW)) u_bx (
      .x(x[j]), .full_v, .b(b_ch));
    for (genvar i = 0; i < NBP; i++) begin : g_b
      assign b_flat[j*NBP + i] = b_ch[i];
    end
  end

  wl_row_map #(.NROWS(ROWS), .BW(BW)) u_map (
    .clk, .rst_n, .we(map_we), .wrow(map_row), .wsrc(map_src), .b_in(b_flat), .b_row);

  tm_dv_ig #(.NWL(ROWS)) u_ig (
    .clk, .rst_n, .mode, .in_valid(x_valid), .in_ready(x_ready), .in_vec(b_row),
    .wl_on, .wl_level, .bl_precharge, .sa_sample, .done);

  logic [QW+SLICES-1:0] y_d [NOUT];
  for (genvar o = 0; o < NOUT; o++) begin : g_out
    shift_add #(.SLICES(SLICES), .QW(QW)) u_sa (
      .col_q(sa_q[o*SLICES +: SLICES]), .sum(y_d[o]));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      y_valid <= 1'b0;
      for (int unsigned o = 0; o < NOUT; o++) y[o] <= '0;
    end else begin
      y_valid <= done;
      if (done)
        for (int unsigned o = 0; o < NOUT; o++) y[o] <= y_d[o];
    end
  end

  // The tables may only be rewritten while no operation is in flight.
  a_program_idle : assert property (@(posedge clk) disable iff (!rst_n)
                                    (lut_we || map_we) |-> x_ready);

endmodule
