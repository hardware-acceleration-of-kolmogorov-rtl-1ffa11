// rram_acim_model: behavioural model of the RRAM analog compute-in-memory
// array, for simulation only (not synthesizable intent, no analog detail).
//
// Each cell holds one bit of a coefficient slice (1 = low-resistance state).
// While a word line is enabled, a cell in state 1 sinks a current
// proportional to the word line's DAC level; the clamped bit line integrates
// that current on its charge capacitor once per unit clock cycle. Precharge
// clears the integrated charge. The sense amplifier is ideal: sa_q is the
// integrated charge in units of (level-1 current x one time unit). IR drop,
// device variation and SA quantisation are not modelled.
module rram_acim_model #(
  parameter int unsigned ROWS = 128,
  parameter int unsigned COLS = 128,
  parameter int unsigned NM   = 4,
  parameter int unsigned QW   = 15
) (
  input  logic          clk,
  input  logic          wl_on    [ROWS],
  input  logic [NM-1:0] wl_level [ROWS],
  input  logic          bl_precharge,
  input  bit            cells     [ROWS][COLS],
  output logic [QW-1:0] sa_q     [COLS]
);

  int unsigned charge [COLS];

  always @(posedge clk) begin
    for (int c = 0; c < COLS; c++) begin
      if (bl_precharge) begin
        charge[c] <= 0;
      end else begin
        automatic int unsigned q = charge[c];
        for (int r = 0; r < ROWS; r++)
          if (wl_on[r] && cells[r][c]) q += wl_level[r];
        charge[c] <= q;
      end
    end
  end

  always_comb
    for (int c = 0; c < COLS; c++) sa_q[c] = QW'(charge[c]);

endmodule
