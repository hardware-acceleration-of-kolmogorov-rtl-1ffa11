// tg_mux: transmission-gate multiplexer lanes of the input generator.
//
// For every word line, connects DAC level V[a] while W_P1 is high and V[b]
// while W_PN is high; outside the W_P(N+1) pulse the word line is off. The
// analog voltage is represented by its DAC level index on wl_level, and
// wl_on marks the pulse that enables the word-line buffer; it is the same
// W_P(N+1) pulse fanned out to every lane, as the pulse drives the whole
// buffer array directly. Combinational.
// The a-then-b switching follows the paper; representing voltages by level
// indices is this design's choice.
module tg_mux
  import kan_pkg::*;
#(
  parameter int unsigned NWL    = 128,
  parameter int unsigned NMAX_P = NMAX
) (
  input  logic [NMAX_P-1:0] code_a [NWL],
  input  logic [NMAX_P-1:0] code_b [NWL],
  input  logic              sel_b,
  input  logic              wl_pulse,
  output logic              wl_on    [NWL],
  output logic [NMAX_P-1:0] wl_level [NWL]
);

  always_comb begin
    for (int unsigned r = 0; r < NWL; r++) begin
      wl_on[r]    = wl_pulse;
      wl_level[r] = !wl_pulse ? '0 : (sel_b ? code_b[r] : code_a[r]);
    end
  end

endmodule
