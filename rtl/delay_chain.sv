// delay_chain: unit-delay chain that times the input generator's pulses.
//
// A launch level `go` ripples through 2^NMAX+1 unit stages. Each stage is one
// flip-flop on the unit-time clock, standing in for one analog delay cell.
// From the launch level and two taps the chain forms
//   p1  = go & ~tap[1]          : W_P1, one unit long
//   pn1 = go & ~tap[2^N+1]      : W_P(N+1), 2^N+1 units long
// where N is NMAX in TD-P mode and NTDA in TD-A mode, so both pulses start
// together and stand in the ratio 1 : 2^N+1. Stages clear as soon as `go`
// drops, so the next launch may follow immediately.
//
// Timing: with go rising after clock edge E0, p1 and pn1 are high in the
// cycle after E0; p1 falls after E1 and pn1 after E(2^N+1).
// The pulse ratios follow the paper; modelling the analog delay cells as
// clocked stages is this design's choice.
module delay_chain
  import kan_pkg::*;
#(
  parameter int unsigned NMAX_P = NMAX,
  parameter int unsigned NTDA_P = NTDA,
  localparam int unsigned STAGES = 2**NMAX_P + 1
) (
  input  logic     clk,
  input  logic     rst_n,
  input  logic     go,
  input  td_mode_e mode,
  output logic     p1,
  output logic     pn1
);

  logic [STAGES:1] tap;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) tap <= '0;
    else        tap <= {tap[STAGES-1:1], 1'b1} & {STAGES{go}};
  end

  assign p1  = go & ~tap[1];
  assign pn1 = go & ~((mode == MODE_TDA) ? tap[2**NTDA_P + 1] : tap[STAGES]);

endmodule
