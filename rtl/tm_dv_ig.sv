// tm_dv_ig: N:1 time-modulation dynamic-voltage input generator (digital part).
//
// Converts one multi-bit value per word line into a single word-line pulse
// whose voltage changes during the pulse: DAC level a for one time unit, then
// level b for 2^N units. With cell current linear in the level, the charge
// drawn on the bit line is proportional to a + 2^N*b, the input value, so a
// full multi-bit MAC happens in one pulse without long PWM trains or a
// fine-grained voltage DAC. One delay chain and one pulse controller are
// shared by all NWL word lines; each word line has its own TG-MUX lane.
// The DAC and the analog word-line buffers are outside this block.
//
// Interface and timing: see pm_tcm. Operations can be issued every 2^N+4
// cycles of the unit clock (20 in TD-P, 12 in TD-A), of which 2^N+1 drive the
// word lines.
module tm_dv_ig
  import kan_pkg::*;
#(
  parameter int unsigned NWL    = 128,
  parameter int unsigned BW_P   = BW,
  parameter int unsigned NMAX_P = NMAX,
  parameter int unsigned NTDA_P = NTDA
) (
  input  logic              clk,
  input  logic              rst_n,
  input  td_mode_e          mode,
  input  logic              in_valid,
  output logic              in_ready,
  input  logic [BW_P-1:0]   in_vec   [NWL],
  output logic              wl_on    [NWL],
  output logic [NMAX_P-1:0] wl_level [NWL],
  output logic              bl_precharge,
  output logic              sa_sample,
  output logic              done
);

  logic go, p1, pn1, sel_b, wl_pulse;
  td_mode_e chain_mode;
  logic [NMAX_P-1:0] code_a [NWL];
  logic [NMAX_P-1:0] code_b [NWL];

  delay_chain #(.NMAX_P(NMAX_P), .NTDA_P(NTDA_P)) u_chain (
    .clk, .rst_n, .go, .mode(chain_mode), .p1, .pn1);

  pm_tcm #(.NWL(NWL), .BW_P(BW_P), .NMAX_P(NMAX_P), .NTDA_P(NTDA_P)) u_pmtcm (
    .clk, .rst_n, .mode, .in_valid, .in_ready, .in_vec,
    .go, .chain_mode, .p1, .pn1,
    .code_a, .code_b, .sel_b, .wl_pulse,
    .bl_precharge, .sa_sample, .done);

  tg_mux #(.NWL(NWL), .NMAX_P(NMAX_P)) u_tgmux (
    .code_a, .code_b, .sel_b, .wl_pulse, .wl_on, .wl_level);

endmodule
