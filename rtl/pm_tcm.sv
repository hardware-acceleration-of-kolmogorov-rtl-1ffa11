// pm_tcm: pulse modulation and timing control of the input generator.
//
// Accepts one 2N-bit input vector per word line and turns each into a
// voltage-code pair: a = low N bits, driven during the 1-unit pulse W_P1, and
// b = high N bits, driven during the 2^N-unit pulse W_PN. Because a cell's
// current is linear in the DAC code, the charge a row delivers is
// proportional to a*1 + b*2^N, i.e. to the 2N-bit input. In TD-P mode N=4 and
// the whole 8-bit B value is used; in TD-A mode N=3 and the top 6 bits of B
// form the vector. W_PN is the part of W_P(N+1) after W_P1 ends.
//
// Sequence (one operation): IDLE (bit-line precharge, in_ready high) ->
// accept on in_valid, capture codes and mode, launch the delay chain ->
// PULSE while W_P(N+1) is high (2^N+1 cycles) plus the one cycle in which
// the controller sees the pulse has ended -> EVAL for one cycle (sa_sample
// and done high) -> IDLE. The end of the pulse is taken from the delay chain,
// not from a counter. done is high in the cycle after the (2^N+2)-th clock
// edge following the accepting edge; the next operation can be accepted
// 2^N+4 cycles after the previous one (20 in TD-P, 12 in TD-A).
// The code split, pulse ratios and precharge/evaluate order follow the paper;
// the ready/valid handshake, one-cycle evaluate and TD-A bit choice are this
// design's.
module pm_tcm
  import kan_pkg::*;
#(
  parameter int unsigned NWL    = 128,
  parameter int unsigned BW_P   = BW,
  parameter int unsigned NMAX_P = NMAX,
  parameter int unsigned NTDA_P = NTDA
) (
  input  logic              clk,
  input  logic              rst_n,
  input  td_mode_e          mode,       // sampled on accept
  input  logic              in_valid,
  output logic              in_ready,
  input  logic [BW_P-1:0]   in_vec [NWL],
  // delay chain
  output logic              go,
  output td_mode_e          chain_mode,
  input  logic              p1,
  input  logic              pn1,
  // TG-MUX / buffer control
  output logic [NMAX_P-1:0] code_a [NWL],
  output logic [NMAX_P-1:0] code_b [NWL],
  output logic              sel_b,      // W_PN window
  output logic              wl_pulse,   // W_P(N+1)
  // bit-line side
  output logic              bl_precharge,
  output logic              sa_sample,
  output logic              done
);

  typedef enum logic [1:0] {S_IDLE, S_PULSE, S_EVAL} state_e;
  state_e state;
  td_mode_e mode_q;

  // Pulse-voltage table: the 2N-bit vector of each mode split into (a, b).
  function automatic logic [2*NMAX_P-1:0] split_ab(input logic [BW_P-1:0] v, input td_mode_e m);
    logic [NMAX_P-1:0] a, b;
    logic [BW_P-1:0]   vt;
    if (m == MODE_TDA) begin
      vt = v >> (BW_P - 2*NTDA_P);
      a  = NMAX_P'(vt[NTDA_P-1:0]);
      b  = NMAX_P'(vt[2*NTDA_P-1:NTDA_P]);
    end else begin
      vt = v >> (BW_P - 2*NMAX_P);
      a  = vt[NMAX_P-1:0];
      b  = vt[2*NMAX_P-1:NMAX_P];
    end
    return {b, a};
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state  <= S_IDLE;
      mode_q <= MODE_TDP;
      go     <= 1'b0;
      for (int unsigned r = 0; r < NWL; r++) begin
        code_a[r] <= '0;
        code_b[r] <= '0;
      end
    end else begin
      unique case (state)
        S_IDLE: if (in_valid) begin
          mode_q <= mode;
          go     <= 1'b1;
          state  <= S_PULSE;
          for (int unsigned r = 0; r < NWL; r++)
            {code_b[r], code_a[r]} <= split_ab(in_vec[r], mode);
        end
        S_PULSE: if (!pn1) begin
          go    <= 1'b0;
          state <= S_EVAL;
        end
        S_EVAL: state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end

  assign in_ready     = (state == S_IDLE);
  assign chain_mode   = mode_q;
  assign wl_pulse     = pn1;
  assign sel_b        = pn1 & ~p1;
  assign bl_precharge = (state == S_IDLE);
  assign sa_sample    = (state == S_EVAL);
  assign done         = (state == S_EVAL);

  // Pulse and handshake rules.
  a_p1_inside_pulse : assert property (@(posedge clk) disable iff (!rst_n) p1 |-> pn1);
  a_busy_in_pulse   : assert property (@(posedge clk) disable iff (!rst_n) pn1 |-> !in_ready);
  a_no_precharge    : assert property (@(posedge clk) disable iff (!rst_n) pn1 |-> !bl_precharge);
  a_single_sample   : assert property (@(posedge clk) disable iff (!rst_n) sa_sample |=> !sa_sample);

endmodule
