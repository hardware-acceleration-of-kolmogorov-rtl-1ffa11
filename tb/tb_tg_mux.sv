// tb_tg_mux: word-line lane selection.
// For random codes and every combination of pulse and window: outside the
// pulse the WL is off at level 0; in the W_P1 window it carries code a, in
// the W_PN window code b.
module tb_tg_mux;
  localparam int unsigned NWL = 16, NM = 4;
  logic [NM-1:0] code_a [NWL];
  logic [NM-1:0] code_b [NWL];
  logic sel_b, wl_pulse;
  logic wl_on [NWL];
  logic [NM-1:0] wl_level [NWL];
  int checks = 0, failures = 0;

  tg_mux #(.NWL(NWL), .NMAX_P(NM)) dut (.code_a, .code_b, .sel_b, .wl_pulse, .wl_on, .wl_level);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int rep = 0; rep < 50; rep++) begin
      for (int r = 0; r < NWL; r++) begin
        code_a[r] = NM'($urandom); code_b[r] = NM'($urandom);
      end
      for (int c = 0; c < 4; c++) begin
        {wl_pulse, sel_b} = 2'(c);
        #1;
        for (int r = 0; r < NWL; r++) begin
          automatic logic [NM-1:0] e = !wl_pulse ? '0 : (sel_b ? code_b[r] : code_a[r]);
          checks++;
          if (wl_on[r] !== wl_pulse || wl_level[r] !== e) begin
            failures++;
            $display("FAIL r=%0d pulse=%b sel_b=%b on=%b lvl=%0d exp=%0d", r, wl_pulse, sel_b, wl_on[r], wl_level[r], e);
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
