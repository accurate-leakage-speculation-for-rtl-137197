// tb_seq_checker -- exhaustive check of all four leakage templates against
// cube-string references, plus the count of flagged 4-bit surface patterns.
//
// No clock: every 7-bit input is applied in turn and compared after #1.
// The expected verdicts are the published minimised templates, rewritten
// here as lists of cubes; the 3-of-16 count is the property of the printed
// surface-code expression (the text's 7-of-16 claim is not checked, see
// the README).
module tb_seq_checker;
  import gladiator_pkg::*;
  import tb_ref_pkg::*;

  int checks = 0, failures = 0;
  logic [6:0] pat;
  logic leak_s, leak_c, leak_cd, leak_b;

  seq_checker #(.PSET(PSET_SURFACE)) u_s  (.pattern(pat), .leak(leak_s));
  seq_checker #(.PSET(PSET_COLOR))   u_c  (.pattern(pat), .leak(leak_c));
  seq_checker #(.PSET(PSET_COLOR_D)) u_cd (.pattern(pat), .leak(leak_cd));
  seq_checker #(.PSET(PSET_BPC))     u_b  (.pattern(pat), .leak(leak_b));

  task automatic chk(bit got, bit exp, string what);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s pattern=%b got=%b exp=%b", what, pat, got, exp);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int n4;
    n4 = 0;
    for (int v = 0; v < 128; v++) begin
      pat = 7'(v);
      #1;
      if (v < 32) begin
        chk(leak_s, ref_surface(pat[4:0]), "surface");
        if (v < 16 && leak_s) n4++;
      end
      if (v < 16) chk(leak_c, ref_color(pat[3:0]), "color");
      chk(leak_cd, ref_color_d(pat), "color_d");
      chk(leak_b, ref_bpc(pat), "bpc");
    end
    // Worked by hand from the template: with x4 = 0 only x3=x2=1 and
    // x1x0 in {00,01,11} match -> 3 of 16.
    checks++;
    if (n4 != 3) begin failures++; $display("FAIL 4-bit count %0d", n4); end
    // Examples: 0 1100 (x3x2=11,x1x0=00) is leakage, 0 0011 is not.
    pat = 7'b0001100; #1; chk(leak_s, 1'b1, "ex 01100");
    pat = 7'b0000011; #1; chk(leak_s, 1'b0, "ex 00011");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
