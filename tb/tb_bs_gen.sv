// tb_bs_gen: self-checking testbench of the deterministic bit-stream generator.
//
// At M = 3 it checks the published example (x = 011 gives 01010100 with the
// first pattern and 01100010 with the second, first character = position 0)
// and all three published 3-bit patterns for every x. At M = 6 it checks that
// every pattern carries exactly x ones, that each position copies the digit
// the reference model names, and that the first two patterns are
// independent: 1/2 AND 1/2 gives 1/4.
module tb_bs_gen;
  import pimsc_pkg::*;
  import tb_sc_model_pkg::*;

  logic [2:0] x3;
  logic [5:0] x6;
  bs_pat_e    pat3, pat6;
  logic [7:0]  s3;
  logic [63:0] s6, s6b;
  int checks = 0, failures = 0;

  bs_gen #(.M(3)) dut3 (.x(x3), .pat(pat3), .stream(s3));
  bs_gen #(.M(6)) dut6 (.x(x6), .pat(pat6), .stream(s6));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic string str8(logic [7:0] s);
    string r;
    r = "";
    for (int q = 0; q < 8; q++) r = {r, s[q] ? "1" : "0"};
    return r;
  endfunction

  initial begin
    // published example
    x3 = 3'b011; pat3 = PAT_1; #1;
    checks++; if (str8(s3) != "01010100") begin failures++; $display("PAT_1(011) = %s", str8(s3)); end
    pat3 = PAT_2; #1;
    checks++; if (str8(s3) != "01100010") begin failures++; $display("PAT_2(011) = %s", str8(s3)); end
    // every 3-bit value and pattern, against the published digit order
    for (int p = 0; p < 3; p++)
      for (int x = 0; x < 8; x++) begin
        string digits;
        logic [7:0] e;
        digits = (p == 0) ? "21202120" : (p == 1) ? "21022012" : "21021220";
        x3 = 3'(x); pat3 = bs_pat_e'(p); #1;
        for (int q = 0; q < 8; q++)
          e[q] = (q == ((p == 1) ? 5 : 7)) ? 1'b0 : x[digits[q] - "0"];
        checks++;
        if (s3 !== e) begin failures++; $display("M=3 pat %0d x=%0d: %s", p, x, str8(s3)); end
      end
    // M = 6: counts and positions
    for (int p = 0; p < 3; p++)
      for (int x = 0; x < 64; x++) begin
        bundle_t e;
        x6 = 6'(x); pat6 = bs_pat_e'(p); #1;
        e = gen(6, x, p);
        checks++;
        if (ones(6, {192'b0, s6}) != x) begin failures++; $display("pat %0d x=%0d: %0d ones", p, x, ones(6, {192'b0, s6})); end
        checks++;
        if (s6 !== e[63:0]) begin failures++; $display("pat %0d x=%0d: %h", p, x, s6); end
      end
    x6 = 6'd32; pat6 = PAT_1; #1; s6b = s6;
    pat6 = PAT_2; #1;
    checks++;
    if (ones(6, {192'b0, s6 & s6b}) != 16) begin failures++; $display("1/2 x 1/2 wrong"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
