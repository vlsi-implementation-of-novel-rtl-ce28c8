// tb_pfa -- exhaustive check of the partial full adder slice.
// All eight input combinations; the sum is checked against a + b + c and
// p/g against the propagate/generate definitions (p set when exactly one of
// a, b is set, g when both are).
module tb_pfa;
  logic a, b, c, s, p, g;
  int checks = 0, failures = 0;

  pfa dut (.a, .b, .c, .s, .p, .g);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int v = 0; v < 8; v++) begin
      logic [1:0] tot;
      {a, b, c} = 3'(v);
      #1;
      tot = 2'(a) + 2'(b) + 2'(c);
      checks += 3;
      if (s !== tot[0])         begin failures++; $display("FAIL s v=%0d", v); end
      if (g !== (a && b))       begin failures++; $display("FAIL g v=%0d", v); end
      if (p !== (a != b))       begin failures++; $display("FAIL p v=%0d", v); end
      // the carry a ripple adder would produce must be g | p&c
      checks++;
      if ((g | (p & c)) !== tot[1]) begin failures++; $display("FAIL carry v=%0d", v); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
