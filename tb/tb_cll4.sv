// tb_cll4 -- exhaustive check of the 4-bit carry look-ahead logic.
// For all 512 combinations of p, g and c0 the expected carries are formed
// by rippling c[k+1] = g[k] | p[k] & c[k] bit by bit, and PG/GG by the
// definitions "all bits propagate" and "the group generates a carry with
// c0 = 0".
module tb_cll4;
  logic [3:0] p, g;
  logic       c0, pg, gg;
  logic [4:1] c;
  int checks = 0, failures = 0;

  cll4 dut (.p, .g, .c0, .c, .pg, .gg);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int v = 0; v < 512; v++) begin
      logic [4:0] rc, rz;
      {p, g, c0} = 9'(v);
      #1;
      rc[0] = c0;
      rz[0] = 1'b0;
      for (int k = 0; k < 4; k++) begin
        rc[k+1] = g[k] | (p[k] & rc[k]);
        rz[k+1] = g[k] | (p[k] & rz[k]);
      end
      checks += 3;
      if (c !== rc[4:1])  begin failures++; $display("FAIL c v=%0d got %b exp %b", v, c, rc[4:1]); end
      if (pg !== &p)      begin failures++; $display("FAIL pg v=%0d", v); end
      if (gg !== rz[4])   begin failures++; $display("FAIL gg v=%0d", v); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
