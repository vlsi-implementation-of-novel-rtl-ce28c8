// tb_cic_comb -- check of the comb stage y[n] = x[n] - x[n-M].
// Two instances, M = 1 (the filter's value) and M = 2, are fed random words
// with a valid strobe every fourth clock. Each output word must equal the
// input minus the input M valid words earlier (modulo 2^16), appear one
// clock after its input, and nothing may change between strobes.
module tb_cic_comb;
  logic clk = 0, rst_n = 0;
  logic signed [15:0] din, y1, y2;
  logic din_valid, v1, v2;
  int checks = 0, failures = 0;
  logic [15:0] hist [3];

  cic_comb #(.W(16), .M(1)) dut1 (.clk, .rst_n, .din, .din_valid, .dout(y1), .dout_valid(v1));
  cic_comb #(.W(16), .M(2)) dut2 (.clk, .rst_n, .din, .din_valid, .dout(y2), .dout_valid(v2));

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    din = '0; din_valid = 0;
    hist[0] = '0; hist[1] = '0; hist[2] = '0;
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1;
    for (int i = 0; i < 2000; i++) begin
      logic [15:0] e1, e2, hold1;
      @(negedge clk);
      din = 16'($urandom);
      if (i % 50 == 7) din = 16'sh7FFF;  // force wrap
      if (i % 50 == 8) din = -16'sh8000;
      din_valid = 1;
      hist[2] = hist[1]; hist[1] = hist[0]; hist[0] = din;
      e1 = hist[0] - hist[1];
      e2 = hist[0] - hist[2];
      @(negedge clk);
      din_valid = 0;
      din = 16'($urandom);
      checks += 4;
      if (!v1 || !v2)  begin failures++; $display("FAIL valid missing i=%0d", i); end
      if (y1 !== e1)   begin failures++; if (failures < 10) $display("FAIL M=1 i=%0d got %h exp %h", i, y1, e1); end
      if (y2 !== e2)   begin failures++; if (failures < 10) $display("FAIL M=2 i=%0d got %h exp %h", i, y2, e2); end
      hold1 = y1;
      repeat (2) @(negedge clk);
      if (v1 || y1 !== hold1) begin failures++; $display("FAIL changed without strobe i=%0d", i); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
