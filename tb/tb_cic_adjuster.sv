// tb_cic_adjuster -- check of the input adjuster.
// Every 5-bit input value is applied; one clock later the 25-bit output
// must equal the same value as a signed integer. Reset must clear it.
module tb_cic_adjuster;
  logic clk = 0, rst_n = 0;
  logic signed [4:0]  din;
  logic signed [24:0] dout;
  int checks = 0, failures = 0;

  cic_adjuster #(.IN_W(5), .OUT_W(25)) dut (.clk, .rst_n, .din, .dout);

  always #5 clk = ~clk;

  initial begin
    repeat (1000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    din = 5'sd7;
    repeat (2) @(posedge clk);
    #1;
    checks++;
    if (dout !== 25'sd0) begin failures++; $display("FAIL reset value %0d", dout); end
    rst_n = 1;
    for (int v = -16; v < 16; v++) begin
      @(negedge clk) din = 5'(v);
      @(posedge clk) #1;
      checks++;
      if (int'(dout) != v) begin failures++; $display("FAIL in %0d out %0d", v, dout); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
