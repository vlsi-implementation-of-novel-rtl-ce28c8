// tb_cic_downsampler -- check of the decimation-by-16 stage.
// The input is a counter incremented every clock. After reset the first
// valid word must appear 16 clocks in and carry the 15th input word,
// each later word exactly 16 clocks after the previous and 16 larger.
module tb_cic_downsampler;
  localparam int R = 16;
  logic clk = 0, rst_n = 0;
  logic signed [15:0] din, dout;
  logic dout_valid;
  int checks = 0, failures = 0, words = 0, last_t = -1, t = 0;

  cic_downsampler #(.W(16), .R(R)) dut (.clk, .rst_n, .din, .dout, .dout_valid);

  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // din counts rising edges since reset release: it is t at edge t.
  always_ff @(posedge clk) din <= rst_n ? din + 16'sd1 : 16'sd0;

  // t = number of rising edges since reset release.
  always @(negedge clk) begin
    if (rst_n) begin
      if (dout_valid) begin
        checks += 2;
        // word k (k = 0, 1, ...) is sampled at t = 16k + 15, seen at 16k + 16
        if (t != R * (words + 1)) begin failures++; $display("FAIL word %0d at t=%0d", words, t); end
        if (int'(dout) != R * words + R - 1) begin failures++; $display("FAIL word %0d value %0d", words, dout); end
        if (last_t >= 0) begin
          checks++;
          if (t - last_t != R) begin failures++; $display("FAIL spacing %0d", t - last_t); end
        end
        last_t = t;
        words++;
      end
      t++;
    end
  end

  initial begin
    repeat (3) @(posedge clk);
    @(posedge clk) #1 rst_n = 1;
    repeat (R * 40 + 2) @(posedge clk);
    checks++;
    if (words != 40) begin failures++; $display("FAIL %0d words", words); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
